// tb_block_window: self-checking test of one block window (instruction
// queue + head buffer + local register file). The testbench plays the rest
// of the core: it allocates a block, steers its instructions in random
// group sizes, grants every offered instruction, computes the result from
// the operand values the window supplies and writes local results back
// after a random 1-3 cycle delay through the two LRF write ports. Random
// blocks of ADD/ADDI use 4 local registers and read 4 global registers
// (random ready bits); global destinations go to 4 other registers. Every
// issued instruction's operand values must equal those of in-order
// execution, and the last value of each global destination must match, so
// any issue that breaks a true, anti or output dependence is caught. The
// window must become free when the block has drained and must have issued
// some instructions by Skipahead.
module tb_block_window;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc, alloc_mem_inorder, free, flush, req_skip, grant;
  bsn_t alloc_bsn, bsn;
  logic [5:0] alloc_size;
  word_t alloc_ft_pc, alloc_pred_next;
  hist_t alloc_hist;
  logic [2:0] in_cnt;
  uop_t in_u [4];
  logic [3:0] iq_free;
  logic [255:0] greg_ready;
  logic [7:0] grf_raddr [2];
  word_t grf_rdata [2];
  issue_t req;
  logic wb_en [2];
  bsn_t wb_bsn [2];
  logic [4:0] wb_addr [2];
  word_t wb_data [2];
  int checks = 0, failures = 0;

  block_window #(.ID(3)) dut (.clk, .rst_n, .alloc, .alloc_bsn, .alloc_size, .alloc_ft_pc, .alloc_pred_next,
    .alloc_hist, .alloc_mem_inorder, .free, .bsn, .in_cnt, .in_u, .iq_free, .flush, .greg_ready,
    .grf_raddr, .grf_rdata, .req, .req_skip, .grant, .wb_en, .wb_bsn, .wb_addr, .wb_data);

  word_t g [8];
  always_comb for (int p = 0; p < 2; p++) grf_rdata[p] = g[grf_raddr[p][2:0]];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #5000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  uop_t prog [32];
  word_t ea [32], eb [32];
  typedef struct packed { logic [4:0] addr; word_t data; logic [7:0] due; } pw_t;
  pw_t pend [$];
  int n_skip = 0, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    flush = 0; alloc = 0; alloc_bsn = 0; alloc_size = 0; alloc_ft_pc = 0; alloc_pred_next = 0; alloc_hist = 0;
    alloc_mem_inorder = 0; in_cnt = 0; grant = 0; greg_ready = '1;
    for (int k = 0; k < 4; k++) in_u[k] = '0;
    for (int p = 0; p < 2; p++) begin wb_en[p] = 0; wb_bsn[p] = 0; wb_addr[p] = 0; wb_data[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 150; blk++) begin
      int n, sent, issued; word_t l [4]; word_t gg [8]; bsn_t sn;
      n = $urandom_range(4, 24); sn = bsn_t'(blk);
      for (int r = 0; r < 8; r++) begin g[r] = {$urandom, $urandom}; gg[r] = g[r]; end
      for (int r = 0; r < 4; r++) l[r] = 'x;
      // random block; every local source is written earlier in the block
      begin
        bit wr [4]; for (int r = 0; r < 4; r++) wr[r] = 0;
        for (int k = 0; k < n; k++) begin
          uop_t u; u = '0;
          u.op = $urandom_range(0, 1) ? OP_ADD : OP_ADDI;
          u.imm = word_t'($urandom_range(0, 1000)); u.idx = 5'(k + 1); u.pc = 64'h100 + 64'(8 * (k + 1));
          u.rs1 = '{v: 1, g: 1, id: 8'($urandom_range(0, 3))};
          if ($urandom_range(0, 2) != 0) begin int r; r = $urandom_range(0, 3); if (wr[r]) u.rs1 = '{v: 1, g: 0, id: 8'(r)}; end
          if (u.op == OP_ADD) begin
            u.rs2 = '{v: 1, g: 1, id: 8'($urandom_range(0, 3))};
            if ($urandom_range(0, 1)) begin int r; r = $urandom_range(0, 3); if (wr[r]) u.rs2 = '{v: 1, g: 0, id: 8'(r)}; end
          end
          if ($urandom_range(0, 3) == 0) u.rd = '{v: 1, g: 1, id: 8'($urandom_range(4, 7))};
          else begin int r; r = $urandom_range(0, 3); u.rd = '{v: 1, g: 0, id: 8'(r)}; wr[r] = 1; end
          prog[k] = u;
          // in-order reference
          ea[k] = u.rs1.g ? gg[u.rs1.id] : l[u.rs1.id];
          eb[k] = !u.rs2.v ? '0 : (u.rs2.g ? gg[u.rs2.id] : l[u.rs2.id]);
          begin
            word_t r; r = (u.op == OP_ADD) ? ea[k] + eb[k] : ea[k] + u.imm;
            if (u.rd.g) gg[u.rd.id] = r; else l[u.rd.id] = r;
          end
        end
      end
      // allocate
      @(negedge clk);
      chk(free, "window free before allocation");
      alloc = 1; alloc_bsn = sn; alloc_size = 6'(n); alloc_mem_inorder = 0; in_cnt = 0;
      @(posedge clk); #1 alloc = 0;
      sent = 0; issued = 0;
      while (!free || sent < n) begin
        @(negedge clk);
        // steer a group
        in_cnt = 0;
        if (sent < n) begin
          int c; c = $urandom_range(0, 4);
          if (c > n - sent) c = n - sent;
          if (c > iq_free) c = iq_free;
          for (int k = 0; k < c; k++) in_u[k] = prog[sent + k];
          in_cnt = 3'(c);
        end
        greg_ready = $urandom_range(0, 3) != 0 ? '1 : '0;
        // local write-back of due results
        for (int p = 0; p < 2; p++) wb_en[p] = 0;
        begin
          int w; w = 0;
          for (int e = 0; e < pend.size() && w < 2; e++)
            if (pend[e].due <= 8'(cyc)) begin
              wb_en[w] = 1; wb_bsn[w] = sn; wb_addr[w] = pend[e].addr; wb_data[w] = pend[e].data;
              pend.delete(e); e--; w++;
            end
        end
        #1;
        grant = req.valid;
        if (req.valid) begin
          int k; word_t r;
          k = int'(req.u.idx) - 1;
          chk(req.bsn == sn && req.bw == 5'd3, "issue tags");
          chk(req.u == prog[k], "issued instruction");
          chk(req.a == ea[k], "first operand value");
          if (prog[k].rs2.v) chk(req.b == eb[k], "second operand value");
          r = (req.u.op == OP_ADD) ? req.a + req.b : req.a + req.u.imm;
          if (req.u.rd.g) g[req.u.rd.id] = r;
          else pend.push_back('{addr: req.u.rd.id[4:0], data: r, due: 8'(cyc + $urandom_range(0, 2))});
          if (req_skip) n_skip++;
          issued++;
        end
        @(posedge clk); #1;
        sent += int'(in_cnt); in_cnt = 0; grant = 0;
        for (int p = 0; p < 2; p++) wb_en[p] = 0;
      end
      // flush any write-backs still queued (they belong to the finished block)
      pend.delete();
      chk(issued == n, "every instruction issued once");
      for (int r = 4; r < 8; r++) chk(g[r] == gg[r], "global results in program order");
    end
    chk(n_skip > 50, "Skipahead issues exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
