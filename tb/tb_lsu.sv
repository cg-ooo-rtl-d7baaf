// tb_lsu: self-checking test of the load-store unit (LQ 64, SQ 32, block
// sequence numbers in both queues). The data memory answers reads after a
// random delay. Directed cases, each checked for its write-back data, the
// memory traffic and the squash signal:
//   1. a load reads memory;
//   2. a load younger than an executed store to the same address takes the
//      store's data (forwarding) without a memory read;
//   3. a store older than an already executed load to the same address
//      reports a memory mis-speculation naming the load's block and head PC;
//      a store to another address does not;
//   4. a load older than an executed store does not take its data;
//   5. committing a block drains its stores to memory in order;
//   6. a squash drops the loads of the killed blocks (no write-back) while
//      an older block's load still completes.
module tb_lsu;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bsn_t head_bsn, st_done_bsn, viol_bsn, commit_bsn, flush_bsn;
  memop_t in;
  logic can_accept, st_done, viol, commit, flush, flush_incl, dmem_req, dmem_resp, dmem_wr, empty;
  wb_t wb;
  word_t viol_pc, dmem_addr, dmem_rdata, dmem_waddr, dmem_wdata;
  logic [6:0] dmem_tag, dmem_resp_tag;
  int checks = 0, failures = 0;

  lsu dut (.clk, .rst_n, .head_bsn, .in, .can_accept, .wb, .st_done, .st_done_bsn, .viol, .viol_bsn,
           .viol_pc, .commit, .commit_bsn, .flush, .flush_bsn, .flush_incl, .dmem_req, .dmem_addr,
           .dmem_tag, .dmem_resp, .dmem_resp_tag, .dmem_rdata, .dmem_wr, .dmem_waddr, .dmem_wdata, .empty);

  // memory with random read delay
  word_t mem [word_t];
  typedef struct packed { word_t a; logic [6:0] t; int due; } rq_t;
  rq_t rq [$];
  int cyc = 0, n_reads = 0;
  word_t wlog_a [$], wlog_d [$];
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (dmem_req) begin rq.push_back('{a: dmem_addr, t: dmem_tag, due: cyc + $urandom_range(2, 6)}); n_reads++; end
    if (dmem_wr) begin mem[dmem_waddr] = dmem_wdata; wlog_a.push_back(dmem_waddr); wlog_d.push_back(dmem_wdata); end
  end
  always_comb begin
    dmem_resp = 0; dmem_resp_tag = 0; dmem_rdata = 0;
    foreach (rq[i]) if (!dmem_resp && rq[i].due <= cyc) begin
      dmem_resp = 1; dmem_resp_tag = rq[i].t; dmem_rdata = mem.exists(rq[i].a) ? mem[rq[i].a] : '0;
    end
  end
  always_ff @(posedge clk) if (dmem_resp) begin
    int k; k = -1;
    foreach (rq[i]) if (k < 0 && rq[i].due <= cyc - 1 + 1 && rq[i].t == dmem_resp_tag) k = i;
    if (k >= 0) rq.delete(k);
  end

  // write-back log
  word_t wbv [int];
  always_ff @(posedge clk) if (wb.valid) wbv[{wb.bsn, wb.rd.id}] = wb.data;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic op(bit st, word_t a, word_t d, bsn_t b, int idx, int rd, output bit v, output bsn_t vb, output word_t vpc);
    @(negedge clk);
    in = '0; in.valid = 1; in.is_store = st; in.addr = a; in.data = d; in.bsn = b; in.idx = 5'(idx);
    in.rd = '{v: !st, g: 0, id: 8'(rd)}; in.head_pc = 64'h4000 + 64'(b) * 64'h100;
    @(posedge clk); #1 in = '0; v = viol; vb = viol_bsn; vpc = viol_pc;
  endtask

  task automatic wait_cycles(int n); repeat (n) @(posedge clk); #1; endtask

  initial begin #2000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    bit v; bsn_t vb; word_t vpc; int r0;
    head_bsn = 0; in = '0; commit = 0; commit_bsn = 0; flush = 0; flush_bsn = 0; flush_incl = 0;
    for (int i = 0; i < 64; i++) mem[64'h1000 + 64'(8 * i)] = 64'(1000 + i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. plain load
    r0 = n_reads;
    op(0, 64'h1008, 0, 0, 1, 1, v, vb, vpc);
    wait_cycles(10);
    chk(wbv.exists({5'd0, 8'd1}) && wbv[{5'd0, 8'd1}] == 1001, "load reads memory");
    chk(n_reads == r0 + 1, "one memory read");
    // 2. forwarding from an older store
    op(1, 64'h1010, 64'hAAAA, 0, 2, 0, v, vb, vpc);
    chk(!v, "store with no younger load: no squash");
    r0 = n_reads;
    op(0, 64'h1010, 0, 1, 1, 2, v, vb, vpc);
    wait_cycles(3);
    chk(wbv.exists({5'd1, 8'd2}) && wbv[{5'd1, 8'd2}] == 64'hAAAA, "load forwarded from older store");
    chk(n_reads == r0, "forwarded load makes no memory read");
    // 3. store older than an executed younger load
    op(0, 64'h1018, 0, 2, 3, 3, v, vb, vpc);
    op(1, 64'h1020, 64'h5, 1, 2, 0, v, vb, vpc);
    chk(!v, "store to another address: no squash");
    op(1, 64'h1018, 64'h7, 1, 3, 0, v, vb, vpc);
    chk(v && vb == 2 && vpc == 64'h4200, "memory mis-speculation found, names the load's block");
    // 4. older load does not see a younger store
    op(1, 64'h1030, 64'hBEEF, 2, 5, 0, v, vb, vpc);
    op(0, 64'h1030, 0, 2, 4, 4, v, vb, vpc);
    wait_cycles(10);
    chk(wbv.exists({5'd2, 8'd4}) && wbv[{5'd2, 8'd4}] == 1006, "older load ignores a younger store");
    // 5. commit blocks 0, 1, 2 in order: stores drain in program order
    for (int b = 0; b < 3; b++) begin
      @(negedge clk); commit = 1; commit_bsn = bsn_t'(b); @(posedge clk); #1 commit = 0; head_bsn = bsn_t'(b + 1);
    end
    wait_cycles(8);
    chk(wlog_a.size() == 4, "all committed stores written");
    if (wlog_a.size() == 4) begin
      chk(wlog_a[0] == 64'h1010 && wlog_d[0] == 64'hAAAA, "drain order 1");
      chk(wlog_a[1] == 64'h1020 && wlog_a[2] == 64'h1018 && wlog_d[2] == 7, "drain order 2");
      chk(wlog_a[3] == 64'h1030 && mem[64'h1030] == 64'hBEEF, "drain order 3");
    end
    chk(empty, "queues empty after commit");
    // 6. squash drops a killed load in flight
    op(0, 64'h1040, 0, 4, 1, 9, v, vb, vpc);
    op(0, 64'h1048, 0, 3, 1, 8, v, vb, vpc);
    @(negedge clk); flush = 1; flush_bsn = 3; flush_incl = 0; @(posedge clk); #1 flush = 0;
    wait_cycles(10);
    chk(!wbv.exists({5'd4, 8'd9}), "squashed load never writes back");
    chk(wbv.exists({5'd3, 8'd8}) && wbv[{5'd3, 8'd8}] == 1009, "surviving load still completes");
    @(negedge clk); commit = 1; commit_bsn = 3; @(posedge clk); #1 commit = 0; head_bsn = 4;
    wait_cycles(2);
    chk(empty, "empty at the end of the directed part");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
