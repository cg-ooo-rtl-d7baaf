// tb_head_buffer: self-checking test of the Head Buffer and its Skipahead
// issue (4 entries). A queue model is filled from a model instruction
// queue; operands are drawn from a few local and global registers so that
// true, anti and output dependences are frequent; register readiness
// (LRF valid/pending, GRF ready) is random. Each cycle the instruction the
// buffer offers must be the oldest entry whose operands are ready and which
// has no dependence on any older entry (memory operations also stay in
// order when mem_inorder); req_skip must be set when it is not the oldest;
// a granted entry must leave and the buffer refill from the queue in order.
module tb_head_buffer;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, iq_valid, iq_pop, mem_inorder, req_valid, req_skip, grant, empty;
  uop_t iq_u, req_u;
  logic [19:0] lrf_valid, lrf_pending;
  logic [255:0] greg_ready;
  int checks = 0, failures = 0;
  uop_t hb [$];
  uop_t iq [$];

  head_buffer dut (.clk, .rst_n, .flush, .iq_valid, .iq_u, .iq_pop, .lrf_valid, .lrf_pending,
                   .greg_ready, .mem_inorder, .req_valid, .req_u, .req_skip, .grant, .empty);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic opnd_t ro(bit must);
    opnd_t o; o.v = must | 1'($urandom); o.g = 1'($urandom); o.id = 8'($urandom_range(0, 3));
    return o;
  endfunction
  function automatic bit same(opnd_t a, opnd_t b);
    return a.v && b.v && a.g == b.g && a.id == b.id;
  endfunction
  function automatic bit rdy_src(opnd_t s);
    if (!s.v) return 1;
    if (s.g) return greg_ready[s.id];
    return lrf_valid[s.id];
  endfunction

  initial begin #1000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int n_skip = 0, n_iss = 0;
  initial begin
    flush = 0; grant = 0; mem_inorder = 0; lrf_valid = 0; lrf_pending = 0; greg_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      int sel; bit pop_exp;
      @(negedge clk);
      while (iq.size() < 4) begin
        uop_t u; u = '0;
        u.op = $urandom_range(0, 4) == 0 ? OP_LD : ($urandom_range(0, 4) == 0 ? OP_ST : OP_ADD);
        u.rd = ro(1); u.rs1 = ro(0); u.rs2 = ro(0);
        if (u.op == OP_ST) u.rd = '0;
        u.pc = {$urandom, $urandom};
        iq.push_back(u);
      end
      iq_valid = $urandom_range(0, 3) != 0; iq_u = iq[0];
      lrf_valid = 20'($urandom); lrf_pending = 20'($urandom) & ~lrf_valid & 20'($urandom);
      greg_ready = {8{$urandom}};
      mem_inorder = 1'($urandom);
      #1;
      sel = -1;
      foreach (hb[k]) if (sel < 0) begin
        bit r, d;
        r = rdy_src(hb[k].rs1) && rdy_src(hb[k].rs2) && (!hb[k].rd.v || hb[k].rd.g || !lrf_pending[hb[k].rd.id]);
        d = 1;
        for (int j = 0; j < k; j++)
          if (same(hb[k].rs1, hb[j].rd) || same(hb[k].rs2, hb[j].rd) || same(hb[k].rd, hb[j].rs1) ||
              same(hb[k].rd, hb[j].rs2) || same(hb[k].rd, hb[j].rd) ||
              (mem_inorder && is_mem(hb[k].op) && is_mem(hb[j].op))) d = 0;
        if (r && d) sel = k;
      end
      chk(empty == (hb.size() == 0), "empty");
      chk(req_valid == (sel >= 0), "an issuable entry is offered");
      if (sel >= 0) begin
        chk(req_u == hb[sel], "oldest issuable entry offered");
        chk(req_skip == (sel > 0), "Skipahead flag");
      end
      grant = req_valid && $urandom_range(0, 3) != 0;
      flush = ($urandom_range(0, 199) == 0);
      #1;
      pop_exp = iq_valid && (hb.size() - ((grant && sel >= 0) ? 1 : 0)) < 4;
      chk(iq_pop == pop_exp, "refill from instruction queue");
      @(posedge clk); #1;
      if (flush) hb.delete();
      else begin
        if (grant && sel >= 0) begin hb.delete(sel); n_iss++; if (sel > 0) n_skip++; end
        if (pop_exp) hb.push_back(iq.pop_front());
      end
      grant = 0; flush = 0;
    end
    chk(n_skip > 100 && n_iss > 1000, "Skipahead issues exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
