// tb_btb: self-checking test of the Branch Target Buffer (4096 entries,
// 8-way, 16-bit tags, round-robin replacement). Random updates to a set of
// PCs that alias into few sets are checked against a model of the same
// organisation: hit, target and control type on lookup, including
// evictions. Lookup is combinational, updates at the clock edge.
module tb_btb;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [63:0] lookup_pc, target, upd_pc, upd_target;
  logic hit, upd_valid;
  ctype_e ctype, upd_ctype;
  int checks = 0, failures = 0;
  logic        mv [512][8];
  logic [15:0] mt [512][8];
  logic [63:0] mg [512][8];
  ctype_e      mc [512][8];
  logic [2:0]  mrr [512];

  btb dut (.clk, .rst_n, .lookup_pc, .hit, .target, .ctype, .upd_valid, .upd_pc, .upd_target, .upd_ctype);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] rpc();
    // 4 sets, 12 tags each: forces replacement
    return {32'd0, 4'd0, 12'($urandom_range(0, 11)), 9'($urandom_range(0, 3) * 100), 3'd0};
  endfunction

  initial begin #500000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    upd_valid = 0; upd_pc = 0; upd_target = 0; upd_ctype = CT_COND; lookup_pc = 0;
    for (int s = 0; s < 512; s++) begin mrr[s] = 0; for (int w = 0; w < 8; w++) mv[s][w] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      logic [8:0] s; logic [15:0] t; logic h; int hw;
      @(negedge clk);
      lookup_pc = rpc(); #1;
      s = lookup_pc[11:3]; t = lookup_pc[27:12]; h = 0; hw = 0;
      for (int w = 0; w < 8; w++) if (mv[s][w] && mt[s][w] == t) begin h = 1; hw = w; end
      chk(hit == h, "hit");
      if (h) begin chk(target == mg[s][hw], "target"); chk(ctype == mc[s][hw], "type"); end
      upd_valid = $urandom_range(0, 1); upd_pc = rpc(); upd_target = {$urandom, $urandom};
      upd_ctype = ctype_e'($urandom_range(0, 3));
      @(posedge clk); #1;
      if (upd_valid) begin
        s = upd_pc[11:3]; t = upd_pc[27:12]; h = 0; hw = mrr[s];
        for (int w = 0; w < 8; w++) if (mv[s][w] && mt[s][w] == t) begin h = 1; hw = w; end
        mv[s][hw] = 1; mt[s][hw] = t; mg[s][hw] = upd_target; mc[s][hw] = upd_ctype;
        if (!h) mrr[s] = mrr[s] + 1;
      end
      upd_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
