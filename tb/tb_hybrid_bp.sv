// tb_hybrid_bp: self-checking test of the tournament (gshare + bimodal +
// meta) block predictor at the paper's size (4096 2-bit counters each,
// 13-bit history). A behavioural model with the same indexing and counter
// rules is run alongside; after each lookup its prediction and history must
// match. Random PCs from a small set, random outcomes and mispredict
// repairs are applied. The tables start from the all-zero array state.
module tb_hybrid_bp;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lookup_en, taken, upd_valid, upd_taken, upd_mispredict;
  logic [63:0] lookup_pc, upd_pc;
  logic [12:0] ghr, upd_hist;
  int checks = 0, failures = 0;
  logic [1:0] g [4096], b [4096], mt [4096];
  logic [12:0] mh;

  hybrid_bp dut (.clk, .rst_n, .lookup_en, .lookup_pc, .taken, .ghr,
                 .upd_valid, .upd_pc, .upd_hist, .upd_taken, .upd_mispredict);

  function automatic logic [11:0] fold(logic [12:0] h);
    logic [11:0] r = '0;
    for (int i = 0; i < 13; i++) r[i % 12] ^= h[i];
    return r;
  endfunction
  function automatic logic [1:0] sat(logic [1:0] c, logic up);
    if (up) return (c == 3) ? c : c + 1;
    return (c == 0) ? c : c - 1;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #500000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    logic [11:0] bi, gi;
    logic p;
    lookup_en = 0; lookup_pc = 0; upd_valid = 0; upd_pc = 0; upd_hist = 0; upd_taken = 0; upd_mispredict = 0;
    for (int i = 0; i < 4096; i++) begin
      g[i] = 1; b[i] = 1; mt[i] = 1;
      dut.gsh[i] = '0; dut.bim[i] = '0; dut.meta[i] = '0;
    end
    mh = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      lookup_pc = 64'h1000 + 64'($urandom_range(0, 7)) * 64'h40;
      bi = lookup_pc[14:3]; gi = bi ^ fold(mh);
      p = mt[bi][1] ? g[gi][1] : b[bi][1];
      #1;
      chk(ghr == mh, "history");
      chk(taken == p, "prediction");
      lookup_en = 1;
      // resolve the same block at once: outcome biased by PC
      upd_valid = 1; upd_pc = lookup_pc; upd_hist = mh;
      upd_taken = (lookup_pc[6] ? ($urandom_range(0, 9) != 0) : ($urandom_range(0, 9) == 0));
      upd_mispredict = (upd_taken != p);
      @(posedge clk); #1;
      begin
        logic [11:0] ubi, ugi;
        ubi = upd_pc[14:3]; ugi = ubi ^ fold(upd_hist);
        if ((g[ugi][1] == upd_taken) != (b[ubi][1] == upd_taken)) mt[ubi] = sat(mt[ubi], g[ugi][1] == upd_taken);
        g[ugi] = sat(g[ugi], upd_taken);
        b[ubi] = sat(b[ubi], upd_taken);
        if (upd_mispredict) mh = {upd_hist[11:0], upd_taken};
        else mh = {mh[11:0], p};
      end
      lookup_en = 0; upd_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
