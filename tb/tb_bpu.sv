// tb_bpu: self-checking test of the block predictor unit: one lookup per
// head, made only when the head's HasCtrl bit is set, through the BTB, the
// tournament predictor and the return address stack, with the predicted
// next-block PC pushed into the Block PC Buffer. Directed phases:
//   1. HasCtrl = 0 heads predict the fall-through PC (Eq. 1) and the
//      buffer returns the predictions in order; the buffer fills up
//      (head_ready drops) and a flush empties it.
//   2. A conditional block trained taken predicts its target; trained
//      not-taken it predicts the fall-through.
//   3. A jump block predicts its target; a call block predicts its target
//      and pushes its fall-through, which a return block then predicts.
module tb_bpu;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, head_valid, head_ready, has_ctrl, pcbuf_pop, pcbuf_empty;
  word_t head_pc, ft_offset, pred_next, pcbuf_pc;
  hist_t pred_hist;
  resolve_t res;
  int checks = 0, failures = 0;

  bpu dut (.clk, .rst_n, .flush, .head_valid, .head_ready, .head_pc, .has_ctrl, .ft_offset,
           .pred_next, .pred_hist, .pcbuf_pop, .pcbuf_pc, .pcbuf_empty, .res);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // present one head for one cycle; returns the prediction
  task automatic head(word_t pc, bit hc, word_t fto, output word_t p);
    @(negedge clk);
    head_valid = 1; head_pc = pc; has_ctrl = hc; ft_offset = fto;
    #1 p = pred_next;
    @(posedge clk); #1 head_valid = 0;
  endtask

  task automatic train(word_t hpc, ctype_e ct, bit tk, word_t nxt, bit misp);
    @(negedge clk);
    res = '0; res.valid = 1; res.ctype = ct; res.taken = tk; res.head_pc = hpc;
    res.actual_next = nxt; res.mispredict = misp; res.hist = pred_hist;
    @(posedge clk); #1 res = '0;
  endtask

  task automatic drain();
    @(negedge clk); flush = 1; @(posedge clk); #1 flush = 0;
  endtask

  initial begin #1000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    word_t p, q [$];
    flush = 0; head_valid = 0; head_pc = 0; has_ctrl = 0; ft_offset = 0; pcbuf_pop = 0; res = '0;
    for (int i = 0; i < 4096; i++) begin dut.u_bp.gsh[i] = '0; dut.u_bp.bim[i] = '0; dut.u_bp.meta[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: no-control heads, buffer order and capacity
    for (int i = 0; i < 8; i++) begin
      word_t pc; pc = 64'h2000 + 64'(i) * 64'h40;
      head(pc, 0, 64'(8 * (i + 1)), p);
      chk(p == pc + 64'(8 * (i + 1)), "fall-through prediction (Eq. 1)");
      q.push_back(p);
    end
    #1 chk(!head_ready, "buffer full stops the front end");
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); chk(!pcbuf_empty && pcbuf_pc == q[i], "buffer order");
      pcbuf_pop = 1; @(posedge clk); #1 pcbuf_pop = 0;
    end
    #1 chk(pcbuf_empty && head_ready, "buffer drained");
    head(64'h2000, 0, 64'h10, p); drain();
    #1 chk(pcbuf_empty, "flush empties the buffer");
    // phase 2: conditional block
    for (int i = 0; i < 4; i++) train(64'h3000, CT_COND, 1, 64'h5000, 1);
    head(64'h3000, 1, 64'h28, p);
    chk(p == 64'h5000, "trained-taken conditional predicts the target");
    head(64'h3000, 0, 64'h28, p);
    chk(p == 64'h3028, "HasCtrl = 0 never looks up the predictor");
    drain();
    for (int i = 0; i < 8; i++) train(64'h3000, CT_COND, 0, 64'h3028, 1);
    head(64'h3000, 1, 64'h28, p);
    chk(p == 64'h3028, "trained-not-taken conditional predicts fall-through");
    drain();
    // phase 3: jump, call, return
    train(64'h4000, CT_JUMP, 1, 64'h4800, 1);
    head(64'h4000, 1, 64'h18, p);
    chk(p == 64'h4800, "jump predicts its target");
    train(64'h6000, CT_CALL, 1, 64'h7000, 1);
    train(64'h7010, CT_RET, 1, 64'h1234, 1);
    head(64'h6000, 1, 64'h20, p);
    chk(p == 64'h7000, "call predicts its target");
    head(64'h7010, 1, 64'h10, p);
    chk(p == 64'h6020, "return predicts the call's fall-through from the RAS");
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
