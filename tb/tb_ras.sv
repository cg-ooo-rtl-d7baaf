// tb_ras: self-checking test of the return address stack. Random pushes
// and pops are compared with a bounded stack model (DEPTH 16; overflow drops
// the oldest entry). Only the top is checked, and only while the model
// knows it (after an underflow the slot content is undefined by design).
// Push/pop act at the clock edge; top is combinational. Has a watchdog.
module tb_ras;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop;
  logic [63:0] push_pc, top;
  int checks = 0, failures = 0;
  logic [63:0] model [$];

  ras dut (.clk, .rst_n, .push, .push_pc, .pop, .top);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #200000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    push = 0; pop = 0; push_pc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (model.size() != 0) chk(top == model[$], "top of stack");
      push = $urandom_range(0, 2) != 0 && i < 2500 ? $urandom_range(0, 1) : 0;
      pop  = !push && model.size() != 0 && $urandom_range(0, 1);
      push_pc = {$urandom, $urandom};
      @(posedge clk); #1;
      if (push) begin model.push_back(push_pc); if (model.size() > 16) void'(model.pop_front()); end
      if (pop) void'(model.pop_back());
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
