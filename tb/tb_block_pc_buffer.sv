// tb_block_pc_buffer: self-checking test of the Block PC Buffer FIFO.
// Random push/pop/flush traffic is compared against a queue model: order of
// PCs, empty/full flags and the flush. A watchdog ends the run if it hangs.
// Interface under test: push/pc_in, pop/pc_out, empty, full, flush; one
// operation of each kind per clock. Default depth (8, a design choice).
module tb_block_pc_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, push, pop, empty, full;
  logic [63:0] pc_in, pc_out;
  int checks = 0, failures = 0;
  logic [63:0] model [$];

  block_pc_buffer dut (.clk, .rst_n, .flush, .push, .pc_in, .pop, .pc_out, .empty, .full);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #200000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    flush = 0; push = 0; pop = 0; pc_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty flag");
      chk(full  == (model.size() == 8), "full flag");
      if (model.size() != 0) chk(pc_out == model[0], "head value");
      flush = ($urandom_range(0, 99) == 0);
      push  = !full && $urandom_range(0, 1);
      pop   = !empty && $urandom_range(0, 2) == 0;
      pc_in = {$urandom, $urandom};
      @(posedge clk); #1;
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(pc_in);
      end
      flush = 0; push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
