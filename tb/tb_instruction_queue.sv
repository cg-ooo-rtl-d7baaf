// tb_instruction_queue: self-checking test of a block window's Instruction
// Queue (10-entry in-order FIFO, up to 4 writes and 1 read per cycle).
// Random write bursts within free_slots, random pops and rare flushes are
// compared with a queue model (order, free_slots, out_valid). Writes and
// pops take effect at the clock edge.
module tb_instruction_queue;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, out_valid, pop;
  logic [2:0] in_cnt;
  uop_t in_u [4];
  uop_t out_u;
  logic [3:0] free_slots;
  int checks = 0, failures = 0;
  uop_t model [$];

  instruction_queue dut (.clk, .rst_n, .flush, .in_cnt, .in_u, .free_slots, .out_valid, .out_u, .pop);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #500000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    flush = 0; pop = 0; in_cnt = 0;
    for (int k = 0; k < 4; k++) in_u[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int n;
      @(negedge clk);
      chk(free_slots == 4'(10 - model.size()), "free slots");
      chk(out_valid == (model.size() != 0), "out_valid");
      if (model.size() != 0) chk(out_u == model[0], "order");
      n = $urandom_range(0, 4); if (n > 10 - model.size()) n = 10 - model.size();
      in_cnt = 3'(n);
      for (int k = 0; k < 4; k++) begin in_u[k] = '0; in_u[k].pc = {$urandom, $urandom}; in_u[k].imm = {$urandom, $urandom}; end
      pop = out_valid && $urandom_range(0, 1);
      flush = ($urandom_range(0, 99) == 0);
      @(posedge clk); #1;
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        for (int k = 0; k < n; k++) model.push_back(in_u[k]);
      end
      flush = 0; pop = 0; in_cnt = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
