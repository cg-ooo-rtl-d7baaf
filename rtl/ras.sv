// ras: return address stack of the block predictor. A block that ends in a
// call pushes its fall-through block PC; a block that ends in a return pops
// the predicted target. Circular storage: an overflow overwrites the oldest
// entry, an underflow returns whatever the slot holds. Depth is not given in
// the paper (design choice: 16). Push and pop take effect at the clock edge;
// top is combinational.
module ras #(
  parameter int DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  logic [63:0] push_pc,
  input  logic        pop,
  output logic [63:0] top
);
  localparam int AW = $clog2(DEPTH);
  logic [63:0]   stk [DEPTH];
  logic [AW-1:0] sp;          // points at the current top

  assign top = stk[sp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= '0;
      for (int i = 0; i < DEPTH; i++) stk[i] <= '0;
    end else if (push && pop) begin
      stk[sp] <= push_pc;
    end else if (push) begin
      stk[sp + 1'b1] <= push_pc;
      sp <= sp + 1'b1;
    end else if (pop) begin
      sp <= sp - 1'b1;
    end
  end
endmodule
