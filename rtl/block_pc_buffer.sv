// block_pc_buffer: the FIFO that carries predicted next-block PCs from the
// block predictor to fetch. An entry of 64'b0 tells fetch that the next PC
// is not known yet and that it should keep fetching the adjacent block.
// A synchronous flush empties it on a squash. One push and one pop per cycle;
// pc_out is the oldest entry (valid when !empty). The depth is not given by
// the paper and is a design choice.
module block_pc_buffer #(
  parameter int DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  input  logic        push,
  input  logic [63:0] pc_in,
  input  logic        pop,
  output logic [63:0] pc_out,
  output logic        empty,
  output logic        full
);
  localparam int AW = $clog2(DEPTH);
  logic [63:0] mem [DEPTH];
  logic [AW-1:0] rd_p, wr_p;
  logic [AW:0]   cnt;

  assign empty  = (cnt == 0);
  assign full   = (cnt == (AW+1)'(DEPTH));
  assign pc_out = mem[rd_p];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p <= '0; wr_p <= '0; cnt <= '0;
    end else if (flush) begin
      rd_p <= '0; wr_p <= '0; cnt <= '0;
    end else begin
      if (do_push) wr_p <= (wr_p == AW'(DEPTH-1)) ? '0 : wr_p + 1'b1;
      if (do_pop)  rd_p <= (rd_p == AW'(DEPTH-1)) ? '0 : rd_p + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem[wr_p] <= pc_in;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
endmodule
