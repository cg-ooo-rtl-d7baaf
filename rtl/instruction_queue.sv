// instruction_queue: the per-block-window FIFO that holds the instructions
// of one code block in program order (10 entries). The steer stage writes
// up to W instructions per cycle (in_cnt, packed from in_u[0]); the Head
// Buffer pulls one per cycle from the front. free_slots tells steer how much
// room is left; a flush empties it. Writes and the pull take effect at the
// clock edge; out_u / out_valid show the oldest entry combinationally.
module instruction_queue
  import cgooo_pkg::*;
#(
  parameter int DEPTH = 10,
  parameter int W     = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  input  logic [$clog2(W+1)-1:0] in_cnt,
  input  uop_t in_u [W],
  output logic [$clog2(DEPTH+1)-1:0] free_slots,
  output logic out_valid,
  output uop_t out_u,
  input  logic pop
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);
  uop_t mem [DEPTH];
  logic [AW-1:0] hd, tl;
  logic [CW-1:0] cnt;

  assign free_slots = CW'(DEPTH) - cnt;
  assign out_valid  = (cnt != 0);
  assign out_u      = mem[hd];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p, int k);
    int s = int'(p) + k;
    return AW'((s >= DEPTH) ? s - DEPTH : s);
  endfunction

  wire do_pop = pop && out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd <= '0; tl <= '0; cnt <= '0;
    end else if (flush) begin
      hd <= '0; tl <= '0; cnt <= '0;
    end else begin
      hd  <= do_pop ? inc(hd, 1) : hd;
      tl  <= inc(tl, int'(in_cnt));
      cnt <= cnt + CW'(in_cnt) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk)
    for (int k = 0; k < W; k++)
      if (k < int'(in_cnt)) mem[inc(tl, k)] <= in_u[k];

  assert property (@(posedge clk) disable iff (!rst_n || flush) int'(in_cnt) <= int'(free_slots));
endmodule
