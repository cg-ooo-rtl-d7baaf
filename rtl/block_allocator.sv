// block_allocator: the Block Allocation and Instruction Steer stage. A
// fetch group is either the start of a block (a `head` followed by some of
// the block's instructions) or a further piece of the current block.
//   * head: a free block window is chosen (round-robin over the windows,
//     this design's choice) and a BROB entry is reserved; the window
//     becomes the current steering target.
//   * instructions: all go to the current window's instruction queue.
// The stage fires only when everything it needs is there: a free window and
// a BROB slot for a head, enough IQ room for the instructions, and physical
// registers from rename (rename_ok). Otherwise it stalls the front end.
// Combinational except for the current-window register; pref_seg tells
// rename which GRF segment lies next to the target window.
module block_allocator
  import cgooo_pkg::*;
#(
  parameter int NBW      = 9,
  parameter int W        = 4,
  parameter int IQ_DEPTH = 10,
  parameter int SEGS     = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  input  logic in_valid,
  input  logic in_head,                    // group starts with a head
  input  logic [$clog2(W+1)-1:0] in_nops,  // instructions other than the head
  input  logic [NBW-1:0] bw_free,
  input  logic [$clog2(IQ_DEPTH+1)-1:0] bw_iq_free [NBW],
  input  logic brob_full,
  input  logic rename_ok,
  output logic fire,
  output logic alloc,                      // reserve a BW and a BROB entry
  output logic [$clog2(NBW)-1:0] target_bw,
  output logic [$clog2(SEGS)-1:0] pref_seg,
  output logic stall_no_bw                 // a head waits for a free window
);
  localparam int BI = $clog2(NBW);
  logic [BI-1:0] cur, rr;
  logic          found;
  logic [BI-1:0] pick;

  always_comb begin
    found = 1'b0; pick = '0;
    for (int k = NBW - 1; k >= 0; k--) begin
      int b;
      b = (int'(rr) + k) % NBW;
      if (bw_free[b]) begin found = 1'b1; pick = BI'(b); end
    end
  end

  assign target_bw = in_head ? pick : cur;
  assign pref_seg  = ($clog2(SEGS))'(int'(target_bw) % SEGS);

  logic room;
  assign room = int'(bw_iq_free[target_bw]) >= int'(in_nops);
  assign fire = in_valid && rename_ok && room && (!in_head || (found && !brob_full));
  assign alloc = fire && in_head;
  assign stall_no_bw = in_valid && in_head && !found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; rr <= '0;
    end else if (!flush && alloc) begin
      cur <= pick;
      rr  <= (int'(pick) == NBW - 1) ? '0 : pick + 1'b1;
    end
  end
endmodule
