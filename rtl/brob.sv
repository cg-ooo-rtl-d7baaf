// brob: the Block Re-Order Buffer. It keeps program order per code block,
// not per instruction: 16 entries, each holding the block's sequence number
// (its slot plus a wrap bit), BlkSize (the number of the block's
// instructions still to complete, loaded from the head) and up to ten
// global-write records GW0..GW9 (architectural register, new and previous
// physical register), filled as the block's instructions leave rename.
//   * Each completing instruction decrements its block's BlkSize; a block
//     whose count is zero is complete.
//   * The oldest block commits when complete: its GW records go to rename,
//     which makes those registers architectural and frees the old ones. One
//     block commits per cycle.
//   * flush removes every block younger than flush_bsn, and the block itself
//     when flush_incl (memory mis-speculation); blocks are contiguous, so
//     this only moves the tail.
// Allocation returns the new block's sequence number combinationally and
// takes effect at the clock edge.
module brob
  import cgooo_pkg::*;
#(
  parameter int ENTRIES = 16,
  parameter int W       = 4,
  parameter int NCOMP   = 14
) (
  input  logic  clk,
  input  logic  rst_n,
  // allocation by a head
  input  logic  alloc,
  input  logic [5:0] alloc_size,
  output bsn_t  alloc_bsn,
  output logic  full,
  // global-write records of the block being steered
  input  logic  gw_we   [W],
  input  bsn_t  gw_bsn,
  input  logic [AREG_BITS-1:0] gw_areg_in [W],
  input  logic [PREG_BITS-1:0] gw_new_in  [W],
  input  logic [PREG_BITS-1:0] gw_old_in  [W],
  // completions
  input  logic  comp_v   [NCOMP],
  input  bsn_t  comp_bsn [NCOMP],
  // commit
  output logic  commit,
  output bsn_t  commit_bsn,
  output logic [NGW-1:0]       gw_v,
  output logic [AREG_BITS-1:0] gw_areg [NGW],
  output logic [PREG_BITS-1:0] gw_new  [NGW],
  output logic [PREG_BITS-1:0] gw_old  [NGW],
  // squash
  input  logic  flush,
  input  bsn_t  flush_bsn,
  input  logic  flush_incl,
  // status
  output bsn_t  head_bsn,
  output logic  empty,
  output logic [ENTRIES-1:0] live
);
  localparam int AW = $clog2(ENTRIES);
  typedef struct packed {
    logic [5:0]                     remain;
    logic [3:0]                     ngw;
    logic [NGW-1:0][AREG_BITS-1:0]  areg;
    logic [NGW-1:0][PREG_BITS-1:0]  pnew;
    logic [NGW-1:0][PREG_BITS-1:0]  pold;
  } ent_t;

  ent_t e [ENTRIES];
  bsn_t hd, tl;

  assign head_bsn  = hd;
  assign alloc_bsn = tl;
  assign empty     = (hd == tl);
  assign full      = (tl[AW-1:0] == hd[AW-1:0]) && (tl[AW] != hd[AW]);

  always_comb
    for (int i = 0; i < ENTRIES; i++) begin
      logic [AW-1:0] d;
      d       = AW'(i) - hd[AW-1:0];
      live[i] = {1'b0, d} < (tl - hd);
    end

  wire [AW-1:0] hi = hd[AW-1:0];
  assign commit     = !empty && e[hi].remain == 0;
  assign commit_bsn = hd;
  always_comb
    for (int g = 0; g < NGW; g++) begin
      gw_v[g]    = commit && (g < int'(e[hi].ngw));
      gw_areg[g] = e[hi].areg[g];
      gw_new[g]  = e[hi].pnew[g];
      gw_old[g]  = e[hi].pold[g];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd <= '0; tl <= '0;
      for (int i = 0; i < ENTRIES; i++) e[i] <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        logic [5:0] dec;
        logic [3:0] n;
        dec = '0;
        for (int c = 0; c < NCOMP; c++)
          if (comp_v[c] && comp_bsn[c][AW-1:0] == AW'(i)) dec = dec + 6'd1;
        e[i].remain <= e[i].remain - dec;
        n = (alloc && !full && tl[AW-1:0] == AW'(i)) ? 4'd0 : e[i].ngw;
        for (int k = 0; k < W; k++)
          if (gw_we[k] && gw_bsn[AW-1:0] == AW'(i) && n < 4'(NGW)) begin
            e[i].areg[n] <= gw_areg_in[k];
            e[i].pnew[n] <= gw_new_in[k];
            e[i].pold[n] <= gw_old_in[k];
            n = n + 4'd1;
          end
        e[i].ngw <= n;
      end
      if (alloc && !full) begin
        e[tl[AW-1:0]].remain <= alloc_size;
      end
      if (commit) hd <= hd + 1'b1;
      if (flush)  tl <= flush_incl ? flush_bsn : flush_bsn + 1'b1;
      else if (alloc && !full) tl <= tl + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(alloc && full));
endmodule
