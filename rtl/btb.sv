// btb: branch target buffer of the block predictor, indexed by head PC.
// 4096 entries, 8-way set associative, 16-bit partial tags (configuration
// table). Each entry holds the next-block target and the control type of
// the block's closing control operation. Set = PC[SW+2:3], tag = the next
// 16 PC bits. Lookup is combinational; an update writes the matching way or,
// on a miss, the way chosen by a per-set round-robin pointer (the
// replacement policy is this design's choice).
module btb
  import cgooo_pkg::*;
#(
  parameter int ENTRIES  = 4096,
  parameter int WAYS     = 8,
  parameter int TAG_BITS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] lookup_pc,
  output logic        hit,
  output logic [63:0] target,
  output ctype_e      ctype,
  input  logic        upd_valid,
  input  logic [63:0] upd_pc,
  input  logic [63:0] upd_target,
  input  ctype_e      upd_ctype
);
  localparam int SETS = ENTRIES / WAYS;
  localparam int SW   = $clog2(SETS);
  localparam int WW   = $clog2(WAYS);

  typedef struct packed {
    logic [TAG_BITS-1:0] tag;
    ctype_e              ct;
    logic [63:0]         tgt;
  } ent_t;

  // Tag/target arrays are plain memories (no reset, one per way); only the
  // valid bits and replacement pointers are reset.
  ent_t            tab [WAYS][SETS];
  logic [WAYS-1:0] vld [SETS];
  logic [WW-1:0]   rr  [SETS];

  wire [SW-1:0]       ls = lookup_pc[SW+2:3];
  wire [TAG_BITS-1:0] lt = lookup_pc[SW+3+TAG_BITS-1:SW+3];
  wire [SW-1:0]       us = upd_pc[SW+2:3];
  wire [TAG_BITS-1:0] ut = upd_pc[SW+3+TAG_BITS-1:SW+3];

  ent_t lk [WAYS];
  ent_t uk [WAYS];
  for (genvar w = 0; w < WAYS; w++) begin : g_rd
    assign lk[w] = tab[w][ls];
    assign uk[w] = tab[w][us];
  end

  always_comb begin
    hit = 1'b0; target = '0; ctype = CT_COND;
    for (int w = 0; w < WAYS; w++)
      if (vld[ls][w] && lk[w].tag == lt) begin
        hit = 1'b1; target = lk[w].tgt; ctype = lk[w].ct;
      end
  end

  logic          uhit;
  logic [WW-1:0] uway;
  always_comb begin
    uhit = 1'b0; uway = rr[us];
    for (int w = 0; w < WAYS; w++)
      if (vld[us][w] && uk[w].tag == ut) begin uhit = 1'b1; uway = WW'(w); end
  end

  for (genvar w = 0; w < WAYS; w++) begin : g_wr
    always_ff @(posedge clk)
      if (upd_valid && uway == WW'(w)) tab[w][us] <= '{tag: ut, ct: upd_ctype, tgt: upd_target};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin rr[s] <= '0; vld[s] <= '0; end
    end else if (upd_valid) begin
      vld[us][uway] <= 1'b1;
      if (!uhit) rr[us] <= rr[us] + 1'b1;
    end
  end
endmodule
