// bpu: block-level branch prediction unit. It is looked up once per code
// block, by the block's `head` instruction, instead of once per fetch group.
//   * HasCtrl = 0: no table is read; next block = PC_head + fall-through
//     offset (Eq. 1 of the design).
//   * HasCtrl = 1: the BTB is read; on a hit the control type selects the
//     target: conditional -> direction predictor, taken = BTB target,
//     not taken = fall-through; jump -> target; call -> target and push the
//     fall-through PC on the RAS; return -> RAS top. A BTB miss predicts the
//     fall-through block.
// The predicted PC is pushed into the Block PC Buffer, read by fetch.
// Resolved control operations train the tables at the PC of their head,
// which the execution unit computes as PC_ctrl - code-block-offset (Eq. 2).
// Timing: the lookup is combinational from head_valid and the push happens
// at the same clock edge; head_ready is low while the buffer is full.
module bpu
  import cgooo_pkg::*;
#(
  parameter int BP_ENTRIES  = 4096,
  parameter int BTB_ENTRIES = 4096,
  parameter int BTB_WAYS    = 8,
  parameter int RAS_DEPTH   = 16,
  parameter int PCBUF_DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,            // squash: drop buffered predictions
  // lookup from decode
  input  logic     head_valid,
  output logic     head_ready,
  input  word_t    head_pc,
  input  logic     has_ctrl,
  input  word_t    ft_offset,
  output word_t    pred_next,        // prediction made for this head
  output hist_t    pred_hist,
  // Block PC Buffer read side (fetch)
  input  logic     pcbuf_pop,
  output word_t    pcbuf_pc,
  output logic     pcbuf_empty,
  // training
  input  resolve_t res
);
  logic    bp_taken, btb_hit;
  word_t   btb_tgt, ras_top;
  ctype_e  btb_ct;
  hist_t   ghr;
  logic    pb_full;

  wire   lookup = head_valid && head_ready && has_ctrl;
  word_t ft_pc;
  assign ft_pc = head_pc + ft_offset;

  hybrid_bp #(.ENTRIES(BP_ENTRIES), .GHR_BITS(GHR_BITS)) u_bp (
    .clk, .rst_n, .lookup_en(lookup && btb_hit && btb_ct == CT_COND),
    .lookup_pc(head_pc), .taken(bp_taken), .ghr(ghr),
    .upd_valid(res.valid && res.ctype == CT_COND), .upd_pc(res.head_pc),
    .upd_hist(res.hist), .upd_taken(res.taken), .upd_mispredict(res.mispredict));

  btb #(.ENTRIES(BTB_ENTRIES), .WAYS(BTB_WAYS)) u_btb (
    .clk, .rst_n, .lookup_pc(head_pc), .hit(btb_hit), .target(btb_tgt), .ctype(btb_ct),
    .upd_valid(res.valid && res.taken), .upd_pc(res.head_pc),
    .upd_target(res.actual_next), .upd_ctype(res.ctype));

  ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst_n,
    .push(lookup && btb_hit && btb_ct == CT_CALL), .push_pc(ft_pc),
    .pop(lookup && btb_hit && btb_ct == CT_RET), .top(ras_top));

  always_comb begin
    pred_next = ft_pc;
    if (has_ctrl && btb_hit)
      unique case (btb_ct)
        CT_COND: pred_next = bp_taken ? btb_tgt : ft_pc;
        CT_JUMP,
        CT_CALL: pred_next = btb_tgt;
        CT_RET:  pred_next = ras_top;
      endcase
  end
  assign pred_hist  = ghr;
  assign head_ready = !pb_full;

  block_pc_buffer #(.DEPTH(PCBUF_DEPTH)) u_pcbuf (
    .clk, .rst_n, .flush, .push(head_valid && head_ready), .pc_in(pred_next),
    .pop(pcbuf_pop), .pc_out(pcbuf_pc), .empty(pcbuf_empty), .full(pb_full));
endmodule
