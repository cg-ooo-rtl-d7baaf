// block_window: one Block Window (BW), the unit that holds and issues one
// dynamic code block at a time. It combines the block's Instruction Queue,
// its Head Buffer with Skipahead issue, and its Local Register File. The
// window's GRF segment is kept in the shared grf module, which reads and
// writes it through this window's ports.
//   alloc   : the block allocator gives the window a new block (its BROB
//             sequence number, its instruction count, its fall-through and
//             predicted next-block PCs and predictor history); all local
//             registers become invalid.
//   steer   : up to W instructions of the block per cycle into the IQ.
//   issue   : one instruction per cycle, offered with its operand values
//             read from the LRF (local) or the GRF (global) in the same cycle.
//   wb      : 2 local-register write ports; a write tagged with a sequence
//             number other than the window's current block is dropped, so
//             late results of a previous block cannot corrupt the new one.
//   free    : the window can take a new block: every instruction of the
//             current one has been received and has issued.
//   flush   : squash the block: empty IQ and Head Buffer, invalidate LRF.
module block_window
  import cgooo_pkg::*;
#(
  parameter int ID         = 0,
  parameter int W          = 4,
  parameter int IQ_DEPTH   = 10,
  parameter int HB_ENTRIES = 4,
  parameter int LRF_SIZE   = 20,
  parameter int NUM_PREGS  = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  // allocation
  input  logic  alloc,
  input  bsn_t  alloc_bsn,
  input  logic [5:0] alloc_size,
  input  word_t alloc_ft_pc,
  input  word_t alloc_pred_next,
  input  hist_t alloc_hist,
  input  logic  alloc_mem_inorder,  // keep this block's memory operations in order
  output logic  free,
  output bsn_t  bsn,
  // steer
  input  logic [$clog2(W+1)-1:0] in_cnt,
  input  uop_t  in_u [W],
  output logic [$clog2(IQ_DEPTH+1)-1:0] iq_free,
  // squash
  input  logic  flush,
  // global registers
  input  logic [NUM_PREGS-1:0] greg_ready,
  output logic [PREG_BITS-1:0] grf_raddr [2],
  input  word_t grf_rdata [2],
  // issue
  output issue_t req,
  output logic   req_skip,
  input  logic   grant,
  // local write-back
  input  logic   wb_en   [2],
  input  bsn_t   wb_bsn  [2],
  input  logic [4:0] wb_addr [2],
  input  word_t  wb_data [2]
);
  logic  busy;
  word_t ft_pc, pred_next;
  hist_t hist;
  logic [5:0] to_recv;
  logic  mem_inorder;

  logic  iq_valid, iq_pop, hb_empty, hb_req;
  uop_t  iq_u, hb_u;
  logic [LRF_SIZE-1:0] lvalid, lpend;
  logic [4:0]  lrd_addr [2];
  word_t       lrd_data [2];
  logic        lwe [2];

  instruction_queue #(.DEPTH(IQ_DEPTH), .W(W)) u_iq (
    .clk, .rst_n, .flush, .in_cnt, .in_u, .free_slots(iq_free),
    .out_valid(iq_valid), .out_u(iq_u), .pop(iq_pop));

  head_buffer #(.ENTRIES(HB_ENTRIES), .LRF_SIZE(LRF_SIZE), .NUM_PREGS(NUM_PREGS)) u_hb (
    .clk, .rst_n, .flush, .iq_valid, .iq_u, .iq_pop, .lrf_valid(lvalid), .lrf_pending(lpend), .greg_ready, .mem_inorder,
    .req_valid(hb_req), .req_u(hb_u), .req_skip, .grant, .empty(hb_empty));

  assign lrd_addr[0]  = hb_u.rs1.id[4:0];
  assign lrd_addr[1]  = hb_u.rs2.id[4:0];
  assign grf_raddr[0] = hb_u.rs1.id;
  assign grf_raddr[1] = hb_u.rs2.id;
  assign lwe[0] = wb_en[0] && wb_bsn[0] == bsn && busy;
  assign lwe[1] = wb_en[1] && wb_bsn[1] == bsn && busy;

  lrf #(.ENTRIES(LRF_SIZE)) u_lrf (
    .clk, .rst_n, .inv_all(alloc || flush),
    .pend_en(grant && hb_req && hb_u.rd.v && !hb_u.rd.g), .pend_addr(hb_u.rd.id[4:0]),
    .rd_addr(lrd_addr), .rd_data(lrd_data),
    .wr_en(lwe), .wr_addr(wb_addr), .wr_data(wb_data), .valid(lvalid), .pending(lpend));

  always_comb begin
    req           = '0;
    req.valid     = hb_req && busy;
    req.u         = hb_u;
    req.a         = hb_u.rs1.g ? grf_rdata[0] : lrd_data[0];
    req.b         = hb_u.rs2.g ? grf_rdata[1] : lrd_data[1];
    req.bsn       = bsn;
    req.bw        = 5'(ID);
    req.ft_pc     = ft_pc;
    req.pred_next = pred_next;
    req.hist      = hist;
  end

  assign free = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; bsn <= '0; ft_pc <= '0; pred_next <= '0; hist <= '0; to_recv <= '0;
      mem_inorder <= 1'b0;
    end else if (flush) begin
      busy <= 1'b0; to_recv <= '0;
    end else if (alloc) begin
      busy <= 1'b1; bsn <= alloc_bsn; ft_pc <= alloc_ft_pc;
      pred_next <= alloc_pred_next; hist <= alloc_hist; mem_inorder <= alloc_mem_inorder;
      to_recv <= alloc_size - 6'(in_cnt);
    end else begin
      to_recv <= to_recv - 6'(in_cnt);
      if (busy && to_recv == 0 && in_cnt == 0 && !iq_valid && hb_empty) busy <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) alloc |-> !busy || flush);
endmodule
