// cgooo_core: the coarse-grain out-of-order (CG-OoO) core. Code is handled
// in blocks (basic blocks opened by a `head` instruction) from prediction
// to commit, while instructions inside a block issue in order with a small
// out-of-order window (Skipahead) at each block's head.
//
// Pipeline (one register between stages):
//   fetch   block-driven fetch, FETCH_W instructions per cycle, next block PC
//           from the Block PC Buffer
//   decode  heads look up the block predictor once per block; other
//           instructions are decoded with their local/global operand flags
//   rename/ block allocation (free block window + BROB entry per head),
//   steer   rename of global operands only, steer into the window's IQ
//   issue   each window's Head Buffer offers one instruction per cycle; each
//           cluster's scheduler puts the offers on its EUs
//   execute one cycle in an EU; loads/stores go on to the LSU
//   write   results to the window's LRF or to the GRF, completion counted
//   back    in the block's BROB entry
//   commit  whole blocks, oldest first, when their count reaches zero
// Default configuration: 3 clusters, each 3 block windows and 4 EUs (9 BWs,
// 12 EUs), 4-wide front end, 10-entry IQs, 4-entry Head Buffers, 20-entry
// LRFs, a 256-entry GRF in 9 segments, a 16-entry BROB, 64/32-entry
// load/store queues, hybrid predictor and 4096-entry 8-way BTB.
//
// Squash: on a control mis-prediction (from an EU) or a memory
// mis-speculation (from the LSU), the oldest such event wins. The BROB,
// the block windows and the LSU drop the blocks younger than the faulting
// one (and the faulting block itself for a memory squash); fetch stops.
// The remaining blocks finish and commit; when the BROB is empty the rename
// maps are restored from the committed state and fetch restarts at the
// correct block (the other side of the branch, or the start of the block
// holding the squashed load).
//
// The instruction and data caches are outside the core: imem_* is a
// combinational FETCH_W-word read, dmem_* a tagged read port with any
// latency and a write port. ev_* are one-cycle event pulses for
// performance counting. dbg_areg/dbg_value read committed global state.
module cgooo_core
  import cgooo_pkg::*;
#(
  parameter int NUM_CLUSTERS   = 3,
  parameter int BW_PER_CLUSTER = 3,
  parameter int EU_PER_CLUSTER = 4,
  parameter int FETCH_W        = 4,
  parameter int IQ_DEPTH       = 10,
  parameter int HB_ENTRIES     = 4,
  parameter int LRF_SIZE       = 20,
  parameter int NUM_PREGS      = 256,
  parameter int GRF_SEGS       = 9,
  parameter int NUM_AREGS      = 32,
  parameter int BROB_ENTRIES   = 16,
  parameter int LQ_ENTRIES     = 64,
  parameter int SQ_ENTRIES     = 32,
  parameter int BP_ENTRIES     = 4096,
  parameter int BTB_ENTRIES    = 4096,
  parameter int BTB_WAYS       = 8,
  parameter int RAS_DEPTH      = 16,
  parameter int PCBUF_DEPTH    = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t reset_pc,
  // instruction cache
  output word_t imem_addr,
  input  word_t imem_data [FETCH_W],
  // data cache
  output logic  dmem_req,
  output word_t dmem_addr,
  output logic [$clog2(LQ_ENTRIES):0] dmem_tag,
  input  logic  dmem_resp,
  input  logic [$clog2(LQ_ENTRIES):0] dmem_resp_tag,
  input  word_t dmem_rdata,
  output logic  dmem_wr,
  output word_t dmem_waddr,
  output word_t dmem_wdata,
  // committed-state read
  input  logic [AREG_BITS-1:0] dbg_areg,
  output word_t dbg_value,
  // events
  output logic  ev_commit,         // a block committed
  output logic  ev_ctrl_squash,    // control mis-prediction squash
  output logic  ev_mem_squash,     // memory mis-speculation squash
  output logic [$clog2(NUM_CLUSTERS*BW_PER_CLUSTER+1)-1:0] ev_issued,
  output logic [$clog2(NUM_CLUSTERS*BW_PER_CLUSTER+1)-1:0] ev_skip_issued,
  output logic  ev_bw_stall,       // a head waited for a free block window
  output logic  ev_local_only,     // a renamed group had local operands only
  output logic  ev_no_lookup,      // a head with HasCtrl = 0 skipped the predictor
  output logic  ev_recovered,      // squash recovery finished, fetch restarted
  output logic  idle               // nothing in flight
);
  localparam int NBW   = NUM_CLUSTERS * BW_PER_CLUSTER;
  localparam int NEU   = NUM_CLUSTERS * EU_PER_CLUSTER;
  localparam int CW    = $clog2(FETCH_W + 1);
  localparam int NCOMP = NEU + 2;
  localparam int BI    = $clog2(NBW);

  // ------------------------------------------------------------------ control
  logic     flush_evt, recovering, recover_now;
  bsn_t     flush_bsn, head_bsn;
  logic     flush_incl;
  word_t    flush_pc, redirect_pc_q;
  logic [BROB_ENTRIES-1:0] live;
  logic     brob_empty;

  function automatic logic killed(bsn_t b, bsn_t fb, logic incl, bsn_t h);
    return incl ? (blk_age(b, h) >= blk_age(fb, h)) : (blk_age(b, h) > blk_age(fb, h));
  endfunction

  // -------------------------------------------------------------------- fetch
  logic  f_valid, f_ready, f_start;
  word_t f_pc;
  word_t f_instr [FETCH_W];
  logic [CW-1:0] f_cnt;
  logic  pcbuf_pop, pcbuf_empty;
  word_t pcbuf_pc;

  fetch_unit #(.FETCH_W(FETCH_W)) u_fetch (
    .clk, .rst_n, .reset_pc, .halt(recovering || flush_evt),
    .redirect(recover_now), .redirect_pc(redirect_pc_q),
    .imem_addr, .imem_data, .pcbuf_pop, .pcbuf_pc, .pcbuf_empty,
    .out_valid(f_valid), .out_ready(f_ready), .out_pc(f_pc), .out_instr(f_instr),
    .out_cnt(f_cnt), .out_block_start(f_start));

  // ------------------------------------------------------------------- decode
  logic                d_is_head [FETCH_W];
  logic                d_has_ctrl [FETCH_W];
  logic [4:0]          d_bsz [FETCH_W];
  word_t               d_fto [FETCH_W];
  uop_t                d_u [FETCH_W];
  logic                d_ill [FETCH_W];
  logic [IDX_BITS-1:0] blk_pos;

  for (genvar k = 0; k < FETCH_W; k++) begin : g_dec
    decoder u_dec (
      .instr(f_instr[k]), .pc(f_pc + word_t'(k) * 8),
      .idx(f_start ? IDX_BITS'(k) : blk_pos + IDX_BITS'(k)),
      .is_head(d_is_head[k]), .has_ctrl(d_has_ctrl[k]), .blk_size(d_bsz[k]),
      .ft_offset(d_fto[k]), .u(d_u[k]), .illegal(d_ill[k]));
  end

  logic  bpu_ready;
  word_t bpu_next;
  hist_t bpu_hist;
  resolve_t train;

  // decode -> rename register
  logic  r_valid, r_head, r_fire;
  logic [CW-1:0] r_nops;
  logic [5:0] r_size;
  word_t r_ft_pc, r_pred_next;
  hist_t r_hist;
  uop_t  r_u [FETCH_W];

  wire d_head_ok = !f_start || bpu_ready;
  assign f_ready = (!r_valid || r_fire) && d_head_ok && !recovering && !flush_evt;
  wire d_go      = f_valid && f_ready;

  bpu #(.BP_ENTRIES(BP_ENTRIES), .BTB_ENTRIES(BTB_ENTRIES), .BTB_WAYS(BTB_WAYS),
        .RAS_DEPTH(RAS_DEPTH), .PCBUF_DEPTH(PCBUF_DEPTH)) u_bpu (
    .clk, .rst_n, .flush(flush_evt || recover_now),
    .head_valid(d_go && f_start), .head_ready(bpu_ready),
    .head_pc(f_pc), .has_ctrl(d_has_ctrl[0]), .ft_offset(d_fto[0]),
    .pred_next(bpu_next), .pred_hist(bpu_hist),
    .pcbuf_pop, .pcbuf_pc, .pcbuf_empty, .res(train));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0; r_head <= 1'b0; r_nops <= '0; r_size <= '0; r_ft_pc <= '0;
      r_pred_next <= '0; r_hist <= '0; blk_pos <= '0;
      for (int k = 0; k < FETCH_W; k++) r_u[k] <= '0;
    end else if (flush_evt || recovering) begin
      r_valid <= 1'b0;
    end else begin
      if (r_fire) r_valid <= 1'b0;
      if (d_go) begin
        r_valid     <= 1'b1;
        r_head      <= f_start;
        r_nops      <= f_start ? f_cnt - 1'b1 : f_cnt;
        r_size      <= 6'(d_bsz[0]);
        r_ft_pc     <= f_pc + d_fto[0];
        r_pred_next <= bpu_next;
        r_hist      <= bpu_hist;
        blk_pos     <= f_start ? IDX_BITS'(f_cnt) : blk_pos + IDX_BITS'(f_cnt);
        for (int k = 0; k < FETCH_W; k++)
          r_u[k] <= f_start ? ((k + 1 < FETCH_W) ? d_u[(k + 1) % FETCH_W] : '0) : d_u[k];
      end
    end
  end

  // ------------------------------------------------- rename / allocate / steer
  logic [NBW-1:0] bw_free;
  logic [$clog2(IQ_DEPTH+1)-1:0] bw_iq_free [NBW];
  bsn_t  bw_bsn [NBW];
  logic  brob_full, ren_ok, alloc;
  logic [BI-1:0] target_bw;
  logic [$clog2(GRF_SEGS)-1:0] pref_seg;
  logic [FETCH_W-1:0] ren_v;
  uop_t  ren_u [FETCH_W];
  bsn_t  alloc_bsn, cur_bsn;
  logic  ren_fire;

  for (genvar k = 0; k < FETCH_W; k++) begin : g_renv
    assign ren_v[k] = r_valid && (k < int'(r_nops));
  end

  block_allocator #(.NBW(NBW), .W(FETCH_W), .IQ_DEPTH(IQ_DEPTH), .SEGS(GRF_SEGS)) u_alloc (
    .clk, .rst_n, .flush(flush_evt), .in_valid(r_valid && !recovering && !flush_evt),
    .in_head(r_head), .in_nops(r_nops), .bw_free, .bw_iq_free, .brob_full,
    .rename_ok(ren_ok), .fire(r_fire), .alloc, .target_bw, .pref_seg,
    .stall_no_bw(ev_bw_stall));
  assign ren_fire = r_fire;

  // commit records
  logic  commit;
  bsn_t  commit_bsn;
  logic [NGW-1:0]       gw_v;
  logic [AREG_BITS-1:0] gw_areg [NGW];
  logic [PREG_BITS-1:0] gw_new  [NGW];
  logic [PREG_BITS-1:0] gw_old  [NGW];
  logic [PREG_BITS-1:0] dbg_preg;

  rename #(.W(FETCH_W), .NUM_PREGS(NUM_PREGS), .NUM_AREGS(NUM_AREGS), .SEGS(GRF_SEGS)) u_ren (
    .clk, .rst_n, .in_valid(ren_v), .in_u(r_u), .pref_seg, .can_rename(ren_ok),
    .fire(ren_fire), .out_u(ren_u), .commit, .gw_v, .gw_areg, .gw_new, .gw_old,
    .recover(recover_now), .dbg_areg, .dbg_preg);

  logic gw_we [FETCH_W];
  logic [AREG_BITS-1:0] gw_areg_in [FETCH_W];
  logic [PREG_BITS-1:0] gw_new_in [FETCH_W], gw_old_in [FETCH_W];
  always_comb begin
    ev_local_only = ren_fire && (r_nops != 0);
    for (int k = 0; k < FETCH_W; k++) begin
      gw_we[k]      = ren_fire && ren_v[k] && ren_u[k].rd.v && ren_u[k].rd.g;
      gw_areg_in[k] = ren_u[k].ard;
      gw_new_in[k]  = ren_u[k].rd.id;
      gw_old_in[k]  = ren_u[k].old_prd;
      if (ren_v[k] && (ren_u[k].rd.g && ren_u[k].rd.v || ren_u[k].rs1.g && ren_u[k].rs1.v ||
                       ren_u[k].rs2.g && ren_u[k].rs2.v))
        ev_local_only = 1'b0;
    end
  end
  assign ev_no_lookup = d_go && f_start && !d_has_ctrl[0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cur_bsn <= '0;
    else if (alloc) cur_bsn <= alloc_bsn;

  // --------------------------------------------------------------------- BROB
  logic comp_v [NCOMP];
  bsn_t comp_bsn [NCOMP];

  brob #(.ENTRIES(BROB_ENTRIES), .W(FETCH_W), .NCOMP(NCOMP)) u_brob (
    .clk, .rst_n, .alloc, .alloc_size(r_size), .alloc_bsn, .full(brob_full),
    .gw_we, .gw_bsn(alloc ? alloc_bsn : cur_bsn), .gw_areg_in, .gw_new_in, .gw_old_in,
    .comp_v, .comp_bsn, .commit, .commit_bsn, .gw_v, .gw_areg, .gw_new, .gw_old,
    .flush(flush_evt), .flush_bsn, .flush_incl, .head_bsn, .empty(brob_empty), .live);

  // ------------------------------------------------------------ block windows
  logic [NUM_PREGS-1:0] greg_ready;
  issue_t bw_req   [NBW];
  logic   bw_skip  [NBW];
  logic   bw_grant [NBW];
  logic [PREG_BITS-1:0] grf_raddr [2*NBW+1];
  word_t                grf_rdata [2*NBW+1];
  wb_t    eu_wb  [NEU];
  resolve_t eu_res [NEU];
  memop_t eu_mem [NEU];
  wb_t    ls_wb;

  for (genvar b = 0; b < NBW; b++) begin : g_bw
    logic  wen [2];
    bsn_t  wbsn [2];
    logic [4:0] wadr [2];
    word_t wdat [2];
    logic [$clog2(FETCH_W+1)-1:0] cnt;
    logic [PREG_BITS-1:0] ra [2];
    word_t rd [2];
    always_comb begin
      wen[0] = 1'b0; wbsn[0] = '0; wadr[0] = '0; wdat[0] = '0;
      for (int e = 0; e < NEU; e++)
        if (eu_wb[e].valid && eu_wb[e].rd.v && !eu_wb[e].rd.g && int'(eu_wb[e].bw) == b) begin
          wen[0] = 1'b1; wbsn[0] = eu_wb[e].bsn; wadr[0] = eu_wb[e].rd.id[4:0]; wdat[0] = eu_wb[e].data;
        end
      wen[1]  = ls_wb.valid && ls_wb.rd.v && !ls_wb.rd.g && int'(ls_wb.bw) == b;
      wbsn[1] = ls_wb.bsn; wadr[1] = ls_wb.rd.id[4:0]; wdat[1] = ls_wb.data;
    end
    assign cnt = (ren_fire && int'(target_bw) == b) ? r_nops : '0;
    assign grf_raddr[2*b]   = ra[0];
    assign grf_raddr[2*b+1] = ra[1];
    assign rd[0] = grf_rdata[2*b];
    assign rd[1] = grf_rdata[2*b+1];

    block_window #(.ID(b), .W(FETCH_W), .IQ_DEPTH(IQ_DEPTH), .HB_ENTRIES(HB_ENTRIES),
                   .LRF_SIZE(LRF_SIZE), .NUM_PREGS(NUM_PREGS)) u_bw (
      .clk, .rst_n,
      .alloc(alloc && int'(target_bw) == b), .alloc_bsn, .alloc_size(r_size),
      .alloc_ft_pc(r_ft_pc), .alloc_pred_next(r_pred_next), .alloc_hist(r_hist),
      .alloc_mem_inorder(mem_replay),
      .free(bw_free[b]), .bsn(bw_bsn[b]),
      .in_cnt(cnt), .in_u(ren_u), .iq_free(bw_iq_free[b]),
      .flush(flush_evt && !bw_free[b] && killed(bw_bsn[b], flush_bsn, flush_incl, head_bsn)),
      .greg_ready, .grf_raddr(ra), .grf_rdata(rd),
      .req(bw_req[b]), .req_skip(bw_skip[b]), .grant(bw_grant[b] && !flush_evt),
      .wb_en(wen), .wb_bsn(wbsn), .wb_addr(wadr), .wb_data(wdat));
  end

  // ------------------------------------------------------- clusters and EUs
  logic   mem_chain [NUM_CLUSTERS+1];
  issue_t eu_in [NEU];
  logic   lsu_can;
  logic [$clog2(EU_PER_CLUSTER+1)-1:0] cl_issued [NUM_CLUSTERS];
  assign mem_chain[0] = lsu_can;

  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_cl
    issue_t rq [BW_PER_CLUSTER];
    logic   gr [BW_PER_CLUSTER];
    issue_t ei [EU_PER_CLUSTER];
    for (genvar j = 0; j < BW_PER_CLUSTER; j++) begin : g_j
      assign rq[j] = bw_req[c*BW_PER_CLUSTER + j];
      assign bw_grant[c*BW_PER_CLUSTER + j] = gr[j];
    end
    instruction_scheduler #(.NBW(BW_PER_CLUSTER), .NEU(EU_PER_CLUSTER)) u_sched (
      .req(rq), .grant(gr), .eu_in(ei), .mem_allow_in(mem_chain[c]),
      .mem_allow_out(mem_chain[c+1]), .n_issued(cl_issued[c]));
    for (genvar u = 0; u < EU_PER_CLUSTER; u++) begin : g_eu
      assign eu_in[c*EU_PER_CLUSTER + u] = ei[u];
      execution_unit u_eu (
        .clk, .rst_n,
        .kill(flush_evt && killed(ei[u].bsn, flush_bsn, flush_incl, head_bsn)),
        .in(ei[u]), .wb(eu_wb[c*EU_PER_CLUSTER + u]), .res(eu_res[c*EU_PER_CLUSTER + u]),
        .mem(eu_mem[c*EU_PER_CLUSTER + u]));
    end
  end

  always_comb begin
    ev_issued = '0; ev_skip_issued = '0;
    for (int b = 0; b < NBW; b++)
      if (bw_grant[b] && bw_req[b].valid && !flush_evt) begin
        ev_issued++;
        if (bw_skip[b]) ev_skip_issued++;
      end
  end

  // --------------------------------------------------------------------- GRF
  logic grf_we [NEU+1];
  logic [PREG_BITS-1:0] grf_waddr [NEU+1];
  word_t grf_wdata [NEU+1];
  logic clr_en [FETCH_W];
  logic [PREG_BITS-1:0] clr_addr [FETCH_W];
  always_comb begin
    for (int e = 0; e < NEU; e++) begin
      grf_we[e]    = eu_wb[e].valid && eu_wb[e].rd.v && eu_wb[e].rd.g;
      grf_waddr[e] = eu_wb[e].rd.id;
      grf_wdata[e] = eu_wb[e].data;
    end
    grf_we[NEU]    = ls_wb.valid && ls_wb.rd.v && ls_wb.rd.g;
    grf_waddr[NEU] = ls_wb.rd.id;
    grf_wdata[NEU] = ls_wb.data;
    for (int k = 0; k < FETCH_W; k++) begin
      clr_en[k]   = gw_we[k];
      clr_addr[k] = gw_new_in[k];
    end
  end
  assign grf_raddr[2*NBW] = dbg_preg;
  assign dbg_value = grf_rdata[2*NBW];

  grf #(.NUM_PREGS(NUM_PREGS), .SEGS(GRF_SEGS), .NR(2*NBW+1), .NW(NEU+1), .NCLR(FETCH_W)) u_grf (
    .clk, .rst_n, .raddr(grf_raddr), .rdata(grf_rdata), .we(grf_we), .waddr(grf_waddr),
    .wdata(grf_wdata), .clr_en, .clr_addr, .set_all(recover_now), .ready(greg_ready));

  // --------------------------------------------------------------------- LSU
  memop_t ls_in;
  logic   st_done, viol, lsu_empty;
  bsn_t   st_done_bsn, viol_bsn;
  word_t  viol_pc;
  always_comb begin
    ls_in = '0;
    for (int e = 0; e < NEU; e++) if (eu_mem[e].valid) ls_in = eu_mem[e];
  end

  lsu #(.LQ(LQ_ENTRIES), .SQ(SQ_ENTRIES)) u_lsu (
    .clk, .rst_n, .head_bsn, .in(ls_in), .can_accept(lsu_can), .wb(ls_wb),
    .st_done, .st_done_bsn, .viol, .viol_bsn, .viol_pc,
    .commit, .commit_bsn, .flush(flush_evt), .flush_bsn, .flush_incl,
    .dmem_req, .dmem_addr, .dmem_tag, .dmem_resp, .dmem_resp_tag, .dmem_rdata,
    .dmem_wr, .dmem_waddr, .dmem_wdata, .empty(lsu_empty));

  // completions
  always_comb begin
    for (int e = 0; e < NEU; e++) begin comp_v[e] = eu_wb[e].valid; comp_bsn[e] = eu_wb[e].bsn; end
    comp_v[NEU]   = ls_wb.valid; comp_bsn[NEU]   = ls_wb.bsn;
    comp_v[NEU+1] = st_done;     comp_bsn[NEU+1] = st_done_bsn;
  end

  // ------------------------------------------------------------ squash logic
  // oldest live event wins; key = {block age, 0 for memory / 1 for control}
  always_comb begin
    logic [BSN_BITS:0] best, key;
    flush_evt = 1'b0; flush_bsn = '0; flush_incl = 1'b0; flush_pc = '0; best = '1; key = '0;
    train = '0;
    for (int e = 0; e < NEU; e++)
      if (eu_res[e].valid && live[eu_res[e].bsn[$clog2(BROB_ENTRIES)-1:0]]) begin
        if (!train.valid) train = eu_res[e];
        if (eu_res[e].mispredict) begin
          key = {blk_age(eu_res[e].bsn, head_bsn), 1'b1};
          if (key < best) begin
            best = key; flush_evt = 1'b1; flush_bsn = eu_res[e].bsn; flush_incl = 1'b0;
            flush_pc = eu_res[e].actual_next; train = eu_res[e];
          end
        end
      end
    if (viol && live[viol_bsn[$clog2(BROB_ENTRIES)-1:0]]) begin
      key = {blk_age(viol_bsn, head_bsn), 1'b0};
      if (key < best) begin
        best = key; flush_evt = 1'b1; flush_bsn = viol_bsn; flush_incl = 1'b1; flush_pc = viol_pc;
      end
    end
  end
  assign ev_ctrl_squash = flush_evt && !flush_incl;
  assign ev_mem_squash  = flush_evt &&  flush_incl;

  assign recover_now  = recovering && !flush_evt && brob_empty && !commit;
  assign ev_recovered = recover_now;

  // After a memory squash the restarted block runs its memory operations in
  // order (no Skipahead between them), so the same conflict cannot recur.
  logic replay_pending, mem_replay;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      recovering <= 1'b0; redirect_pc_q <= '0; replay_pending <= 1'b0; mem_replay <= 1'b0;
    end else if (flush_evt) begin
      recovering <= 1'b1; redirect_pc_q <= flush_pc; replay_pending <= flush_incl;
    end else if (recover_now) begin
      recovering <= 1'b0; mem_replay <= replay_pending;
    end else if (alloc) begin
      mem_replay <= 1'b0;
    end
  end

  assign ev_commit      = commit;
  assign idle = brob_empty && lsu_empty && !r_valid && !f_valid;
endmodule
