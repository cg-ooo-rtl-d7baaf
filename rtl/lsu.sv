// lsu: the load-store unit. It works per instruction, with a load queue
// (64 entries) and a store queue (32 entries) searched associatively, each
// entry tagged with its Block SN. Entries are taken when the operation
// executes; age is (block age in the BROB, position in the block), and
// stores already committed count as older than everything in flight.
//   * A load searches the store queue for older stores to the same address
//     and takes the youngest one's data; otherwise it reads the data cache.
//     One load result per cycle is written back.
//   * A store searches the load queue for younger loads to the same address
//     that have already executed. Such a load read stale data: memory
//     mis-speculation. The block holding the oldest such load is squashed,
//     itself included, and fetch restarts at that block's head (viol_*).
//   * When a block commits, its loads leave the load queue and its stores
//     are marked committed; committed stores drain to the data cache one per
//     cycle, oldest first.
//   * A squash removes the entries of the blocks it kills.
// The data cache is outside this design: dmem_req/dmem_resp is a read port
// with any fixed or variable latency, tagged by load-queue slot; dmem_wr is
// the write port. Allocating entries at execute instead of at dispatch is
// this design's choice (the paper does not say when LSU entries are taken).
module lsu
  import cgooo_pkg::*;
#(
  parameter int LQ = 64,
  parameter int SQ = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  bsn_t   head_bsn,          // oldest block in the BROB
  input  memop_t in,
  output logic   can_accept,        // room for two more loads and two more stores
  // results
  output wb_t    wb,                // load write-back (also its completion)
  output logic   st_done,           // store completion
  output bsn_t   st_done_bsn,
  output logic   viol,              // memory mis-speculation
  output bsn_t   viol_bsn,
  output word_t  viol_pc,
  // block commit and squash
  input  logic   commit,
  input  bsn_t   commit_bsn,
  input  logic   flush,
  input  bsn_t   flush_bsn,
  input  logic   flush_incl,
  // data cache
  output logic   dmem_req,
  output word_t  dmem_addr,
  output logic [$clog2(LQ):0] dmem_tag,
  input  logic   dmem_resp,
  input  logic [$clog2(LQ):0] dmem_resp_tag,
  input  word_t  dmem_rdata,
  output logic   dmem_wr,
  output word_t  dmem_waddr,
  output word_t  dmem_wdata,
  output logic   empty
);
  localparam int LW = $clog2(LQ);
  localparam int SW = $clog2(SQ);

  typedef struct packed {
    logic v, gen, has_data, written;
    word_t addr, data;
    bsn_t bsn; logic [IDX_BITS-1:0] idx;
    opnd_t rd; logic [4:0] bw; word_t head_pc;
  } lq_t;
  typedef struct packed {
    logic v, committed;
    logic [3:0] cseq;
    word_t addr, data;
    bsn_t bsn; logic [IDX_BITS-1:0] idx;
  } sq_t;

  lq_t  lq [LQ];
  sq_t  sq [SQ];
  logic [3:0] commit_seq, drain_seq;

  // age keys: smaller is older
  typedef logic [1+BSN_BITS+IDX_BITS-1:0] key_t;
  function automatic key_t ikey(bsn_t b, logic [IDX_BITS-1:0] i, bsn_t h);
    return {1'b1, blk_age(b, h), i};
  endfunction
  function automatic key_t skey(sq_t s, bsn_t h, logic [3:0] ds);
    if (s.committed) return {1'b0, BSN_BITS'(s.cseq - ds), s.idx};
    return ikey(s.bsn, s.idx, h);
  endfunction

  // free slots
  logic lq_has, sq_has;
  logic [LW-1:0] lq_free;
  logic [SW-1:0] sq_free;
  always_comb begin
    lq_has = 1'b0; lq_free = '0; sq_has = 1'b0; sq_free = '0;
    for (int i = LQ - 1; i >= 0; i--) if (!lq[i].v) begin lq_has = 1'b1; lq_free = LW'(i); end
    for (int i = SQ - 1; i >= 0; i--) if (!sq[i].v) begin sq_has = 1'b1; sq_free = SW'(i); end
  end
  // two free slots each: one op may already be on its way from an EU
  int lq_nfree, sq_nfree;
  always_comb begin
    lq_nfree = 0; sq_nfree = 0;
    for (int i = 0; i < LQ; i++) lq_nfree += int'(!lq[i].v);
    for (int i = 0; i < SQ; i++) sq_nfree += int'(!sq[i].v);
  end
  assign can_accept = lq_nfree >= 2 && sq_nfree >= 2;
  always_comb begin
    empty = 1'b1;
    for (int i = 0; i < LQ; i++) if (lq[i].v) empty = 1'b0;
    for (int i = 0; i < SQ; i++) if (sq[i].v) empty = 1'b0;
  end

  // load: youngest older store to the same address
  key_t lkey;
  logic fwd_hit;
  word_t fwd_data;
  always_comb begin
    key_t best;
    lkey = ikey(in.bsn, in.idx, head_bsn);
    fwd_hit = 1'b0; fwd_data = '0; best = '0;
    for (int s = 0; s < SQ; s++)
      if (sq[s].v && sq[s].addr == in.addr && skey(sq[s], head_bsn, drain_seq) < lkey &&
          (!fwd_hit || skey(sq[s], head_bsn, drain_seq) > best)) begin
        fwd_hit = 1'b1; fwd_data = sq[s].data; best = skey(sq[s], head_bsn, drain_seq);
      end
  end

  // store: oldest younger load to the same address that already executed
  logic  v_hit;
  logic [LW-1:0] v_idx;
  always_comb begin
    key_t skk, best;
    skk = ikey(in.bsn, in.idx, head_bsn);
    v_hit = 1'b0; v_idx = '0; best = '1;
    for (int l = 0; l < LQ; l++)
      if (lq[l].v && lq[l].addr == in.addr && ikey(lq[l].bsn, lq[l].idx, head_bsn) > skk &&
          ikey(lq[l].bsn, lq[l].idx, head_bsn) < best) begin
        v_hit = 1'b1; v_idx = LW'(l); best = ikey(lq[l].bsn, lq[l].idx, head_bsn);
      end
  end

  // write-back arbiter: lowest-index load holding data
  logic wb_hit;
  logic [LW-1:0] wb_idx;
  always_comb begin
    wb_hit = 1'b0; wb_idx = '0;
    for (int l = LQ - 1; l >= 0; l--)
      if (lq[l].v && lq[l].has_data && !lq[l].written) begin wb_hit = 1'b1; wb_idx = LW'(l); end
  end

  // drain: oldest committed store
  logic dr_hit;
  logic [SW-1:0] dr_idx;
  always_comb begin
    dr_hit = 1'b0; dr_idx = '0;
    for (int s = SQ - 1; s >= 0; s--)
      if (sq[s].v && sq[s].committed && sq[s].cseq == drain_seq &&
          (!dr_hit || sq[s].idx <= sq[dr_idx].idx)) begin dr_hit = 1'b1; dr_idx = SW'(s); end
  end
  logic any_cur;
  always_comb begin
    any_cur = 1'b0;
    for (int s = 0; s < SQ; s++) if (sq[s].v && sq[s].committed && sq[s].cseq == drain_seq) any_cur = 1'b1;
  end


  function automatic logic killed(bsn_t b, bsn_t fb, logic incl, bsn_t h);
    return incl ? (blk_age(b, h) >= blk_age(fb, h)) : (blk_age(b, h) > blk_age(fb, h));
  endfunction

  // A memory op that arrives in a flush cycle is kept unless the flush kills its block.
  wire in_killed = flush && killed(in.bsn, flush_bsn, flush_incl, head_bsn);
  wire take_ld = in.valid && !in.is_store && lq_has && !in_killed;
  wire take_st = in.valid &&  in.is_store && sq_has && !in_killed;

  assign dmem_req  = take_ld && !fwd_hit;
  assign dmem_addr = in.addr;
  assign dmem_tag  = {!lq[lq_free].gen, lq_free};
  assign dmem_wr    = dr_hit;
  assign dmem_waddr = sq[dr_idx].addr;
  assign dmem_wdata = sq[dr_idx].data;



  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LQ; l++) lq[l] <= '0;
      for (int s = 0; s < SQ; s++) sq[s] <= '0;
      wb <= '0; st_done <= 1'b0; st_done_bsn <= '0; viol <= 1'b0; viol_bsn <= '0; viol_pc <= '0;
      commit_seq <= '0; drain_seq <= '0;
    end else begin
      wb.valid <= 1'b0; st_done <= 1'b0; viol <= 1'b0;
      // memory responses
      if (dmem_resp && lq[dmem_resp_tag[LW-1:0]].v && lq[dmem_resp_tag[LW-1:0]].gen == dmem_resp_tag[LW]) begin
        lq[dmem_resp_tag[LW-1:0]].has_data <= 1'b1;
        lq[dmem_resp_tag[LW-1:0]].data     <= dmem_rdata;
      end
      // write-back
      if (wb_hit && !flush) begin
        wb.valid <= 1'b1; wb.rd <= lq[wb_idx].rd; wb.data <= lq[wb_idx].data;
        wb.bsn <= lq[wb_idx].bsn; wb.bw <= lq[wb_idx].bw;
        lq[wb_idx].written <= 1'b1;
      end
      // new load
      if (take_ld) begin
        lq[lq_free] <= '{v: 1'b1, gen: !lq[lq_free].gen, has_data: fwd_hit, written: 1'b0,
                         addr: in.addr, data: fwd_data, bsn: in.bsn, idx: in.idx,
                         rd: in.rd, bw: in.bw, head_pc: in.head_pc};
      end
      // new store
      if (take_st) begin
        sq[sq_free] <= '{v: 1'b1, committed: 1'b0, cseq: '0, addr: in.addr, data: in.data,
                         bsn: in.bsn, idx: in.idx};
        st_done <= 1'b1; st_done_bsn <= in.bsn;
        if (v_hit) begin
          viol <= 1'b1; viol_bsn <= lq[v_idx].bsn; viol_pc <= lq[v_idx].head_pc;
        end
      end
      // drain
      if (dr_hit) sq[dr_idx].v <= 1'b0;
      else if (!any_cur && drain_seq != commit_seq) drain_seq <= drain_seq + 1'b1;
      // commit
      if (commit) begin
        for (int l = 0; l < LQ; l++)
          if (lq[l].v && lq[l].bsn == commit_bsn) lq[l].v <= 1'b0;
        for (int s = 0; s < SQ; s++)
          if (sq[s].v && !sq[s].committed && sq[s].bsn == commit_bsn) begin
            sq[s].committed <= 1'b1; sq[s].cseq <= commit_seq;
          end
        commit_seq <= commit_seq + 1'b1;
      end
      // squash
      if (flush) begin
        for (int l = 0; l < LQ; l++)
          if (lq[l].v && killed(lq[l].bsn, flush_bsn, flush_incl, head_bsn)) lq[l].v <= 1'b0;
        for (int s = 0; s < SQ; s++)
          if (sq[s].v && !sq[s].committed && killed(sq[s].bsn, flush_bsn, flush_incl, head_bsn)) sq[s].v <= 1'b0;
      end
    end
  end
endmodule
