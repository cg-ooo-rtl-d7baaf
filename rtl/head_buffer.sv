// head_buffer: the Head Buffer of a block window and its Skipahead issue
// logic. It holds the ENTRIES oldest not-yet-issued instructions of the
// block, oldest first, refilled from the instruction queue one per cycle.
// An entry may issue when its operands are ready and its local destination
// has no write outstanding. Skipahead: an entry that is not the oldest may
// issue ahead of older HB entries only if it has neither a true dependency
// (it reads a register an older entry writes) nor a false dependency (it
// writes a register an older entry reads or writes) on any of them; the
// check compares operand ids, RRF bit included, pairwise (the equality/XOR
// comparators of the design). The oldest issuable entry is offered to the
// scheduler each cycle (one issue per BW per cycle); with ENTRIES = 1 this is
// plain in-order issue. When mem_inorder is set (a block restarted after a
// memory mis-speculation) memory operations also keep their order; this
// forward-progress rule is this design's addition. Readiness comes from per-register valid bits (a
// scoreboard) rather than from operand data held in the buffer, which is
// this design's simplification. Combinational request; the granted entry
// is removed and the rest shift up at the clock edge.
module head_buffer
  import cgooo_pkg::*;
#(
  parameter int ENTRIES   = 4,
  parameter int LRF_SIZE  = 20,
  parameter int NUM_PREGS = 256
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  // refill from the IQ
  input  logic iq_valid,
  input  uop_t iq_u,
  output logic iq_pop,
  // readiness
  input  logic [LRF_SIZE-1:0]  lrf_valid,
  input  logic [LRF_SIZE-1:0]  lrf_pending,
  input  logic [NUM_PREGS-1:0] greg_ready,
  input  logic                 mem_inorder,  // memory ops may not pass each other
  // issue
  output logic req_valid,
  output uop_t req_u,
  output logic req_skip,        // the offered entry bypasses older HB entries
  input  logic grant,
  output logic empty
);
  localparam int IW = $clog2(ENTRIES > 1 ? ENTRIES : 2);
  uop_t         e [ENTRIES];
  logic [ENTRIES-1:0] v;

  function automatic logic same(opnd_t a, opnd_t b);
    return a.v && b.v && ((a.g ^ b.g) == 1'b0) && ((a.id ^ b.id) == '0);
  endfunction

  function automatic logic src_ready(opnd_t s, logic [LRF_SIZE-1:0] lv, logic [NUM_PREGS-1:0] gr);
    if (!s.v) return 1'b1;
    if (s.g)  return gr[s.id];
    return lv[s.id[4:0]];
  endfunction

  logic [ENTRIES-1:0] rdy, dep_free;
  logic [IW-1:0]      sel;
  always_comb begin
    req_valid = 1'b0; sel = '0; req_skip = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      rdy[i] = v[i] && src_ready(e[i].rs1, lrf_valid, greg_ready)
                    && src_ready(e[i].rs2, lrf_valid, greg_ready)
                    && (!e[i].rd.v || e[i].rd.g || !lrf_pending[e[i].rd.id[4:0]]);
      dep_free[i] = 1'b1;
      for (int j = 0; j < i; j++)
        if (v[j] && (same(e[i].rs1, e[j].rd) || same(e[i].rs2, e[j].rd) ||
                     same(e[i].rd, e[j].rs1) || same(e[i].rd, e[j].rs2) ||
                     same(e[i].rd, e[j].rd) ||
                     (mem_inorder && is_mem(e[i].op) && is_mem(e[j].op))))
          dep_free[i] = 1'b0;
    end
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (rdy[i] && dep_free[i]) begin req_valid = 1'b1; sel = IW'(i); end
    req_skip = req_valid && (sel != '0);
  end
  assign req_u = e[sel];
  assign empty = (v == '0);

  // compaction: remove the granted entry, append from the IQ at the end
  logic [ENTRIES-1:0] v_n;
  uop_t               e_n [ENTRIES];
  int                 cnt_n;
  always_comb begin
    cnt_n = 0;
    for (int i = 0; i < ENTRIES; i++) begin e_n[i] = e[i]; v_n[i] = 1'b0; end
    for (int i = 0; i < ENTRIES; i++)
      if (v[i] && !(grant && req_valid && IW'(i) == sel)) begin
        e_n[cnt_n] = e[i]; v_n[cnt_n] = 1'b1; cnt_n++;
      end
    iq_pop = iq_valid && (cnt_n < ENTRIES);
    if (iq_pop) begin e_n[cnt_n] = iq_u; v_n[cnt_n] = 1'b1; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else if (flush) v <= '0;
    else v <= v_n;
  end
  always_ff @(posedge clk) e <= e_n;
endmodule
