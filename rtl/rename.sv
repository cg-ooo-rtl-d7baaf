// rename: register rename for global operands only. Operands whose Register
// Rename Flag marks them local are passed through untouched, which is where
// the block-level model saves rename energy. The model is a merged
// rename/architectural register file: a speculative map and a committed
// (architectural) map, both NUM_AREGS entries of physical register ids, and
// a free bit per physical register.
//   * Up to W uops per cycle (one fetch group, all of one block). Sources
//     read the speculative map, bypassing destinations renamed earlier in
//     the same group. A global destination gets a free physical register,
//     taken from the GRF segment pref_seg (the segment next to the block
//     window that receives the group) when that segment has one, else from
//     any segment; its previous mapping is returned in old_prd.
//   * Commit: for each global write of the committing block (the BROB's GW
//     fields) the committed map is updated and the previous register freed.
//   * Recover: after a squash, once no block is in flight, the speculative
//     map is copied from the committed map and every register the committed
//     map does not use becomes free (this recovery scheme is this design's
//     choice; the paper only says execution resumes once the BROB is empty).
// can_rename is combinational; state changes at the clock edge when fire.
module rename
  import cgooo_pkg::*;
#(
  parameter int W         = 4,
  parameter int NUM_PREGS = 256,
  parameter int NUM_AREGS = 32,
  parameter int SEGS      = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [W-1:0] in_valid,
  input  uop_t in_u [W],
  input  logic [$clog2(SEGS)-1:0] pref_seg,
  output logic can_rename,
  input  logic fire,
  output uop_t out_u [W],
  // commit
  input  logic commit,
  input  logic [NGW-1:0]       gw_v,
  input  logic [AREG_BITS-1:0] gw_areg [NGW],
  input  logic [PREG_BITS-1:0] gw_new  [NGW],
  input  logic [PREG_BITS-1:0] gw_old  [NGW],
  input  logic recover,
  // architectural read (debug / state inspection)
  input  logic [AREG_BITS-1:0] dbg_areg,
  output logic [PREG_BITS-1:0] dbg_preg
);
  localparam int SEG_SIZE = (NUM_PREGS + SEGS - 1) / SEGS;
  logic [PREG_BITS-1:0] spec [NUM_AREGS];
  logic [PREG_BITS-1:0] arch [NUM_AREGS];
  logic [NUM_PREGS-1:0] free_q;

  assign dbg_preg = arch[dbg_areg];

  logic [NUM_PREGS-1:0] free_n;
  logic [PREG_BITS-1:0] map_n [NUM_AREGS];
  always_comb begin
    logic found, found_any;
    logic [PREG_BITS-1:0] pick, pick_any;
    found      = 1'b0; found_any = 1'b0; pick = '0; pick_any = '0;
    free_n     = free_q;
    map_n      = spec;
    can_rename = 1'b1;
    for (int k = 0; k < W; k++) begin
      out_u[k] = in_u[k];
      if (in_valid[k]) begin
        if (in_u[k].rs1.v && in_u[k].rs1.g) out_u[k].rs1.id = map_n[in_u[k].rs1.id[AREG_BITS-1:0]];
        if (in_u[k].rs2.v && in_u[k].rs2.g) out_u[k].rs2.id = map_n[in_u[k].rs2.id[AREG_BITS-1:0]];
        if (in_u[k].rd.v && in_u[k].rd.g) begin
          found = 1'b0; found_any = 1'b0; pick = '0; pick_any = '0;
          for (int p = NUM_PREGS - 1; p >= 0; p--) begin
            if (free_n[p]) begin
              found_any = 1'b1; pick_any = PREG_BITS'(p);
              if (p / SEG_SIZE == int'(pref_seg)) begin found = 1'b1; pick = PREG_BITS'(p); end
            end
          end
          if (!found) pick = pick_any;
          if (!found_any) can_rename = 1'b0;
          free_n[pick]       = 1'b0;
          out_u[k].old_prd   = map_n[in_u[k].ard];
          out_u[k].rd.id     = pick;
          map_n[in_u[k].ard] = pick;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_AREGS; a++) begin
        spec[a] <= PREG_BITS'(a); arch[a] <= PREG_BITS'(a);
      end
      for (int p = 0; p < NUM_PREGS; p++) free_q[p] <= (p >= NUM_AREGS);
    end else if (recover) begin
      logic [NUM_PREGS-1:0] used;
      used = '0;
      for (int a = 0; a < NUM_AREGS; a++) used[arch[a]] = 1'b1;
      spec   <= arch;
      free_q <= ~used;
    end else begin
      logic [NUM_PREGS-1:0] f;
      f = (fire && can_rename) ? free_n : free_q;
      if (fire && can_rename) spec <= map_n;
      if (commit)
        for (int i = 0; i < NGW; i++)
          if (gw_v[i]) begin
            arch[gw_areg[i]] <= gw_new[i];
            f[gw_old[i]] = 1'b1;
          end
      free_q <= f;
    end
  end
endmodule
