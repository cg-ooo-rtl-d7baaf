// hybrid_bp: direction predictor of the block predictor. Three tables of
// 2-bit saturating counters (gshare, bimodal and a meta chooser; 4096
// counters = 8 Kb each) and a 13-bit global history, as the configuration
// table lists. The paper cites a hybrid predictor without its insides; the
// tournament organisation below is this design's choice. Tables are indexed
// by head PC bits [14:3]; gshare XORs that index with the folded history.
// Lookup is combinational. The history is shifted speculatively when
// lookup_en is set and is restored from upd_hist on a mispredict.
// Updates are applied at the clock edge.
module hybrid_bp #(
  parameter int ENTRIES  = 4096,
  parameter int GHR_BITS = 13
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                lookup_en,
  input  logic [63:0]         lookup_pc,
  output logic                taken,
  output logic [GHR_BITS-1:0] ghr,          // history used by this lookup
  input  logic                upd_valid,
  input  logic [63:0]         upd_pc,
  input  logic [GHR_BITS-1:0] upd_hist,     // history at the time of the lookup
  input  logic                upd_taken,
  input  logic                upd_mispredict
);
  localparam int IW = $clog2(ENTRIES);
  logic [1:0] gsh  [ENTRIES];
  logic [1:0] bim  [ENTRIES];
  logic [1:0] meta [ENTRIES];
  logic [GHR_BITS-1:0] ghr_q;

  function automatic logic [IW-1:0] fold(logic [GHR_BITS-1:0] h);
    logic [IW-1:0] r = '0;
    for (int i = 0; i < GHR_BITS; i++) r[i % IW] ^= h[i];
    return r;
  endfunction

  wire [IW-1:0] bi  = lookup_pc[IW+2:3];
  wire [IW-1:0] gi  = bi ^ fold(ghr_q);
  // Tables are stored XOR 2'b01 so that an all-zero array reads as the
  // weakly-not-taken / weakly-bimodal starting state; they are not reset.
  localparam logic [1:0] ENC = 2'b01;
  wire [1:0]    c_g = gsh[gi] ^ ENC;
  wire [1:0]    c_b = bim[bi] ^ ENC;
  wire [1:0]    c_m = meta[bi] ^ ENC;
  wire          p_g = c_g[1];
  wire          p_b = c_b[1];
  assign taken = c_m[1] ? p_g : p_b;
  assign ghr   = ghr_q;

  wire [IW-1:0] ubi = upd_pc[IW+2:3];
  wire [IW-1:0] ugi = ubi ^ fold(upd_hist);

  function automatic logic [1:0] sat(logic [1:0] c, logic up);
    if (up) return (c == 2'b11) ? c : c + 2'd1;
    else    return (c == 2'b00) ? c : c - 2'd1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ghr_q <= '0;
    else if (upd_valid && upd_mispredict) ghr_q <= {upd_hist[GHR_BITS-2:0], upd_taken};
    else if (lookup_en) ghr_q <= {ghr_q[GHR_BITS-2:0], taken};
  end

  wire [1:0] u_g = gsh[ugi] ^ ENC;
  wire [1:0] u_b = bim[ubi] ^ ENC;
  wire [1:0] u_m = meta[ubi] ^ ENC;
  always_ff @(posedge clk) begin
    if (upd_valid) begin
      gsh[ugi] <= sat(u_g, upd_taken) ^ ENC;
      bim[ubi] <= sat(u_b, upd_taken) ^ ENC;
      if ((u_g[1] == upd_taken) != (u_b[1] == upd_taken))
        meta[ubi] <= sat(u_m, u_g[1] == upd_taken) ^ ENC;
    end
  end
endmodule
