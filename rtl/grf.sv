// grf: the Global Register File, 256 x 64-bit physical registers shared by
// all block windows and split into SEGS segments; segment s holds registers
// [s*SEG_SIZE, (s+1)*SEG_SIZE) and sits next to block window s, so rename
// tries to give a window's results registers from its own segment. Every
// read port can reach every segment (the inter-segment path); with SEGS = 1
// this is a unified register file. A ready bit per register tells the Head
// Buffers which global operands are available: cleared when rename
// allocates the register, set by its write, all set on squash recovery.
// Reads are combinational, writes at the clock edge.
module grf
  import cgooo_pkg::*;
#(
  parameter int NUM_PREGS = 256,
  parameter int SEGS      = 9,
  parameter int NR        = 18,
  parameter int NW        = 13,
  parameter int NCLR      = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [PREG_BITS-1:0] raddr [NR],
  output word_t                rdata [NR],
  input  logic                 we    [NW],
  input  logic [PREG_BITS-1:0] waddr [NW],
  input  word_t                wdata [NW],
  input  logic                 clr_en   [NCLR],
  input  logic [PREG_BITS-1:0] clr_addr [NCLR],
  input  logic                 set_all,
  output logic [NUM_PREGS-1:0] ready
);
  localparam int SEG_SIZE = (NUM_PREGS + SEGS - 1) / SEGS;
  word_t seg_mem [SEGS][SEG_SIZE];

  always_comb
    for (int p = 0; p < NR; p++)
      rdata[p] = seg_mem[int'(raddr[p]) / SEG_SIZE][int'(raddr[p]) % SEG_SIZE];

  // all registers read as zero after reset (the initial architectural state)
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int s = 0; s < SEGS; s++)
        for (int i = 0; i < SEG_SIZE; i++) seg_mem[s][i] <= '0;
    end else begin
      for (int p = 0; p < NW; p++)
        if (we[p]) seg_mem[int'(waddr[p]) / SEG_SIZE][int'(waddr[p]) % SEG_SIZE] <= wdata[p];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ready <= '1;
    else if (set_all) ready <= '1;
    else begin
      logic [NUM_PREGS-1:0] n;
      n = ready;
      for (int c = 0; c < NCLR; c++) if (clr_en[c]) n[clr_addr[c]] = 1'b0;
      for (int p = 0; p < NW; p++)   if (we[p])     n[waddr[p]]    = 1'b1;
      ready <= n;
    end
  end
endmodule
