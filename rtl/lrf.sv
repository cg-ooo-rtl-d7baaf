// lrf: Local Register File of one block window: 20 x 64-bit, 2 read and
// 2 write ports (as the paper gives), plus two scoreboard bits per register:
// valid (the register holds a value a reader may use) and pending (an issued
// instruction will write it). Both are cleared when the window is given a
// new block or flushed (inv_all); issuing a writer (pend) clears valid and
// sets pending; the write sets valid and clears pending.
// Reads are combinational; writes and bit updates take effect at the clock
// edge. Write port 1 wins if both ports write the same register.
module lrf #(
  parameter int ENTRIES = 20,
  parameter int NRD     = 2,
  parameter int NWR     = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inv_all,
  input  logic        pend_en,
  input  logic [4:0]  pend_addr,
  input  logic [4:0]  rd_addr [NRD],
  output logic [63:0] rd_data [NRD],
  input  logic        wr_en   [NWR],
  input  logic [4:0]  wr_addr [NWR],
  input  logic [63:0] wr_data [NWR],
  output logic [ENTRIES-1:0] valid,
  output logic [ENTRIES-1:0] pending
);
  logic [63:0] r [ENTRIES];

  always_comb
    for (int p = 0; p < NRD; p++)
      rd_data[p] = (int'(rd_addr[p]) < ENTRIES) ? r[rd_addr[p]] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0; pending <= '0;
    end else if (inv_all) begin
      valid <= '0; pending <= '0;
    end else begin
      logic [ENTRIES-1:0] nv, np;
      nv = valid; np = pending;
      if (pend_en && int'(pend_addr) < ENTRIES) begin
        nv[pend_addr] = 1'b0; np[pend_addr] = 1'b1;
      end
      for (int p = 0; p < NWR; p++)
        if (wr_en[p] && int'(wr_addr[p]) < ENTRIES) begin
          nv[wr_addr[p]] = 1'b1; np[wr_addr[p]] = 1'b0;
        end
      valid <= nv; pending <= np;
    end
  end

  always_ff @(posedge clk)
    for (int p = 0; p < NWR; p++)
      if (wr_en[p] && int'(wr_addr[p]) < ENTRIES) r[wr_addr[p]] <= wr_data[p];
endmodule
