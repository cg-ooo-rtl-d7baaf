// fetch_unit: block-driven instruction fetch. Fetch works one code block at
// a time: the first word of a block is its `head`, whose BlkSize field tells
// how many instructions follow it. Fetch delivers up to FETCH_W consecutive
// instructions per cycle from the current block (a fetch group never spans
// two blocks in this design) and, at the end of the block, takes the next
// block PC from the Block PC Buffer. A buffer entry of 0 means "not known
// yet": fetch then continues with the block adjacent in memory.
// Interface: imem_addr / imem_data is a combinational read of FETCH_W
// words at any 8-byte aligned address (the instruction cache is outside
// this design). The output group is registered (fetch -> decode register)
// and held while out_ready is low. redirect restarts fetch at a block start
// and drops the group in flight; halt stops fetch (squash recovery).
module fetch_unit
  import cgooo_pkg::*;
#(
  parameter int FETCH_W = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t reset_pc,
  input  logic  halt,
  input  logic  redirect,
  input  word_t redirect_pc,
  // instruction memory
  output word_t imem_addr,
  input  word_t imem_data [FETCH_W],
  // Block PC Buffer
  output logic  pcbuf_pop,
  input  word_t pcbuf_pc,
  input  logic  pcbuf_empty,
  // to decode
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_pc,                 // PC of out_instr[0]
  output word_t out_instr [FETCH_W],
  output logic [$clog2(FETCH_W+1)-1:0] out_cnt,
  output logic  out_block_start         // out_instr[0] is a head
);
  localparam int CW = $clog2(FETCH_W+1);
  typedef enum logic [1:0] { S_START, S_IN, S_NEXT } st_e;
  st_e   st;
  word_t pc;
  logic [5:0] remain;                   // instructions of the block not yet fetched

  wire   take = !out_valid || out_ready;
  word_t faddr;
  logic  fvalid;
  always_comb begin
    faddr  = pc;
    fvalid = (st != S_NEXT) || !pcbuf_empty;
    if (st == S_NEXT && pcbuf_pc != '0) faddr = pcbuf_pc;
  end
  assign imem_addr = faddr;
  assign pcbuf_pop = take && !halt && !redirect && st == S_NEXT && !pcbuf_empty;

  // group size
  wire  starting = (st != S_IN);
  wire [5:0] blk_len = 6'(imem_data[0][HEAD_BSZ_HI:HEAD_BSZ_LO]) + 6'd1;
  wire [5:0] left    = starting ? blk_len : remain;
  wire [CW-1:0] n    = (left > 6'(FETCH_W)) ? CW'(FETCH_W) : CW'(left);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_START; pc <= reset_pc; remain <= '0;
      out_valid <= 1'b0; out_cnt <= '0; out_pc <= '0; out_block_start <= 1'b0;
      for (int i = 0; i < FETCH_W; i++) out_instr[i] <= '0;
    end else if (redirect) begin
      st <= S_START; pc <= redirect_pc; out_valid <= 1'b0;
    end else if (take) begin
      out_valid <= 1'b0;
      if (!halt && fvalid) begin
        out_valid       <= 1'b1;
        out_pc          <= faddr;
        out_cnt         <= n;
        out_block_start <= starting;
        for (int i = 0; i < FETCH_W; i++) out_instr[i] <= imem_data[i];
        pc     <= faddr + (word_t'(n) << 3);
        remain <= left - 6'(n);
        st     <= (left == 6'(n)) ? S_NEXT : S_IN;
      end
    end
  end
endmodule
