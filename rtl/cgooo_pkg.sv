// cgooo_pkg: types and constants shared by the coarse-grain out-of-order core.
//
// The `head` word follows the layout of the block-header instruction:
// opcode [63:58], HasCtrl [57], BlkSize [56:52], fall-through block offset
// [51:0]. The encoding of the other instructions (a small 64-bit
// load/store ISA with a Register Rename Flag per operand: 1 = global,
// 0 = local) and all opcode values are this design's own choice.
// Instructions are 8 bytes apart, so PC bits [2:0] are always zero.
package cgooo_pkg;

  localparam int XLEN       = 64;
  localparam int AREG_BITS  = 5;   // architectural global registers / local register ids
  localparam int PREG_BITS  = 8;   // 256 physical global registers
  localparam int REG_BITS   = 8;   // operand id after rename (local id or physical id)
  localparam int BSN_BITS   = 5;   // block sequence number: 16-entry BROB plus wrap bit
  localparam int IDX_BITS   = 5;   // instruction position inside a block (BlkSize is 5 bits)
  localparam int NGW        = 10;  // global-write slots per BROB entry (GW0..GW9)
  localparam int GHR_BITS   = 13;  // global pattern history

  typedef logic [GHR_BITS-1:0] hist_t;

  typedef logic [XLEN-1:0]      word_t;
  typedef logic [BSN_BITS-1:0]  bsn_t;

  typedef enum logic [5:0] {
    OP_NOP  = 6'h00,
    OP_ADD  = 6'h01, OP_SUB  = 6'h02, OP_AND  = 6'h03, OP_OR   = 6'h04,
    OP_XOR  = 6'h05, OP_SLL  = 6'h06, OP_SRL  = 6'h07, OP_ADDI = 6'h08,
    OP_SLLI = 6'h09, OP_MUL  = 6'h0A,
    OP_LD   = 6'h10, OP_ST   = 6'h11,
    OP_BEQ  = 6'h20, OP_BNE  = 6'h21, OP_BLT  = 6'h22, OP_JMP  = 6'h23,
    OP_CALL = 6'h24, OP_RET  = 6'h25,
    OP_HEAD = 6'h3F
  } opcode_e;

  // control type kept in the BTB
  typedef enum logic [1:0] { CT_COND = 2'd0, CT_JUMP = 2'd1, CT_CALL = 2'd2, CT_RET = 2'd3 } ctype_e;

  // field positions of the head instruction
  localparam int HEAD_HASCTRL = 57;
  localparam int HEAD_BSZ_HI  = 56;
  localparam int HEAD_BSZ_LO  = 52;
  localparam int HEAD_FTO_HI  = 51;

  // one register operand after decode: valid, RRF (1 = global), id
  typedef struct packed {
    logic                v;
    logic                g;
    logic [REG_BITS-1:0] id;
  } opnd_t;

  // a decoded (and, after rename, renamed) non-head instruction
  typedef struct packed {
    opcode_e              op;
    opnd_t                rd;
    opnd_t                rs1;
    opnd_t                rs2;
    logic [PREG_BITS-1:0] old_prd;   // previous mapping of a global destination
    logic [AREG_BITS-1:0] ard;       // architectural global destination
    word_t                imm;
    word_t                pc;
    logic [IDX_BITS-1:0]  idx;       // position in the block (1 = first after head)
  } uop_t;

  // what a BW sends to an execution unit
  typedef struct packed {
    logic                 valid;
    uop_t                 u;
    word_t                a;         // rs1 value
    word_t                b;         // rs2 value
    bsn_t                 bsn;
    logic [4:0]           bw;        // issuing block window
    word_t                ft_pc;     // fall-through next-block PC of the block
    word_t                pred_next; // next-block PC the front end followed
    hist_t                hist;      // predictor history of the block's lookup
  } issue_t;

  // a register write (from an EU or the LSU)
  typedef struct packed {
    logic                 valid;     // an instruction completed
    opnd_t                rd;
    word_t                data;
    bsn_t                 bsn;
    logic [4:0]           bw;
  } wb_t;

  // a resolved control operation
  typedef struct packed {
    logic   valid;
    logic   mispredict;
    logic   taken;
    ctype_e ctype;
    word_t  head_pc;       // Eq. 2: PC of the control op minus its code-block offset
    word_t  actual_next;
    hist_t  hist;
    bsn_t   bsn;
  } resolve_t;

  // a memory operation leaving an EU for the LSU
  typedef struct packed {
    logic                valid;
    logic                is_store;
    word_t               addr;
    word_t               data;
    opnd_t               rd;
    bsn_t                bsn;
    logic [4:0]          bw;
    logic [IDX_BITS-1:0] idx;
    word_t               head_pc;   // restart point if this load is squashed
  } memop_t;

  function automatic logic is_ctrl(opcode_e op);
    return op inside {OP_BEQ, OP_BNE, OP_BLT, OP_JMP, OP_CALL, OP_RET};
  endfunction

  function automatic logic is_mem(opcode_e op);
    return op inside {OP_LD, OP_ST};
  endfunction

  // age of a block relative to the oldest block in the BROB (0 = oldest)
  function automatic bsn_t blk_age(bsn_t sn, bsn_t head_sn);
    return bsn_t'(sn - head_sn);
  endfunction

endpackage
