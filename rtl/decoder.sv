// decoder: decodes one instruction word. A `head` yields its HasCtrl bit,
// BlkSize and fall-through block offset (fields [57], [56:52], [51:0]).
// Any other instruction yields a uop whose register operands carry the
// Register Rename Flag (RRF, bit g): global operands will go through
// rename, local ones skip it. The code-block offset of the instruction
// (idx * 8, idx = position after the head) is attached so that control
// operations can find their head PC. Operand usage per opcode and the
// non-head encoding ([63:58] opcode, [57] rd RRF, [56:52] rd, [51] rs1 RRF,
// [50:46] rs1, [45] rs2 RRF, [44:40] rs2, [31:0] signed immediate) are this
// design's choice. Purely combinational.
module decoder
  import cgooo_pkg::*;
(
  input  word_t               instr,
  input  word_t               pc,
  input  logic [IDX_BITS-1:0] idx,
  output logic                is_head,
  output logic                has_ctrl,
  output logic [4:0]          blk_size,
  output word_t               ft_offset,
  output uop_t                u,
  output logic                illegal
);
  opcode_e op;
  always_comb begin
    op        = opcode_e'(instr[63:58]);
    is_head   = (instr[63:58] == OP_HEAD);
    has_ctrl  = instr[HEAD_HASCTRL];
    blk_size  = instr[HEAD_BSZ_HI:HEAD_BSZ_LO];
    ft_offset = {12'd0, instr[HEAD_FTO_HI:0]};
    illegal   = 1'b0;

    u         = '0;
    u.op      = op;
    u.pc      = pc;
    u.idx     = idx;
    u.imm     = {{32{instr[31]}}, instr[31:0]};
    u.rd      = '{v: 1'b0, g: instr[57], id: REG_BITS'(instr[56:52])};
    u.rs1     = '{v: 1'b0, g: instr[51], id: REG_BITS'(instr[50:46])};
    u.rs2     = '{v: 1'b0, g: instr[45], id: REG_BITS'(instr[44:40])};
    u.ard     = instr[56:52];
    case (instr[63:58])
      OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_MUL:
        begin u.rd.v = 1'b1; u.rs1.v = 1'b1; u.rs2.v = 1'b1; end
      OP_ADDI, OP_SLLI, OP_LD:
        begin u.rd.v = 1'b1; u.rs1.v = 1'b1; end
      OP_ST, OP_BEQ, OP_BNE, OP_BLT:
        begin u.rs1.v = 1'b1; u.rs2.v = 1'b1; end
      OP_CALL:  u.rd.v  = 1'b1;
      OP_RET:   u.rs1.v = 1'b1;
      OP_JMP, OP_NOP, OP_HEAD: ;
      default:  illegal = 1'b1;
    endcase
  end
endmodule
