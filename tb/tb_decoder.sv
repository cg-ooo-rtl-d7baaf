// tb_decoder: self-checking test of the decoder. Head instructions with
// random HasCtrl, BlkSize and fall-through offset must give back those
// fields (Fig. 2 layout); every opcode of the design's ISA must set the
// right operand-valid bits, RRF flags, register ids and sign-extended
// immediate; unknown opcodes must be flagged illegal. Combinational.
module tb_decoder;
  import cgooo_pkg::*;
  import cgooo_asm_pkg::*;
  word_t instr, pc, ft_offset;
  logic [4:0] idx, blk_size;
  logic is_head, has_ctrl, illegal;
  uop_t u;
  int checks = 0, failures = 0;

  decoder dut (.instr, .pc, .idx, .is_head, .has_ctrl, .blk_size, .ft_offset, .u, .illegal);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #100000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    opcode_e ops [19] = '{OP_NOP, OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_ADDI, OP_SLLI,
                          OP_MUL, OP_LD, OP_ST, OP_BEQ, OP_BNE, OP_BLT, OP_JMP, OP_CALL, OP_RET};
    for (int i = 0; i < 500; i++) begin
      bit hc; int n; longint f;
      hc = 1'($urandom); n = $urandom_range(0, 31); f = longint'($urandom_range(0, 1 << 20)) * 8;
      instr = a_head(hc, n, f); pc = {$urandom, $urandom}; idx = 0;
      #1;
      chk(is_head && !illegal, "head recognised");
      chk(has_ctrl == hc && blk_size == 5'(n) && ft_offset == word_t'(f), "head fields");
    end
    for (int i = 0; i < 2000; i++) begin
      opcode_e op; bit dg, ag, bg; int d, a, b; int imm;
      bit rd_v, a_v, b_v;
      op = ops[$urandom_range(0, 18)];
      dg = 1'($urandom); ag = 1'($urandom); bg = 1'($urandom);
      d = $urandom_range(0, 31); a = $urandom_range(0, 31); b = $urandom_range(0, 31);
      imm = int'($urandom);
      instr = {op, dg, 5'(d), ag, 5'(a), bg, 5'(b), 8'd0, 32'(imm)};
      pc = {$urandom, $urandom}; idx = 5'($urandom);
      case (op)
        OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_MUL: {rd_v, a_v, b_v} = 3'b111;
        OP_ADDI, OP_SLLI, OP_LD: {rd_v, a_v, b_v} = 3'b110;
        OP_ST, OP_BEQ, OP_BNE, OP_BLT: {rd_v, a_v, b_v} = 3'b011;
        OP_CALL: {rd_v, a_v, b_v} = 3'b100;
        OP_RET:  {rd_v, a_v, b_v} = 3'b010;
        default: {rd_v, a_v, b_v} = 3'b000;
      endcase
      #1;
      chk(!is_head && !illegal, "legal op");
      chk(u.op == op && u.pc == pc && u.idx == idx, "op/pc/idx");
      chk(u.rd.v == rd_v && u.rs1.v == a_v && u.rs2.v == b_v, "operand valid bits");
      chk(u.rd.g == dg && u.rs1.g == ag && u.rs2.g == bg, "RRF flags");
      chk(u.rd.id == 8'(d) && u.rs1.id == 8'(a) && u.rs2.id == 8'(b) && u.ard == 5'(d), "register ids");
      chk(u.imm == word_t'(longint'(imm)), "sign-extended immediate");
    end
    instr = {6'h2F, 58'd0}; #1; chk(illegal, "illegal opcode");
    instr = {6'h15, 58'd0}; #1; chk(illegal, "illegal opcode 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
