// cgooo_asm_pkg: instruction encoders used by the testbenches to build small
// programs for the core (head words and the core's 64-bit instruction
// format: [63:58] opcode, [57] rd global flag, [56:52] rd, [51] rs1 global
// flag, [50:46] rs1, [45] rs2 global flag, [44:40] rs2, [31:0] immediate).
package cgooo_asm_pkg;
  import cgooo_pkg::*;

  function automatic word_t a_head(bit has_ctrl, int nops, longint fto);
    return {OP_HEAD, has_ctrl, 5'(nops), 52'(fto)};
  endfunction

  function automatic word_t a_r(opcode_e op, bit dg, int d, bit ag, int a, bit bg, int b);
    return {op, dg, 5'(d), ag, 5'(a), bg, 5'(b), 8'd0, 32'd0};
  endfunction

  function automatic word_t a_i(opcode_e op, bit dg, int d, bit ag, int a, longint imm);
    return {op, dg, 5'(d), ag, 5'(a), 1'b0, 5'd0, 8'd0, 32'(imm)};
  endfunction

  // store: address = rs1 + imm, data = rs2; branches: rs1, rs2, pc-relative imm
  function automatic word_t a_s(opcode_e op, bit ag, int a, bit bg, int b, longint imm);
    return {op, 1'b0, 5'd0, ag, 5'(a), bg, 5'(b), 8'd0, 32'(imm)};
  endfunction
endpackage
