// tb_execution_unit: self-checking test of one execution unit (1-cycle
// ALU, branch resolution and address generation). Random operations with
// random operands go in; one cycle later the register write, the resolved
// control result (taken, next PC, mispredict against the front end's
// prediction, head PC by Eq. 2) and the memory operation are checked
// against a reference model. The kill input must drop the result.
module tb_execution_unit;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kill;
  issue_t in;
  wb_t wb;
  resolve_t res;
  memop_t mem;
  int checks = 0, failures = 0;

  execution_unit dut (.clk, .rst_n, .kill, .in, .wb, .res, .mem);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #500000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    opcode_e ops [18] = '{OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_ADDI, OP_SLLI,
                          OP_MUL, OP_LD, OP_ST, OP_BEQ, OP_BNE, OP_BLT, OP_JMP, OP_CALL, OP_RET};
    kill = 0; in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      word_t r, nxt, a, b; logic tk, ctl, m; word_t tgt;
      @(negedge clk);
      in = '0;
      in.valid = 1; in.u.op = ops[$urandom_range(0, 17)];
      a = {$urandom, $urandom}; b = ($urandom_range(0, 3) == 0) ? a : {$urandom, $urandom};
      in.a = a; in.b = b;
      in.u.imm = word_t'(longint'(int'($urandom)));
      in.u.idx = 5'($urandom_range(1, 31));
      in.u.pc = {$urandom, $urandom[31:3], 3'b0};
      in.u.rd = '{v: 1, g: 1'($urandom), id: 8'($urandom)};
      in.ft_pc = {$urandom, $urandom}; in.bsn = 5'($urandom); in.bw = 5'($urandom_range(0, 8));
      tk = 0; tgt = in.u.pc + in.u.imm; r = '0;
      case (in.u.op)
        OP_ADD: r = a + b;  OP_SUB: r = a - b;  OP_AND: r = a & b;  OP_OR: r = a | b;
        OP_XOR: r = a ^ b;  OP_SLL: r = a << b[5:0];  OP_SRL: r = a >> b[5:0];
        OP_MUL: r = a * b;  OP_ADDI: r = a + in.u.imm;  OP_SLLI: r = a << in.u.imm[5:0];
        OP_BEQ: tk = (a == b); OP_BNE: tk = (a != b); OP_BLT: tk = ($signed(a) < $signed(b));
        OP_JMP: tk = 1; OP_CALL: begin tk = 1; r = in.ft_pc; end
        OP_RET: begin tk = 1; tgt = a; end
        default: ;
      endcase
      nxt = tk ? tgt : in.ft_pc;
      in.pred_next = $urandom_range(0, 1) ? nxt : in.ft_pc + 8;
      kill = ($urandom_range(0, 9) == 0);
      ctl = is_ctrl(in.u.op); m = is_mem(in.u.op);
      @(posedge clk); #1;
      chk(wb.valid == (!kill && !m), "wb valid");
      if (wb.valid) chk(wb.data == r && wb.rd == in.u.rd && wb.bsn == in.bsn && wb.bw == in.bw, "wb data");
      chk(res.valid == (!kill && ctl), "resolve valid");
      if (res.valid) begin
        chk(res.taken == tk && res.actual_next == nxt, "branch outcome");
        chk(res.mispredict == (nxt != in.pred_next), "mispredict");
        chk(res.head_pc == in.u.pc - (word_t'(in.u.idx) << 3), "Eq. 2 head PC");
      end
      chk(mem.valid == (!kill && m), "mem valid");
      if (mem.valid) chk(mem.addr == a + in.u.imm && mem.is_store == (in.u.op == OP_ST) && mem.data == b, "mem op");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
