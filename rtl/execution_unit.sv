// execution_unit: one 64-bit execution unit (EU) of a cluster. It executes
// integer operations, resolves control operations and computes load/store
// addresses; every operation takes one cycle (issue in cycle t, result
// registered and written back in cycle t+1), which is this design's choice.
// Control operations compute the block's real successor: the target
// (PC + imm, or rs1 for a return) if taken, else the fall-through block PC
// recorded at the head, and compare it with the successor the front end
// followed. They also compute their head's PC as PC - code-block-offset
// (Eq. 2), which is how the block predictor is indexed for training.
// Loads and stores leave as a memop to the load-store unit, which completes
// them; everything else completes here.
module execution_unit
  import cgooo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     kill,          // drop the result in flight (squash)
  input  issue_t   in,
  output wb_t      wb,
  output resolve_t res,
  output memop_t   mem
);
  word_t    r;
  logic     tk;
  word_t    tgt;
  ctype_e   ct;
  always_comb begin
    r = '0; tk = 1'b0; tgt = in.u.pc + in.u.imm; ct = CT_COND;
    unique case (in.u.op)
      OP_ADD:  r = in.a + in.b;
      OP_SUB:  r = in.a - in.b;
      OP_AND:  r = in.a & in.b;
      OP_OR:   r = in.a | in.b;
      OP_XOR:  r = in.a ^ in.b;
      OP_SLL:  r = in.a << in.b[5:0];
      OP_SRL:  r = in.a >> in.b[5:0];
      OP_MUL:  r = in.a * in.b;
      OP_ADDI: r = in.a + in.u.imm;
      OP_SLLI: r = in.a << in.u.imm[5:0];
      OP_BEQ:  tk = (in.a == in.b);
      OP_BNE:  tk = (in.a != in.b);
      OP_BLT:  tk = ($signed(in.a) < $signed(in.b));
      OP_JMP:  begin tk = 1'b1; ct = CT_JUMP; end
      OP_CALL: begin tk = 1'b1; ct = CT_CALL; r = in.ft_pc; end
      OP_RET:  begin tk = 1'b1; ct = CT_RET;  tgt = in.a; end
      default: ;
    endcase
  end

  wire   ctrl = is_ctrl(in.u.op);
  word_t nxt;
  assign nxt = tk ? tgt : in.ft_pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= '0; res <= '0; mem <= '0;
    end else begin
      wb.valid  <= in.valid && !kill && !is_mem(in.u.op);
      wb.rd     <= in.u.rd;
      wb.data   <= r;
      wb.bsn    <= in.bsn;
      wb.bw     <= in.bw;

      res.valid       <= in.valid && !kill && ctrl;
      res.taken       <= tk;
      res.ctype       <= ct;
      res.actual_next <= nxt;
      res.mispredict  <= nxt != in.pred_next;
      res.head_pc     <= in.u.pc - (word_t'(in.u.idx) << 3);
      res.hist        <= in.hist;
      res.bsn         <= in.bsn;

      mem.valid    <= in.valid && !kill && is_mem(in.u.op);
      mem.is_store <= (in.u.op == OP_ST);
      mem.addr     <= in.a + in.u.imm;
      mem.data     <= in.b;
      mem.rd       <= in.u.rd;
      mem.bsn      <= in.bsn;
      mem.bw       <= in.bw;
      mem.idx      <= in.u.idx;
      mem.head_pc  <= in.u.pc - (word_t'(in.u.idx) << 3);
    end
  end
endmodule
