// tb_instruction_scheduler: self-checking test of one cluster's issue
// selection. Random requests from the cluster's 3 block windows (some of
// them memory operations) are checked: every request is granted while EUs
// remain, grants go in window order, each granted request appears on its
// own EU, at most one memory operation passes and only when mem_allow_in,
// and mem_allow_out reports whether the memory slot is still free. A
// reduced instance (6 windows on 2 EUs) checks the EU limit. Combinational.
module tb_instruction_scheduler;
  import cgooo_pkg::*;
  issue_t req [3];  logic grant [3];  issue_t eu_in [4];
  issue_t req2 [6]; logic grant2 [6]; issue_t eu2 [2];
  logic mai, mao, mai2, mao2;
  logic [2:0] n; logic [1:0] n2;
  int checks = 0, failures = 0;

  instruction_scheduler dut (.req, .grant, .eu_in, .mem_allow_in(mai), .mem_allow_out(mao), .n_issued(n));
  instruction_scheduler #(.NBW(6), .NEU(2)) dut2 (.req(req2), .grant(grant2), .eu_in(eu2),
                                                  .mem_allow_in(mai2), .mem_allow_out(mao2), .n_issued(n2));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic model(input issue_t r [], input int neu, input logic ma,
                       output logic g [], output int cnt, output logic mo);
    bit mok = ma; cnt = 0;
    g = new[r.size()];
    foreach (r[b]) begin
      g[b] = r[b].valid && cnt < neu && (!is_mem(r[b].u.op) || mok);
      if (g[b]) begin cnt++; if (is_mem(r[b].u.op)) mok = 0; end
    end
    mo = mok;
  endtask

  initial begin #100000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      issue_t r1 [] = new[3]; issue_t r2 [] = new[6];
      logic g1 [], g2 []; int c1, c2, e; logic mo1, mo2;
      foreach (r1[b]) begin r1[b] = '0; r1[b].valid = 1'($urandom); r1[b].u.op = $urandom_range(0, 2) == 0 ? OP_LD : OP_ADD; r1[b].a = {$urandom, $urandom}; req[b] = r1[b]; end
      foreach (r2[b]) begin r2[b] = '0; r2[b].valid = 1'($urandom); r2[b].u.op = $urandom_range(0, 2) == 0 ? OP_ST : OP_SUB; r2[b].a = {$urandom, $urandom}; req2[b] = r2[b]; end
      mai = 1'($urandom); mai2 = 1'($urandom);
      #1;
      model(r1, 4, mai, g1, c1, mo1);
      model(r2, 2, mai2, g2, c2, mo2);
      e = 0;
      foreach (r1[b]) begin
        chk(grant[b] == g1[b], "grant (3 BW / 4 EU)");
        if (g1[b]) begin chk(eu_in[e] == r1[b], "EU slot contents"); e++; end
      end
      for (int k = e; k < 4; k++) chk(!eu_in[k].valid, "unused EU idle");
      chk(int'(n) == c1 && mao == mo1, "count and memory chain");
      e = 0;
      foreach (r2[b]) begin
        chk(grant2[b] == g2[b], "grant (6 BW / 2 EU)");
        if (g2[b]) begin chk(eu2[e] == r2[b], "EU slot contents 2"); e++; end
      end
      chk(int'(n2) == c2 && mao2 == mo2, "count and memory chain 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
