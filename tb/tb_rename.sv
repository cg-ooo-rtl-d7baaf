// tb_rename: self-checking test of global-register rename. Random fetch
// groups of 4 uops with random local/global operands are renamed; a model
// of the speculative map, committed map and free list checks that global
// sources read the map (with bypass inside the group), local operands are
// untouched, each global destination gets a register that was free, taken
// from the preferred GRF segment when that segment has one, and old_prd is
// the previous mapping. Renamed groups later commit in order (freeing the
// old registers) or are discarded by a recovery, which must restore the
// speculative map from the committed one. dbg_preg is checked against the
// committed map. Combinational rename, state updates at the clock edge.
module tb_rename;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_valid;
  uop_t in_u [4], out_u [4];
  logic [3:0] pref_seg;
  logic can_rename, fire, commit, recover;
  logic [9:0] gw_v;
  logic [4:0] gw_areg [10];
  logic [7:0] gw_new [10], gw_old [10];
  logic [4:0] dbg_areg;
  logic [7:0] dbg_preg;
  int checks = 0, failures = 0;

  logic [7:0] ms [32], ma [32];
  logic [255:0] mfree;
  typedef struct packed { logic [3:0] n; logic [3:0][20:0] w; } grp_t;
  grp_t inflight [$];

  rename dut (.clk, .rst_n, .in_valid, .in_u, .pref_seg, .can_rename, .fire, .out_u, .commit,
              .gw_v, .gw_areg, .gw_new, .gw_old, .recover, .dbg_areg, .dbg_preg);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic opnd_t ropnd();
    opnd_t o; o.v = 1'($urandom); o.g = 1'($urandom); o.id = 8'($urandom_range(0, o.g ? 31 : 19));
    return o;
  endfunction

  initial begin #1000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int n_rec = 0, n_com = 0, n_pref = 0;
  initial begin
    in_valid = 0; pref_seg = 0; fire = 0; commit = 0; recover = 0; gw_v = 0; dbg_areg = 0;
    for (int k = 0; k < 4; k++) in_u[k] = '0;
    for (int g = 0; g < 10; g++) begin gw_areg[g] = 0; gw_new[g] = 0; gw_old[g] = 0; end
    for (int a = 0; a < 32; a++) begin ms[a] = 8'(a); ma[a] = 8'(a); end
    mfree = '0; for (int p = 32; p < 256; p++) mfree[p] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      logic [7:0] sn [32]; logic [255:0] fn; grp_t grp; bit ok;
      @(negedge clk);
      dbg_areg = 5'($urandom); #1;
      chk(dbg_preg == ma[dbg_areg], "committed map");
      recover = ($urandom_range(0, 149) == 0);
      commit  = !recover && inflight.size() != 0 && $urandom_range(0, 2) == 0;
      gw_v = '0;
      if (commit) begin
        grp = inflight[0];
        for (int g = 0; g < 4; g++) if (g < grp.n) begin
          gw_v[g] = 1; {gw_areg[g], gw_new[g], gw_old[g]} = grp.w[g];
        end
      end
      for (int k = 0; k < 4; k++) begin
        in_valid[k] = 1'($urandom);
        in_u[k] = '0; in_u[k].op = OP_ADD;
        in_u[k].rd = ropnd(); in_u[k].rs1 = ropnd(); in_u[k].rs2 = ropnd();
        in_u[k].ard = in_u[k].rd.id[4:0];
      end
      pref_seg = 4'($urandom_range(0, 8));
      fire = !recover && $urandom_range(0, 1);
      #1;
      // model rename
      sn = ms; fn = mfree; ok = 1; grp = '0;
      for (int k = 0; k < 4; k++) if (in_valid[k]) begin
        if (in_u[k].rs1.v && in_u[k].rs1.g) chk(out_u[k].rs1.id == sn[in_u[k].rs1.id[4:0]], "rs1 renamed");
        else chk(out_u[k].rs1 == in_u[k].rs1, "rs1 untouched");
        if (in_u[k].rs2.v && in_u[k].rs2.g) chk(out_u[k].rs2.id == sn[in_u[k].rs2.id[4:0]], "rs2 renamed");
        else chk(out_u[k].rs2 == in_u[k].rs2, "rs2 untouched");
        if (in_u[k].rd.v && in_u[k].rd.g) begin
          logic [7:0] p; bit seg_has;
          p = out_u[k].rd.id;
          seg_has = 0;
          for (int q = 0; q < 256; q++) if (fn[q] && q / 29 == pref_seg) seg_has = 1;
          if (fn == '0) ok = 0;
          else begin
            chk(fn[p], "destination was free");
            if (seg_has) begin chk(p / 29 == pref_seg, "preferred segment"); n_pref++; end
            chk(out_u[k].old_prd == sn[in_u[k].ard], "old mapping");
            fn[p] = 0;
            grp.w[grp.n] = {in_u[k].ard, p, sn[in_u[k].ard]}; grp.n++;
            sn[in_u[k].ard] = p;
          end
        end else chk(out_u[k].rd == in_u[k].rd, "local destination untouched");
      end
      chk(can_rename == ok, "can_rename");
      @(posedge clk); #1;
      if (recover) begin
        logic [255:0] used; used = '0;
        for (int a = 0; a < 32; a++) used[ma[a]] = 1;
        ms = ma; mfree = ~used; inflight.delete(); n_rec++;
      end else begin
        if (fire && ok) begin ms = sn; mfree = fn; if (grp.n != 0) inflight.push_back(grp); end
        if (commit) begin
          grp = inflight.pop_front();
          for (int g = 0; g < 4; g++) if (g < grp.n) begin
            logic [4:0] a; logic [7:0] nw, od;
            {a, nw, od} = grp.w[g];
            ma[a] = nw; mfree[od] = 1;
          end
          n_com++;
        end
      end
      fire = 0; commit = 0; recover = 0; gw_v = '0;
    end
    chk(n_rec > 5 && n_com > 100 && n_pref > 100, "commits, recoveries and segment preference exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
