// tb_brob: self-checking test of the Block Re-Order Buffer (16 entries).
// A model keeps the in-flight blocks in order, each with its remaining
// instruction count and its global-write records. Random traffic allocates
// blocks (BlkSize 1..8), appends up to 4 global writes per cycle to the
// youngest block, completes instructions of random in-flight blocks and
// sometimes squashes younger blocks (exclusive or inclusive of a block).
// Checked every cycle: sequence numbers, full/empty, the commit of the
// oldest complete block and the GW records it hands to rename, and that no
// younger complete block commits first.
module tb_brob;
  import cgooo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc, full, commit, flush, flush_incl, empty;
  logic [5:0] alloc_size;
  bsn_t alloc_bsn, gw_bsn, commit_bsn, flush_bsn, head_bsn;
  logic gw_we [4];
  logic [4:0] gw_areg_in [4];
  logic [7:0] gw_new_in [4], gw_old_in [4];
  logic comp_v [14];
  bsn_t comp_bsn [14];
  logic [9:0] gw_v;
  logic [4:0] gw_areg [10];
  logic [7:0] gw_new [10], gw_old [10];
  logic [15:0] live;
  int checks = 0, failures = 0;

  typedef struct packed { bsn_t sn; logic [5:0] remain; logic [3:0] ngw; logic [9:0][20:0] gw; } blk_t;
  blk_t q [$];
  bsn_t next_sn;

  brob dut (.clk, .rst_n, .alloc, .alloc_size, .alloc_bsn, .full, .gw_we, .gw_bsn, .gw_areg_in,
            .gw_new_in, .gw_old_in, .comp_v, .comp_bsn, .commit, .commit_bsn, .gw_v, .gw_areg,
            .gw_new, .gw_old, .flush, .flush_bsn, .flush_incl, .head_bsn, .empty, .live);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #1000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int n_commits = 0, n_flush = 0;
  initial begin
    alloc = 0; alloc_size = 0; gw_bsn = 0; flush = 0; flush_bsn = 0; flush_incl = 0;
    for (int k = 0; k < 4; k++) begin gw_we[k] = 0; gw_areg_in[k] = 0; gw_new_in[k] = 0; gw_old_in[k] = 0; end
    for (int c = 0; c < 14; c++) begin comp_v[c] = 0; comp_bsn[c] = 0; end
    next_sn = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      bit exp_commit; int fidx;
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == 16), "full");
      chk(alloc_bsn == next_sn, "allocated sequence number");
      exp_commit = q.size() != 0 && q[0].remain == 0;
      chk(commit == exp_commit, "commit of oldest complete block");
      if (exp_commit) begin
        chk(commit_bsn == q[0].sn, "commit bsn");
        for (int g = 0; g < 10; g++) begin
          chk(gw_v[g] == (g < q[0].ngw), "GW valid");
          if (g < q[0].ngw) chk({gw_areg[g], gw_new[g], gw_old[g]} == q[0].gw[g], "GW record");
        end
      end
      // stimulus
      flush = (q.size() > 1) && ($urandom_range(0, 59) == 0);
      alloc = !flush && !full && $urandom_range(0, 2) == 0;
      alloc_size = 6'($urandom_range(1, 8));
      for (int k = 0; k < 4; k++) begin gw_we[k] = 0; gw_areg_in[k] = 5'($urandom); gw_new_in[k] = 8'($urandom); gw_old_in[k] = 8'($urandom); end
      if (!flush && (alloc || q.size() != 0)) begin
        int room;
        gw_bsn = alloc ? next_sn : q[$].sn;
        room = alloc ? 10 : 10 - q[$].ngw;
        for (int k = 0; k < 4 && k < room; k++) gw_we[k] = 1'($urandom);
      end
      for (int c = 0; c < 14; c++) comp_v[c] = 0;
      if (!flush) for (int c = 0; c < 14; c++) if (q.size() != 0 && $urandom_range(0, 3) == 0) begin
        int b; b = $urandom_range(0, q.size() - 1);
        if (q[b].remain > 0) begin blk_t t; t = q[b]; comp_v[c] = 1; comp_bsn[c] = t.sn; t.remain--; q[b] = t; end
      end
      fidx = flush ? $urandom_range(1, q.size() - 1) : 0;
      if (flush) begin flush_incl = 1'($urandom); flush_bsn = q[fidx].sn; n_flush++; end
      @(posedge clk); #1;
      if (exp_commit) begin void'(q.pop_front()); n_commits++; fidx--; end
      if (flush) begin
        int keep; keep = flush_incl ? fidx : fidx + 1;
        while (q.size() > keep) void'(q.pop_back());
        next_sn = flush_incl ? flush_bsn : flush_bsn + 1;
      end else if (alloc) begin
        blk_t nb; nb = '0; nb.sn = next_sn; nb.remain = alloc_size; nb.ngw = 0;
        q.push_back(nb); next_sn++;
      end
      if (!flush && q.size() != 0 && gw_bsn == q[$].sn)
        for (int k = 0; k < 4; k++) if (gw_we[k]) begin
          blk_t t; t = q[$];
          t.gw[t.ngw] = {gw_areg_in[k], gw_new_in[k], gw_old_in[k]}; t.ngw++;
          q[q.size() - 1] = t;
        end
      flush = 0; alloc = 0;
      for (int k = 0; k < 4; k++) gw_we[k] = 0;
      for (int c = 0; c < 14; c++) comp_v[c] = 0;
    end
    chk(n_commits > 100 && n_flush > 10, "traffic exercised commits and squashes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
