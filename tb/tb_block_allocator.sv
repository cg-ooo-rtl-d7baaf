// tb_block_allocator: self-checking test of block allocation and
// instruction steering (9 windows). Random fetch groups (head or
// continuation), window free bits, IQ space, BROB-full and rename-ok
// inputs. Checked against a model: a head takes the first free window at
// or after the round-robin pointer and needs a BROB slot; continuation
// groups go to the window the last head took; a group fires only when
// rename and IQ space allow it; stall_no_bw is set for a head with no free
// window; pref_seg names the target window's GRF segment.
module tb_block_allocator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, in_valid, in_head, brob_full, rename_ok, fire, alloc, stall_no_bw;
  logic [2:0] in_nops;
  logic [8:0] bw_free;
  logic [3:0] bw_iq_free [9];
  logic [3:0] target_bw, pref_seg;
  int checks = 0, failures = 0;
  int rr, cur;

  block_allocator dut (.clk, .rst_n, .flush, .in_valid, .in_head, .in_nops, .bw_free, .bw_iq_free,
                       .brob_full, .rename_ok, .fire, .alloc, .target_bw, .pref_seg, .stall_no_bw);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #500000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int n_alloc = 0, n_stall = 0;
  initial begin
    flush = 0; in_valid = 0; in_head = 0; in_nops = 0; bw_free = 0; brob_full = 0; rename_ok = 0;
    for (int b = 0; b < 9; b++) bw_iq_free[b] = 0;
    rr = 0; cur = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int pick, tgt; bit found, f;
      @(negedge clk);
      in_valid = $urandom_range(0, 3) != 0; in_head = 1'($urandom); in_nops = 3'($urandom_range(0, 4));
      bw_free = 9'($urandom) & 9'($urandom);
      for (int b = 0; b < 9; b++) bw_iq_free[b] = 4'($urandom_range(0, 10));
      brob_full = $urandom_range(0, 7) == 0; rename_ok = $urandom_range(0, 7) != 0;
      flush = $urandom_range(0, 49) == 0;
      #1;
      found = 0; pick = 0;
      for (int k = 0; k < 9 && !found; k++) if (bw_free[(rr + k) % 9]) begin found = 1; pick = (rr + k) % 9; end
      tgt = in_head ? pick : cur;
      f = in_valid && rename_ok && bw_iq_free[tgt] >= in_nops && (!in_head || (found && !brob_full));
      chk(int'(target_bw) == tgt, "target window");
      chk(int'(pref_seg) == tgt, "segment next to the window");
      chk(fire == f, "fire");
      chk(alloc == (f && in_head), "allocation");
      chk(stall_no_bw == (in_valid && in_head && !found), "stall for a free window");
      @(posedge clk); #1;
      if (!flush && f && in_head) begin cur = pick; rr = (pick + 1) % 9; n_alloc++; end
      if (in_valid && in_head && !found) n_stall++;
    end
    chk(n_alloc > 100 && n_stall > 10, "allocations and stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
