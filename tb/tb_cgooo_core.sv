// tb_cgooo_core: end-to-end test of the core at its default configuration.
// The program (built with cgooo_asm_pkg) is the search loop
//   index = -1; do { index += 1; } while (values[index] != 15);
// written as code blocks, followed by blocks that make a store and a younger
// load to the same address race each other. The testbench supplies an
// instruction memory and a data memory with a fixed read latency, then
// checks the committed global registers and memory, and counts the events
// the design is built around: block commits, control and memory squashes,
// Skipahead issues, several windows issuing in one cycle, stalls for a free
// block window, heads that skip the predictor and rename-free groups.
module tb_cgooo_core;
  import cgooo_pkg::*;
  import cgooo_asm_pkg::*;

  localparam int FW  = 4;
  localparam int LAT = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  word_t prog [512];
  word_t imem_addr;
  word_t imem_data [FW];
  logic  dmem_req, dmem_resp, dmem_wr;
  word_t dmem_addr, dmem_rdata, dmem_waddr, dmem_wdata;
  logic [6:0] dmem_tag, dmem_resp_tag;
  logic [4:0] dbg_areg;
  word_t dbg_value;
  logic ev_commit, ev_ctrl_squash, ev_mem_squash, ev_bw_stall, ev_local_only, ev_no_lookup, ev_recovered, idle;
  logic [3:0] ev_issued, ev_skip_issued;

  cgooo_core dut (
    .clk, .rst_n, .reset_pc(64'h100), .imem_addr, .imem_data,
    .dmem_req, .dmem_addr, .dmem_tag, .dmem_resp, .dmem_resp_tag, .dmem_rdata,
    .dmem_wr, .dmem_waddr, .dmem_wdata, .dbg_areg, .dbg_value,
    .ev_commit, .ev_ctrl_squash, .ev_mem_squash, .ev_issued, .ev_skip_issued,
    .ev_bw_stall, .ev_local_only, .ev_no_lookup, .ev_recovered, .idle);

  // instruction memory: combinational
  always_comb
    for (int k = 0; k < FW; k++) imem_data[k] = prog[((imem_addr >> 3) + k) % 512];

  // data memory: reads answered LAT cycles later, writes at once
  word_t dmem [word_t];
  logic  pend_v [LAT];
  word_t pend_a [LAT];
  logic [6:0] pend_t [LAT];
  always_ff @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pend_v[i] <= pend_v[i-1]; pend_a[i] <= pend_a[i-1]; pend_t[i] <= pend_t[i-1];
    end
    pend_v[0] <= dmem_req && rst_n; pend_a[0] <= dmem_addr; pend_t[0] <= dmem_tag;
    if (dmem_wr) dmem[dmem_waddr] = dmem_wdata;
  end
  assign dmem_resp     = pend_v[LAT-1];
  assign dmem_resp_tag = pend_t[LAT-1];
  assign dmem_rdata    = dmem.exists(pend_a[LAT-1]) ? dmem[pend_a[LAT-1]] : '0;

  int checks = 0, failures = 0;
  int n_commit = 0, n_ctrl = 0, n_mem = 0, n_skip = 0, n_blp = 0, n_bwstall = 0;
  int n_local = 0, n_nolookup = 0, n_recov = 0, n_issued = 0, cycles = 0;

  always_ff @(posedge clk) if (rst_n) begin
    cycles++;
    n_commit   += int'(ev_commit);
    n_ctrl     += int'(ev_ctrl_squash);
    n_mem      += int'(ev_mem_squash);
    n_skip     += int'(ev_skip_issued);
    n_issued   += int'(ev_issued);
    n_blp      += int'(ev_issued >= 2);
    n_bwstall  += int'(ev_bw_stall);
    n_local    += int'(ev_local_only);
    n_nolookup += int'(ev_no_lookup);
    n_recov    += int'(ev_recovered);
  end

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic count(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  task automatic areg(int a, output word_t v);
    dbg_areg = 5'(a);
    #1 v = dbg_value;
  endtask

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint BASE = 64'h1000;
  initial begin
    word_t v;
    int pc;
    for (int i = 0; i < 512; i++) prog[i] = '0;
    for (int i = 0; i < 16; i++) dmem[BASE + 8*i] = 64'(10 + i);
    // block A @0x100: HasCtrl = 0, g0 = -1, g1 = 15, g2 = BASE
    pc = 'h100 >> 3;
    prog[pc++] = a_head(0, 3, 'h20);
    prog[pc++] = a_i(OP_ADDI, 1, 0, 1, 0, -1);
    prog[pc++] = a_i(OP_ADDI, 1, 1, 1, 1, 15);
    prog[pc++] = a_i(OP_ADDI, 1, 2, 1, 2, BASE);
    // block L @0x120: the loop
    prog[pc++] = a_head(1, 6, 'h38);
    prog[pc++] = a_i(OP_ADDI, 1, 0, 1, 0, 1);          // g0 += 1
    prog[pc++] = a_i(OP_SLLI, 0, 0, 1, 0, 3);          // r0 = g0 << 3
    prog[pc++] = a_r(OP_ADD,  0, 0, 0, 0, 1, 2);       // r0 += g2
    prog[pc++] = a_i(OP_LD,   0, 1, 0, 0, 0);          // r1 = mem[r0]
    prog[pc++] = a_i(OP_ADDI, 1, 3, 1, 3, 1);          // g3 += 1 (independent)
    prog[pc++] = a_s(OP_BNE,  1, 1, 0, 1, 'h120 - 'h150); // bne g1, r1, L
    // block M @0x158: store whose address waits on a load, then a younger load
    prog[pc++] = a_head(0, 5, 'h30);
    prog[pc++] = a_i(OP_LD,   0, 0, 1, 2, 8);          // r0 = mem[BASE+8] (slow)
    prog[pc++] = a_r(OP_SUB,  0, 1, 0, 0, 0, 0);       // r1 = 0 (after the load)
    prog[pc++] = a_r(OP_ADD,  0, 1, 0, 1, 1, 2);       // r1 = BASE
    prog[pc++] = a_s(OP_ST,   0, 1, 1, 1, 'h200);      // mem[BASE+0x200] = g1
    prog[pc++] = a_i(OP_LD,   1, 4, 1, 2, 'h200);      // g4 = mem[BASE+0x200]
    // block N @0x188: g5 = g4 + g0, then loop forever on block E
    prog[pc++] = a_head(0, 1, 'h10);
    prog[pc++] = a_r(OP_ADD,  1, 5, 1, 4, 1, 0);
    // block E @0x198
    prog[pc++] = a_head(1, 1, 'h10);
    prog[pc++] = a_s(OP_JMP,  0, 0, 0, 0, -8);

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);

    areg(0, v); check("g0 index", v, 5);
    areg(1, v); check("g1 key", v, 15);
    areg(2, v); check("g2 base", v, BASE);
    areg(3, v); check("g3 iterations", v, 6);
    areg(4, v); check("g4 load after store", v, 15);
    areg(5, v); check("g5", v, 20);
    check("stored word", dmem.exists(BASE + 'h200) ? dmem[BASE + 'h200] : '0, 15);

    $display("cycles=%0d issued=%0d", cycles, n_issued);
    count("blocks committed", n_commit);
    count("control squashes", n_ctrl);
    count("memory squashes", n_mem);
    count("recoveries", n_recov);
    count("Skipahead issues", n_skip);
    count("cycles >1 BW issued", n_blp);
    count("stalls for a free BW", n_bwstall);
    count("groups with no global op", n_local);
    count("heads without lookup", n_nolookup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
