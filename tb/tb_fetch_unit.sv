// tb_fetch_unit: self-checking test of block-wise fetch (4 instructions per
// cycle). Instruction memory holds code blocks of random size; addresses
// with no block read as an empty block (a head with BlkSize 0). The Block
// PC Buffer is modelled as a queue of next-block PCs, with 0 meaning "fall
// through". Random back-pressure, halts and redirects are applied. Every
// group the unit hands on is compared with a model: a block is fetched as
// groups of at most 4 starting at its head (BlkSize + 1 instructions in
// all), never mixing two blocks, and the next block comes from the buffer
// (fall-through when it reads 0) or from a redirect.
module tb_fetch_unit;
  import cgooo_pkg::*;
  import cgooo_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic halt, redirect, pcbuf_pop, pcbuf_empty, out_valid, out_ready, out_block_start;
  word_t redirect_pc, imem_addr, pcbuf_pc, out_pc;
  word_t imem_data [4], out_instr [4];
  logic [2:0] out_cnt;
  int checks = 0, failures = 0;
  word_t mem [word_t];
  word_t pq [$];
  word_t starts [$];
  word_t exp_pc; int exp_left; bit exp_start;

  fetch_unit dut (.clk, .rst_n, .reset_pc(64'h1000), .halt, .redirect, .redirect_pc, .imem_addr, .imem_data,
                  .pcbuf_pop, .pcbuf_pc, .pcbuf_empty, .out_valid, .out_ready, .out_pc, .out_instr,
                  .out_cnt, .out_block_start);

  function automatic word_t rd(word_t a);
    return mem.exists(a) ? mem[a] : a_head(0, 0, 8);
  endfunction
  always_comb for (int k = 0; k < 4; k++) imem_data[k] = rd(imem_addr + 64'(k * 8));
  assign pcbuf_empty = (pq.size() == 0);
  assign pcbuf_pc    = pq.size() != 0 ? pq[0] : '0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #2000000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int n_groups = 0;
  initial begin
    word_t a;
    halt = 0; redirect = 0; redirect_pc = 0; out_ready = 0;
    a = 64'h1000;
    for (int b = 0; b < 30; b++) begin
      int s; s = $urandom_range(0, 12);
      starts.push_back(a);
      mem[a] = a_head(1, s, (s + 1) * 8);
      for (int k = 1; k <= s; k++) mem[a + 64'(k * 8)] = a_i(OP_ADDI, 0, k % 20, 0, 0, k);
      a += 64'((s + 1) * 8);
    end
    exp_pc = 64'h1000; exp_start = 1; exp_left = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      bit popped, acc;
      @(negedge clk);
      while (pq.size() < 3 && $urandom_range(0, 1)) pq.push_back($urandom_range(0, 2) == 0 ? 64'd0 : starts[$urandom_range(0, 29)]);
      out_ready = $urandom_range(0, 3) != 0;
      halt = $urandom_range(0, 9) == 0;
      redirect = $urandom_range(0, 99) == 0;
      redirect_pc = starts[$urandom_range(0, 29)];
      #1;
      acc = out_valid && out_ready && !redirect;
      if (acc) begin
        int n;
        if (exp_start) exp_left = int'(rd(exp_pc)[56:52]) + 1;
        n = exp_left > 4 ? 4 : exp_left;
        chk(out_pc == exp_pc, "group PC");
        chk(int'(out_cnt) == n, "group size");
        chk(out_block_start == exp_start, "block start flag");
        for (int k = 0; k < 4; k++) chk(out_instr[k] == rd(exp_pc + 64'(k * 8)), "group contents");
        exp_left -= n;
        exp_pc += 64'(n * 8);
        exp_start = (exp_left == 0);
        n_groups++;
      end
      popped = pcbuf_pop;
      if (popped) begin
        // the popped entry says where the next block starts (0: fall through)
        chk(exp_start, "buffer popped only between blocks");
        if (pq[0] != '0) exp_pc = pq[0];
        chk(imem_addr == exp_pc, "next block address");
      end
      @(posedge clk); #1;
      if (redirect) begin exp_pc = redirect_pc; exp_start = 1; exp_left = 0; pq.delete(); end
      else if (popped) void'(pq.pop_front());
      redirect = 0;
    end
    chk(n_groups > 1000, "groups fetched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
