// tb_lrf: self-checking test of the Local Register File (20 x 64 bits,
// 2 read / 2 write ports) and its valid/pending scoreboard bits. Random
// writes, pend marks and block-reset (inv_all) are checked against a model;
// reads are combinational, writes and bit updates at the clock edge.
module tb_lrf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inv_all, pend_en;
  logic [4:0] pend_addr;
  logic [4:0] rd_addr [2];
  logic [63:0] rd_data [2];
  logic wr_en [2];
  logic [4:0] wr_addr [2];
  logic [63:0] wr_data [2];
  logic [19:0] valid, pending;
  int checks = 0, failures = 0;
  logic [63:0] m [20];
  logic [19:0] mv, mp;

  lrf dut (.clk, .rst_n, .inv_all, .pend_en, .pend_addr, .rd_addr, .rd_data,
           .wr_en, .wr_addr, .wr_data, .valid, .pending);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #200000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    inv_all = 0; pend_en = 0; pend_addr = 0;
    for (int p = 0; p < 2; p++) begin rd_addr[p] = 0; wr_en[p] = 0; wr_addr[p] = 0; wr_data[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    mv = '0; mp = '0;
    for (int i = 0; i < 20; i++) m[i] = 'x;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(valid == mv, "valid bits");
      chk(pending == mp, "pending bits");
      for (int p = 0; p < 2; p++) begin
        rd_addr[p] = 5'($urandom_range(0, 19));
        #0;
      end
      #1;
      for (int p = 0; p < 2; p++) if (mv[rd_addr[p]]) chk(rd_data[p] == m[rd_addr[p]], "read data");
      inv_all = ($urandom_range(0, 49) == 0);
      pend_en = $urandom_range(0, 2) == 0; pend_addr = 5'($urandom_range(0, 19));
      wr_en[0] = $urandom_range(0, 1); wr_addr[0] = 5'($urandom_range(0, 19));
      wr_en[1] = $urandom_range(0, 1); wr_addr[1] = 5'($urandom_range(0, 19));
      if (wr_addr[1] == wr_addr[0]) wr_en[1] = 0;
      if (pend_en && ((wr_en[0] && wr_addr[0] == pend_addr) || (wr_en[1] && wr_addr[1] == pend_addr))) pend_en = 0;
      wr_data[0] = {$urandom, $urandom}; wr_data[1] = {$urandom, $urandom};
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) if (wr_en[p]) m[wr_addr[p]] = wr_data[p];
      if (inv_all) begin mv = '0; mp = '0; end
      else begin
        if (pend_en) begin mv[pend_addr] = 0; mp[pend_addr] = 1; end
        for (int p = 0; p < 2; p++) if (wr_en[p]) begin mv[wr_addr[p]] = 1; mp[wr_addr[p]] = 0; end
      end
      inv_all = 0; pend_en = 0; wr_en[0] = 0; wr_en[1] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
