// tb_grf: self-checking test of the segmented Global Register File (256
// registers in 9 segments, 18 read / 13 write / 4 ready-clear ports) and its
// ready bits. Random writes across all segments are read back through
// random ports; ready bits are checked against a model after clears, writes
// and set_all. Reads are combinational, updates at the clock edge.
module tb_grf;
  import cgooo_pkg::*;
  localparam int NR = 18, NW = 13, NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] raddr [NR];
  word_t rdata [NR];
  logic we [NW];
  logic [7:0] waddr [NW];
  word_t wdata [NW];
  logic clr_en [NC];
  logic [7:0] clr_addr [NC];
  logic set_all;
  logic [255:0] ready, mr;
  word_t m [256];
  int checks = 0, failures = 0;

  grf dut (.clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata, .clr_en, .clr_addr, .set_all, .ready);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #500000; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    set_all = 0;
    for (int p = 0; p < NR; p++) raddr[p] = 0;
    for (int p = 0; p < NW; p++) begin we[p] = 0; waddr[p] = 0; wdata[p] = 0; end
    for (int p = 0; p < NC; p++) begin clr_en[p] = 0; clr_addr[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) m[i] = '0;
    mr = '1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      chk(ready == mr, "ready bits");
      for (int p = 0; p < NR; p++) raddr[p] = 8'($urandom_range(0, 255));
      #1;
      for (int p = 0; p < NR; p++) chk(rdata[p] == m[raddr[p]], "read data");
      for (int p = 0; p < NW; p++) begin
        we[p] = $urandom_range(0, 1); waddr[p] = 8'($urandom_range(0, 255)); wdata[p] = {$urandom, $urandom};
        for (int q = 0; q < p; q++) if (we[q] && waddr[q] == waddr[p]) we[p] = 0;
      end
      for (int p = 0; p < NC; p++) begin clr_en[p] = $urandom_range(0, 1); clr_addr[p] = 8'($urandom_range(0, 255)); end
      set_all = ($urandom_range(0, 99) == 0);
      @(posedge clk); #1;
      for (int p = 0; p < NW; p++) if (we[p]) m[waddr[p]] = wdata[p];
      if (set_all) mr = '1;
      else begin
        for (int p = 0; p < NC; p++) if (clr_en[p]) mr[clr_addr[p]] = 0;
        for (int p = 0; p < NW; p++) if (we[p]) mr[waddr[p]] = 1;
      end
      set_all = 0;
      for (int p = 0; p < NW; p++) we[p] = 0;
      for (int p = 0; p < NC; p++) clr_en[p] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
