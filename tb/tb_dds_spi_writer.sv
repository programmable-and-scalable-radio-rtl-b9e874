// tb_dds_spi_writer: checks the SPI frame written to the AD9910. Captures SDIO on SCLK
// rising edges while CSN is low, compares the 72 bits with the instruction byte 0x0E and
// the profile layout {00, asf, 0000h, ftw}, and checks that a transfer ends within the
// 1.4 us (175 clocks at 125 MHz) the paper quotes for SPI updates.
module tb_dds_spi_writer;
  import rf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [31:0] ftw = '0;
  logic [13:0] asf = '0;
  logic busy, sclk, csn, sdio;
  int checks = 0, failures = 0;

  dds_spi_writer #(.SCLK_HALF(1)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic xfer(input logic [31:0] f, input logic [13:0] a);
    logic [71:0] got = '0;
    int n = 0, cyc = 0;
    logic sclk_q = 0;
    @(negedge clk);
    ftw = f; asf = a; start = 1;
    @(negedge clk);
    start = 0; ftw = ~f; asf = ~a;   // inputs may change after start
    while (busy && cyc < 1000) begin
      if (!csn && sclk && !sclk_q) begin got = {got[70:0], sdio}; n++; end
      sclk_q = sclk;
      cyc++;
      @(negedge clk);
    end
    check(n == 72, $sformatf("bit count %0d", n));
    check(got == {8'h0E, 2'b00, a, 16'h0000, f}, $sformatf("frame %h", got));
    check(cyc + 1 <= 175, $sformatf("transfer took %0d clocks", cyc + 1));
    check(csn, "csn high at end");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    xfer(32'h1234_5678, 14'h2ABC);
    for (int i = 0; i < 8; i++) xfer($urandom, 14'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
