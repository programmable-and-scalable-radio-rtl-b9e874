// tb_pulse_shaper: loads a raised-cosine-like table (computed here as a quarter-wave
// integer series), then checks a shaped rising edge, a shaped falling edge and an
// unshaped step sample by sample against L0 + ((L1-L0)*shape[k]) >>> 14, with each
// sample held SAMPLE_HOLD clocks and the final level reached after SHAPE_LEN*SAMPLE_HOLD.
module tb_pulse_shaper;
  import rf_pkg::*;
  localparam int LEN = 16, HOLD = 2;
  logic clk = 0, rst_n = 0;
  bus_wr_t wr = '0;
  logic start = 0, shaped = 0;
  logic [13:0] level = '0;
  logic [13:0] dac;
  logic ramping;
  int checks = 0, failures = 0;
  logic [13:0] tbl [LEN];

  pulse_shaper #(.SHAPE_LEN(LEN), .SAMPLE_HOLD(HOLD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic edge_test(input logic [13:0] l1, input bit shp);
    logic [13:0] l0 = dac;
    @(negedge clk);
    start = 1; shaped = shp; level = l1;
    @(negedge clk);
    start = 0; level = '0;
    if (shp) begin
      for (int k = 0; k < LEN; k++)
        for (int h = 0; h < HOLD; h++) begin
          int exp = int'(l0) + (((int'(l1) - int'(l0)) * int'(tbl[k])) >>> 14);
          check(dac == 14'(exp), $sformatf("k=%0d h=%0d got %0d exp %0d", k, h, dac, exp));
          check(ramping, "ramping during ramp");
          @(negedge clk);
        end
    end
    check(dac == l1, $sformatf("final %0d exp %0d", dac, l1));
    check(!ramping, "ramp over");
  endtask

  initial begin
    // quadratic ease-in/ease-out table from 0 to 16383
    for (int k = 0; k < LEN; k++) begin
      int x = (k * 1000) / (LEN - 1);
      int y = (x < 500) ? 2 * x * x : 1000000 - 2 * (1000 - x) * (1000 - x);
      tbl[k] = 14'((y * 16383) / 1000000);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < LEN; k++) begin
      @(negedge clk); wr.en = 1; wr.sel = SEL_SHAPE; wr.addr = 7'(k); wr.data = 32'(tbl[k]);
    end
    @(negedge clk); wr.en = 1; wr.sel = SEL_EVT; wr.addr = 7'd0; wr.data = 32'h0; // not a shape write
    @(negedge clk); wr.en = 0;
    check(dac == 0, "reset level");
    edge_test(14'd12000, 1);
    edge_test(14'd3000, 1);
    edge_test(14'd9000, 0);
    edge_test(14'd0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
