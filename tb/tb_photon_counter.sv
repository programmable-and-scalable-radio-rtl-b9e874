// tb_photon_counter: sends a known number of pulses on each of the eight inputs inside
// a detection gate, plus pulses outside it that must not count, and checks the latched
// counts, the per-input threshold decisions and the one-clock done pulse.
module tb_photon_counter;
  logic clk = 0, rst_n = 0;
  logic [7:0] pmt = '0;
  logic gate = 0;
  logic [15:0] threshold = 16'd5;
  logic [7:0][15:0] counts;
  logic [7:0] outcome;
  logic done;
  int checks = 0, failures = 0;
  int ndone = 0;

  photon_counter #(.NUM_PMT(8), .CNT_W(16)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && done) ndone++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic window(input int n [8]);
    int mx = 0;
    int d0;
    foreach (n[i]) if (n[i] > mx) mx = n[i];
    // pulses before the gate: ignored
    for (int p = 0; p < 3; p++) begin
      @(negedge clk); pmt = 8'hFF; @(negedge clk); pmt = '0;
    end
    repeat (4) @(negedge clk);
    gate = 1;
    repeat (3) @(negedge clk);
    for (int p = 0; p < mx; p++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) pmt[i] = (p < n[i]);
      repeat (1 + p % 3) @(negedge clk);
      pmt = '0;
      repeat (1 + p % 2) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    d0 = ndone;
    gate = 0;
    repeat (4) @(negedge clk);
    check(ndone == d0 + 1, "one done pulse");
    for (int i = 0; i < 8; i++) begin
      check(counts[i] == 16'(n[i]), $sformatf("input %0d count %0d exp %0d", i, counts[i], n[i]));
      check(outcome[i] == (n[i] > 5), $sformatf("input %0d outcome", i));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    window('{0, 1, 5, 6, 12, 3, 20, 9});
    window('{7, 0, 0, 2, 5, 6, 1, 30});
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
