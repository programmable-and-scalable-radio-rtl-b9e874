// tb_mch_controller: checks the master card logic. Words handed over by the processor
// port must appear on the addressed lane (or all lanes), a trigger request must give one
// TRIG_W-clock pulse on the trigger lane, a trigger request is not accepted while a word
// is in flight, and the photon counters report through the processor port.
module tb_mch_controller;
  import rf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_word_valid = 0, cpu_word_ready;
  logic [47:0] cpu_word = '0;
  logic cpu_trig = 0, cpu_trig_ready;
  logic cpu_gate = 0;
  logic [15:0] cpu_threshold = 16'd2;
  logic [7:0][15:0] cpu_counts;
  logic [7:0] cpu_outcome;
  logic cpu_det_done;
  link_t [7:0] lanes;
  logic tclk_a;
  logic [7:0] pmt = '0;
  int checks = 0, failures = 0;

  mch_controller #(.NUM_SLOTS(8), .TRIG_W(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [47:0] rx [8];
  int rxn [8];
  always @(posedge clk)
    for (int s = 0; s < 8; s++) if (lanes[s].frame) begin rx[s] <= {rx[s][46:0], lanes[s].data}; rxn[s] <= rxn[s] + 1; end

  task automatic send(input logic [47:0] w);
    @(negedge clk);
    cpu_word = w; cpu_word_valid = 1;
    while (!cpu_word_ready) @(negedge clk);
    @(negedge clk);
    cpu_word_valid = 0;
  endtask

  initial begin
    for (int s = 0; s < 8; s++) begin rx[s] = '0; rxn[s] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    send({4'd6, 44'h0AB_1234_5678});
    // trigger requested while the word is in flight: held off
    cpu_trig = 1;
    @(negedge clk);
    check(!cpu_trig_ready && !tclk_a, "trigger held off during word");
    while (!cpu_trig_ready) @(negedge clk);
    check(rxn[6] == 48 && rx[6] == {4'd6, 44'h0AB_1234_5678}, "word on lane 6");
    check(rxn[0] == 0 && rxn[5] == 0 && rxn[7] == 0, "other lanes idle");
    @(negedge clk);
    cpu_trig = 0;
    begin
      int hi = 0;
      for (int c = 0; c < 12; c++) begin if (tclk_a) hi++; @(negedge clk); end
      check(hi == 4, $sformatf("trigger pulse width %0d", hi));
    end
    send({4'hF, 44'h055_0000_0001});
    repeat (55) @(negedge clk);
    for (int s = 0; s < 8; s++) check(rx[s] == {4'hF, 44'h055_0000_0001}, $sformatf("broadcast lane %0d", s));
    // photon counting through the processor port
    cpu_gate = 1;
    repeat (3) @(negedge clk);
    for (int p = 0; p < 4; p++) begin
      pmt = 8'b0000_0101; repeat (2) @(negedge clk); pmt = 8'b0000_0000; repeat (2) @(negedge clk);
    end
    pmt = '0;
    repeat (4) @(negedge clk);
    cpu_gate = 0;
    while (!cpu_det_done) @(negedge clk);
    check(cpu_counts[0] == 4 && cpu_counts[2] == 4 && cpu_counts[1] == 0, "counts");
    check(cpu_outcome == 8'b0000_0101, "outcome");
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
