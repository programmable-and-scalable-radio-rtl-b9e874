// tb_phase_tracker: drives random tuning words, offsets and times and compares the phase
// word one clock later with ftw * t * 8 computed in 64-bit arithmetic.
module tb_phase_tracker;
  import rf_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0;
  logic [31:0] ftw = '0;
  logic [15:0] pow_offset = '0;
  logic [31:0] t_next = '0;
  logic [15:0] pow_out;
  int checks = 0, failures = 0;

  phase_tracker #(.DDS_CLK_PER_CYCLE(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 500; i++) begin
      logic [15:0] exp;
      @(negedge clk);
      ftw = (i == 0) ? 32'h4000_0000 : $urandom;
      pow_offset = (i < 5) ? 16'h0 : 16'($urandom);
      t_next = (i == 0) ? 32'd1 : (i < 100) ? 32'(i) : $urandom;
      exp = exp_pow(ftw, longint'(t_next), pow_offset);
      @(negedge clk);
      checks++;
      if (pow_out !== exp) begin
        failures++;
        $display("FAIL ftw=%h t=%0d got %h exp %h", ftw, t_next, pow_out, exp);
      end
    end
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
