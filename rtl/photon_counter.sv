// photon_counter: photon counting and threshold detection for state readout.
//
// The qubit state is read by counting photons from the ion. Up to NUM_PMT TTL pulse
// trains from photon counters enter the FPGA; each is synchronised by two flip-flops and
// its rising edges are counted while the detection gate is high (counts saturate at
// 2^CNT_W-1). When the gate falls, the counts are latched into `counts`, each input's
// decision `outcome[i] = counts[i] > threshold` is made, and `done` pulses for one
// clock for the processor that acts on the result. A rising gate clears the counters.
//
// Timing: an input edge is counted if it reaches the synchronised stage while the gate
// is high (2-3 clocks input delay); results are valid in the clock `done` is high and
// stay until the next window closes.
//
// Eight inputs and the threshold decision are the paper's; the gate, widths and the
// saturation are this design's.
module photon_counter #(
  parameter int unsigned NUM_PMT = 8,
  parameter int unsigned CNT_W   = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NUM_PMT-1:0]             pmt,
  input  logic                           gate,
  input  logic [CNT_W-1:0]               threshold,
  output logic [NUM_PMT-1:0][CNT_W-1:0]  counts,
  output logic [NUM_PMT-1:0]             outcome,
  output logic                           done
);

  logic [NUM_PMT-1:0] s1, s2, s3;
  logic [NUM_PMT-1:0][CNT_W-1:0] acc;
  logic gate_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1      <= '0;
      s2      <= '0;
      s3      <= '0;
      acc     <= '0;
      gate_q  <= 1'b0;
      counts  <= '0;
      outcome <= '0;
      done    <= 1'b0;
    end else begin
      s1     <= pmt;
      s2     <= s1;
      s3     <= s2;
      gate_q <= gate;
      done   <= 1'b0;
      if (gate && !gate_q) begin
        acc <= '0;
      end else if (gate) begin
        for (int i = 0; i < NUM_PMT; i++)
          if (s2[i] && !s3[i] && acc[i] != '1) acc[i] <= acc[i] + 1'b1;
      end else if (gate_q) begin
        counts <= acc;
        for (int i = 0; i < NUM_PMT; i++) outcome[i] <= (acc[i] > threshold);
        done   <= 1'b1;
      end
    end
  end

endmodule
