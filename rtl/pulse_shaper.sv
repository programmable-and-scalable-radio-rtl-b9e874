// pulse_shaper: amplitude shaping through the variable-gain amplifier's control DAC.
//
// Square pulse edges spread power into neighbouring transitions; ramping the rf power
// smoothly avoids that. Each channel has a VGA whose gain is set by a 14-bit DAC, and
// this block produces that DAC code. A table of SHAPE_LEN 14-bit samples, written by
// the host, holds one normalised ramp from 0 (sample value 0) to full (16383), already
// pre-distorted for the logarithmic VGA response. When an edge fires with `shaped` set
// the output moves from its present level L0 to the new level L1 as
//     dac = L0 + ((L1 - L0) * shape[k]) >>> 14,   k = 0 .. SHAPE_LEN-1,
// each sample held for SAMPLE_HOLD clocks, and then takes L1 exactly. The same table
// serves rising and falling edges. Without `shaped` the output steps to L1.
//
// Timing: the first sample (or the step) appears one clock after `start`. A shaped edge
// lasts SHAPE_LEN * SAMPLE_HOLD clocks; `ramping` is high meanwhile. A new start during
// a ramp restarts from the present output.
//
// The paper gives the VGA, its 14-bit DAC run at 62.5 MHz (SAMPLE_HOLD = 2 at 125 MHz)
// and the need for pre-compensation. The interpolation between levels and the single
// shared table are this design's.
module pulse_shaper
  import rf_pkg::*;
#(
  parameter int unsigned SHAPE_LEN   = 128,
  parameter int unsigned SAMPLE_HOLD = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  bus_wr_t          wr,        // en already qualified for this channel
  input  logic             start,
  input  logic             shaped,
  input  logic [VGA_W-1:0] level,
  output logic [VGA_W-1:0] dac,
  output logic             ramping
);

  localparam int unsigned KW = $clog2(SHAPE_LEN);

  logic [VGA_W-1:0] shape [SHAPE_LEN];

  always_ff @(posedge clk) begin
    if (wr.en && wr.sel == SEL_SHAPE) shape[KW'(wr.addr)] <= wr.data[VGA_W-1:0];
  end

  logic [VGA_W-1:0]   base, target;
  logic signed [VGA_W:0] diff;
  logic [KW-1:0]      k;
  logic [7:0]         hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac     <= '0;
      base    <= '0;
      target  <= '0;
      diff    <= '0;
      k       <= '0;
      hold    <= '0;
      ramping <= 1'b0;
    end else if (start && shaped) begin
      base    <= dac;
      target  <= level;
      diff    <= $signed({1'b0, level}) - $signed({1'b0, dac});
      k       <= '0;
      hold    <= '0;
      ramping <= 1'b1;
      // present sample 0 on the next clock: computed from the new base/diff below
      dac     <= VGA_W'($signed({1'b0, dac}) +
                 ((($signed({1'b0, level}) - $signed({1'b0, dac})) * $signed({1'b0, shape[0]})) >>> VGA_W));
    end else if (start) begin
      dac     <= level;
      target  <= level;
      ramping <= 1'b0;
    end else if (ramping) begin
      if (hold == 8'(SAMPLE_HOLD - 1)) begin
        hold <= '0;
        if (k == KW'(SHAPE_LEN - 1)) begin
          dac     <= target;
          ramping <= 1'b0;
        end else begin
          k   <= k + 1'b1;
          dac <= VGA_W'($signed({1'b0, base}) +
                 ((diff * $signed({1'b0, shape[k + 1'b1]})) >>> VGA_W));
        end
      end else begin
        hold <= hold + 1'b1;
      end
    end
  end

endmodule
