// phase_tracker: phase word that keeps every edge phase-coherent.
//
// For each edge the DDS phase is set to (frequency x time since the sequence started),
// so a tone comes back with the phase it would have had if it had run without a break,
// whatever other frequencies were played in between. With a 32-bit tuning word the
// phase advances by ftw per DDS clock, modulo 2^32; one sequencer clock is
// DDS_CLK_PER_CYCLE DDS clocks (8 for a 1 GHz DDS clock and 8 ns steps). So
//     phase32 = ftw * t * DDS_CLK_PER_CYCLE  (mod 2^32)
//     pow_out = phase32[31:16] + pow_offset  (mod 2^16)
// The register is loaded each clock from t_next, the time of the following clock, so
// pow_out always belongs to the current clock's time t and is ready the moment an edge
// fires. ftw and pow_offset must be stable one clock before they are used.
//
// The formula is the paper's. The truncation to the top 16 bits, the user phase offset
// and the assumption that the DDS phase accumulator is cleared at each IO_UPDATE (so the
// offset written is the absolute phase) are this design's.
module phase_tracker
  import rf_pkg::*;
#(
  parameter int unsigned DDS_CLK_PER_CYCLE = 8
) (
  input  logic              clk,
  input  logic [FTW_W-1:0]  ftw,
  input  logic [POW_W-1:0]  pow_offset,
  input  logic [TIME_W-1:0] t_next,
  output logic [POW_W-1:0]  pow_out
);

  logic [31:0] dds_clocks;
  logic [31:0] phase32;

  assign dds_clocks = 32'(t_next * DDS_CLK_PER_CYCLE);
  assign phase32    = 32'(ftw * dds_clocks);

  always_ff @(posedge clk) begin
    pow_out <= phase32[31:16] + pow_offset;
  end

endmodule
