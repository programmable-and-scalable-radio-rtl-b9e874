// mch_controller: FPGA logic of the master card that runs the shelf.
//
// The processor on the master card hands it 48-bit command words (valid/ready) and
// trigger requests. Words go out through link_tx on the point-to-point lane of the
// addressed card, or on all lanes for a broadcast. A trigger request produces a
// TRIG_W-clock high pulse on the shared trigger lane (TCLK_A), which every card turns
// into the start of its sequences in the same clock. A trigger request is held off
// while a word is still being sent, so a sequence is never started before the
// preceding command (typically "arm") has arrived. The photon counters also live here
// so that the processor can read detection results and rewrite the running sequences.
//
// Timing: trigger pulse starts one clock after the request is accepted; cpu_trig_ready
// is low while a word is in flight or a pulse is being sent.
//
// The paper gives the master's roles (global trigger, broadcast or per-card commands,
// outcome-based rewriting by the processor, photon-counter inputs); the interface to the
// processor, the trigger width and the hold-off are this design's.
module mch_controller
  import rf_pkg::*;
#(
  parameter int unsigned NUM_SLOTS = 8,
  parameter int unsigned TRIG_W    = 4,
  parameter int unsigned NUM_PMT   = 8,
  parameter int unsigned CNT_W     = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // processor side
  input  logic                          cpu_word_valid,
  output logic                          cpu_word_ready,
  input  logic [CMD_W-1:0]              cpu_word,
  input  logic                          cpu_trig,
  output logic                          cpu_trig_ready,
  input  logic                          cpu_gate,
  input  logic [CNT_W-1:0]              cpu_threshold,
  output logic [NUM_PMT-1:0][CNT_W-1:0] cpu_counts,
  output logic [NUM_PMT-1:0]            cpu_outcome,
  output logic                          cpu_det_done,
  // backplane and front panel
  output link_t [NUM_SLOTS-1:0]         lanes,
  output logic                          tclk_a,
  input  logic [NUM_PMT-1:0]            pmt
);

  logic tx_ready;

  link_tx #(.NUM_SLOTS(NUM_SLOTS)) u_tx (
    .clk, .rst_n, .word_valid(cpu_word_valid), .word_ready(tx_ready), .word(cpu_word), .lanes
  );
  assign cpu_word_ready = tx_ready;

  logic [7:0] trig_cnt;
  assign cpu_trig_ready = tx_ready && (trig_cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_cnt <= '0;
      tclk_a   <= 1'b0;
    end else if (cpu_trig && cpu_trig_ready && !cpu_word_valid) begin
      trig_cnt <= 8'(TRIG_W);
      tclk_a   <= 1'b1;
    end else if (trig_cnt != 0) begin
      trig_cnt <= trig_cnt - 1'b1;
      tclk_a   <= (trig_cnt != 8'd1);
    end
  end

  photon_counter #(.NUM_PMT(NUM_PMT), .CNT_W(CNT_W)) u_pc (
    .clk, .rst_n, .pmt, .gate(cpu_gate), .threshold(cpu_threshold),
    .counts(cpu_counts), .outcome(cpu_outcome), .done(cpu_det_done)
  );

endmodule
