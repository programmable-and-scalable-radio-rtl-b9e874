// rf_system: digital logic of a complete pulse-sequencer shelf.
//
// One master card (mch_controller) and NUM_CARDS four-channel rf cards (channel_card),
// joined as on the backplane: a point-to-point command lane from the master to each
// card slot, and one shared trigger lane. Card k sits in slot k and answers to
// geographical address k. With the default eight cards the shelf drives 32 rf channels,
// each with its own pulse sequence, all started by the same trigger and counting the
// same clock.
//
// Ports: the processor side of the master (command words, trigger requests, detection
// gate, threshold and results), the photon-counter inputs, and for every channel the
// AD9910 pins, the VGA DAC code, a TTL output and its status. Channel c of card k is
// index k*4+c.
//
// The paper's: 4 channels per card, up to 8 cards, master with global trigger and
// per-card or broadcast commands. Clock distribution, DDS chips, DACs and the processor
// are outside this logic.
module rf_system
  import rf_pkg::*;
#(
  parameter int unsigned NUM_CARDS   = 8,
  parameter int unsigned EVT_DEPTH   = 32,
  parameter int unsigned SEQ_DEPTH   = 128,
  parameter int unsigned SHAPE_LEN   = 128,
  parameter int unsigned SAMPLE_HOLD = 2,
  parameter int unsigned SCLK_HALF   = 1,
  parameter int unsigned NUM_PMT     = 8,
  parameter int unsigned CNT_W       = 16,
  localparam int unsigned NUM_CH     = 4,
  localparam int unsigned NCHAN      = NUM_CARDS * NUM_CH
) (
  input  logic                          clk,
  input  logic                          rst_n,
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
  input  logic [NUM_PMT-1:0]            pmt,
  output dds_pins_t  [NCHAN-1:0]        dds,
  output logic       [NCHAN-1:0][VGA_W-1:0] vga_dac,
  output logic       [NCHAN-1:0]        ttl,
  output ch_status_t [NCHAN-1:0]        status
);

  link_t [NUM_CARDS-1:0] lanes;
  logic                  tclk_a;

  mch_controller #(.NUM_SLOTS(NUM_CARDS), .NUM_PMT(NUM_PMT), .CNT_W(CNT_W)) u_mch (
    .clk, .rst_n,
    .cpu_word_valid, .cpu_word_ready, .cpu_word, .cpu_trig, .cpu_trig_ready,
    .cpu_gate, .cpu_threshold, .cpu_counts, .cpu_outcome, .cpu_det_done,
    .lanes, .tclk_a, .pmt
  );

  for (genvar k = 0; k < NUM_CARDS; k++) begin : g_card
    channel_card #(
      .NUM_CH(NUM_CH), .EVT_DEPTH(EVT_DEPTH), .SEQ_DEPTH(SEQ_DEPTH), .SHAPE_LEN(SHAPE_LEN),
      .SAMPLE_HOLD(SAMPLE_HOLD), .SCLK_HALF(SCLK_HALF)
    ) u_card (
      .clk, .rst_n, .slot_id(4'(k)), .lane(lanes[k]), .tclk_a,
      .dds(dds[k*NUM_CH +: NUM_CH]), .vga_dac(vga_dac[k*NUM_CH +: NUM_CH]),
      .ttl(ttl[k*NUM_CH +: NUM_CH]), .status(status[k*NUM_CH +: NUM_CH])
    );
  end

endmodule
