// channel_card: the FPGA logic of one four-channel rf card.
//
// The card listens to its point-to-point command lane from the master card through a
// link_rx, which accepts words carrying this card's geographical slot address or the
// broadcast address, and passes each write to the four rf channels (each keeps the
// writes for its own channel number or for all channels). The master's trigger arrives
// on the shared TCLK_A lane; it is synchronised by two flip-flops and its rising edge
// becomes a one-clock start pulse given to all four channels in the same clock, which
// is what keeps the channels of a card, and the cards of a shelf, in step.
//
// Timing: a link write reaches channel memory one clock after the word's last bit; a
// trigger edge starts the sequence clock three clocks after it is sampled high.
//
// Four channels per card, the backplane command lane, geographical addressing and the
// backplane trigger are the paper's. Use of TCLK_A for the trigger follows the lane
// names printed in the card block diagram; the synchroniser is this design's.
module channel_card
  import rf_pkg::*;
#(
  parameter int unsigned NUM_CH      = 4,
  parameter int unsigned EVT_DEPTH   = 32,
  parameter int unsigned SEQ_DEPTH   = 128,
  parameter int unsigned SHAPE_LEN   = 128,
  parameter int unsigned SAMPLE_HOLD = 2,
  parameter int unsigned SCLK_HALF   = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [3:0]                    slot_id,
  input  link_t                         lane,
  input  logic                          tclk_a,
  output dds_pins_t  [NUM_CH-1:0]       dds,
  output logic       [NUM_CH-1:0][VGA_W-1:0] vga_dac,
  output logic       [NUM_CH-1:0]       ttl,
  output ch_status_t [NUM_CH-1:0]       status
);

  bus_wr_t wr;

  link_rx u_rx (.clk, .rst_n, .slot_id, .lane, .wr);

  logic [2:0] trig_sync;
  logic       trigger;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trig_sync <= '0;
    else        trig_sync <= {trig_sync[1:0], tclk_a};
  end
  assign trigger = trig_sync[1] && !trig_sync[2];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    rf_channel #(
      .CH_ID(c), .EVT_DEPTH(EVT_DEPTH), .SEQ_DEPTH(SEQ_DEPTH), .SHAPE_LEN(SHAPE_LEN),
      .SAMPLE_HOLD(SAMPLE_HOLD), .SCLK_HALF(SCLK_HALF)
    ) u_ch (
      .clk, .rst_n, .wr, .trigger,
      .dds(dds[c]), .vga_dac(vga_dac[c]), .ttl(ttl[c]), .status(status[c])
    );
  end

endmodule
