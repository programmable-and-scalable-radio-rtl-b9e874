// link_tx: master-card side of the backplane command link.
//
// A 48-bit address/instruction word is shifted out MSB first, one bit per clock, while
// the lane's frame line is high; one idle clock separates words. The card address in
// bits [47:44] picks the point-to-point lane the word is driven on: the addressed slot
// only, or every slot for the broadcast code 4'hF. Lanes not addressed stay idle.
//
// Interface: word/word_valid/word_ready is a valid/ready handshake; the word is taken
// in the cycle both are high. A word occupies the lanes for 48 clocks plus one idle
// clock, so at 125 MHz the link carries 125 Mb/s of raw bits.
//
// The 48-bit word, the point-to-point lanes and the unicast/broadcast addressing are
// the paper's. The unencoded frame-plus-data signalling, the bit order and the idle
// gap are this design's choices.
module link_tx
  import rf_pkg::*;
#(
  parameter int unsigned NUM_SLOTS = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 word_valid,
  output logic                 word_ready,
  input  logic [CMD_W-1:0]     word,
  output link_t [NUM_SLOTS-1:0] lanes
);

  logic [CMD_W-1:0] shreg;
  logic [5:0]       bits_left;   // 0 = idle
  logic             gap;
  logic [3:0]       dest;

  assign word_ready = (bits_left == 0) && !gap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      bits_left <= '0;
      gap       <= 1'b0;
      dest      <= '0;
    end else if (word_valid && word_ready) begin
      shreg     <= word;
      bits_left <= 6'(CMD_W);
      dest      <= word[CMD_W-1 -: 4];
    end else if (bits_left != 0) begin
      shreg     <= {shreg[CMD_W-2:0], 1'b0};
      bits_left <= bits_left - 6'd1;
      gap       <= (bits_left == 6'd1);
    end else begin
      gap       <= 1'b0;
    end
  end

  always_comb begin
    for (int s = 0; s < NUM_SLOTS; s++) begin
      lanes[s].frame = (bits_left != 0) && ((dest == SLOT_BCAST) || (dest == 4'(s)));
      lanes[s].data  = lanes[s].frame && shreg[CMD_W-1];
    end
  end

endmodule
