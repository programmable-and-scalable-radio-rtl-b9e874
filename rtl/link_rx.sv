// link_rx: channel-card side of the backplane command link.
//
// Bits are shifted in MSB first on every clock the frame line is high. When 48 bits have
// arrived the word is checked against the card's geographical slot address (or the
// broadcast code 4'hF) and, if it matches, decoded into a one-clock write strobe on the
// card's internal bus. The write appears on the clock after the last bit was sampled,
// so a word reaches channel memory 8 ns after its last bit at 125 MHz, inside the
// "below 20 ns" the paper states.
//
// A frame that drops before 48 bits is discarded. Words for other slots are dropped.
//
// The 48-bit word and the latency target are the paper's; framing and field layout
// are this design's (see rf_pkg).
module link_rx
  import rf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] slot_id,
  input  link_t      lane,
  output bus_wr_t    wr
);

  logic [CMD_W-1:0] shreg;
  logic [5:0]       count;
  logic [CMD_W-1:0] next_word;
  cmd_word_t        cw;

  assign next_word = {shreg[CMD_W-2:0], lane.data};
  assign cw        = cmd_word_t'(next_word);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      count <= '0;
      wr    <= '0;
    end else begin
      wr.en <= 1'b0;
      if (lane.frame) begin
        shreg <= next_word;
        if (count == 6'(CMD_W - 1)) begin
          count <= '0;
          if (cw.slot == slot_id || cw.slot == SLOT_BCAST) begin
            wr.en     <= 1'b1;
            wr.all_ch <= cw.all_ch;
            wr.ch     <= cw.ch;
            wr.sel    <= cw.sel;
            wr.addr   <= cw.addr;
            wr.data   <= cw.data;
          end
        end else begin
          count <= count + 6'd1;
        end
      end else begin
        count <= '0;
      end
    end
  end

endmodule
