// dds_spi_writer: loads frequency and amplitude into an AD9910 over SPI.
//
// One transfer writes the single-tone profile-0 register: an instruction byte (write,
// address 0x0E) followed by 64 data bits {2'b00, asf[13:0], pow = 0, ftw[31:0]}, MSB
// first. SCLK runs at clk / (2*SCLK_HALF); data changes on the falling edge and is stable on
// the rising edge (SPI mode 0), CSN is low for the whole 72 bits. With SCLK_HALF = 1 (62.5 MHz SCLK) and
// a 125 MHz clock a transfer takes 144 clocks plus one for CSN, 1.16 us, within the
// 1.4 us the paper quotes for SPI updates. The new values act only when the sequencer
// later pulses IO_UPDATE, so the transfer can run during the previous pulse.
//
// Interface: start is accepted when busy is low; busy stays high until CSN rises.
//
// The paper's: SPI for frequency and amplitude, the 1.4 us budget. From the AD9910
// datasheet, not the paper: register address and profile layout. The phase field is
// written as zero because phase goes over the parallel bus.
module dds_spi_writer
  import rf_pkg::*;
#(
  parameter int unsigned SCLK_HALF = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [FTW_W-1:0] ftw,
  input  logic [ASF_W-1:0] asf,
  output logic             busy,
  output logic             sclk,
  output logic             csn,
  output logic             sdio
);

  localparam int unsigned NBITS = 72;

  logic [NBITS-1:0]           shreg;
  logic [$clog2(NBITS+1)-1:0] bits_left;
  logic [7:0]                 div;
  logic                       active;

  assign busy = active;
  assign sdio = shreg[NBITS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      bits_left <= '0;
      div       <= '0;
      active    <= 1'b0;
      sclk      <= 1'b0;
      csn       <= 1'b1;
    end else if (!active) begin
      sclk <= 1'b0;
      if (start) begin
        shreg     <= {1'b0, 2'b00, REG_PROFILE0, 2'b00, asf, 16'h0000, ftw};
        bits_left <= 7'(NBITS);
        div       <= '0;
        active    <= 1'b1;
        csn       <= 1'b0;
      end
    end else if (bits_left == 0) begin
      // one clock with CSN high ends the transfer
      csn    <= 1'b1;
      active <= 1'b0;
      sclk   <= 1'b0;
    end else begin
      if (div == 8'(SCLK_HALF - 1)) begin
        div <= '0;
        if (sclk) begin
          // falling edge: next bit
          sclk      <= 1'b0;
          shreg     <= {shreg[NBITS-2:0], 1'b0};
          bits_left <= bits_left - 1'b1;
        end else begin
          sclk <= 1'b1;
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !active |=> busy)
    else $error("dds_spi_writer: start not accepted");

endmodule
