// ad9910_model: behavioural model of the digital interface of an AD9910 DDS, for
// testbenches only (kind: behavioural model, not synthesizable logic).
//
// Decodes SPI writes (mode 0, MSB first, 8-bit instruction then data) to the single-tone
// profile-0 register into buffer registers, copies the buffer to the active registers on
// IO_UPDATE, and takes a phase word from the parallel port when TxENABLE is high with
// destination bits F = 01. It counts transfers and updates and records the clock cycle
// of the last IO_UPDATE so a testbench can check timing and values.
module ad9910_model
  import rf_pkg::*;
(
  input  logic      clk,
  input  dds_pins_t pins,
  input  longint    cycle
);
  logic [31:0] buf_ftw = '0, act_ftw = '0;
  logic [13:0] buf_asf = '0, act_asf = '0;
  logic [15:0] act_pow = '0;
  int          spi_writes = 0, bad_spi = 0, updates = 0;
  longint      last_update = -1;
  logic [71:0] sh = '0;
  int          nbits = 0;
  logic        sclk_q = 1'b0, csn_q = 1'b1;

  always @(posedge clk) begin
    sclk_q <= pins.sclk;
    csn_q  <= pins.csn;
    if (!pins.csn && pins.sclk && !sclk_q) begin
      sh    <= {sh[70:0], pins.sdio};
      nbits <= nbits + 1;
    end
    if (pins.csn && !csn_q) begin
      if (nbits == 72 && sh[71:64] == 8'h0E) begin
        buf_asf    <= sh[61:48];
        buf_ftw    <= sh[31:0];
        spi_writes <= spi_writes + 1;
      end else if (nbits != 0) begin
        bad_spi <= bad_spi + 1;
      end
      nbits <= 0;
    end
    if (pins.io_update) begin
      act_ftw     <= buf_ftw;
      act_asf     <= buf_asf;
      updates     <= updates + 1;
      last_update <= cycle;
    end
    if (pins.par_txen && pins.par_f == 2'b01) act_pow <= pins.par_data;
  end
endmodule
