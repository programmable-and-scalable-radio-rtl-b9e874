// rf_channel: the control logic behind one rf output.
//
// Combines the channel's sequence memory, sequencer, DDS SPI writer, coherent-phase
// tracker and VGA pulse shaper. Writes from the backplane link reach this channel when
// their channel field equals CH_ID or their all-channel bit is set; the memory select
// picks the event table, sequence list, shape table or the control register
// (address 0: bit 0 arms the sequence, bit 1 halts it). Outputs are the pins of the
// channel's AD9910 DDS (SPI, IO_UPDATE, parallel phase port), the 14-bit code for the
// VGA control DAC, a TTL output and a status word.
//
// Timing: see channel_sequencer; every pin of every channel changes one clock after its
// edge fires, so channels sharing the trigger stay aligned to the clock.
//
// The split into these parts follows the paper's description of the firmware; the
// register map is this design's.
module rf_channel
  import rf_pkg::*;
#(
  parameter int unsigned CH_ID       = 0,
  parameter int unsigned EVT_DEPTH   = 32,
  parameter int unsigned SEQ_DEPTH   = 128,
  parameter int unsigned SHAPE_LEN   = 128,
  parameter int unsigned SAMPLE_HOLD = 2,
  parameter int unsigned SCLK_HALF   = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  bus_wr_t          wr,
  input  logic             trigger,
  output dds_pins_t        dds,
  output logic [VGA_W-1:0] vga_dac,
  output logic             ttl,
  output ch_status_t       status
);

  localparam int unsigned SEQ_AW = $clog2(SEQ_DEPTH);
  localparam int unsigned EVT_AW = $clog2(EVT_DEPTH);

  bus_wr_t my_wr;
  logic    arm, halt;

  always_comb begin
    my_wr    = wr;
    my_wr.en = wr.en && (wr.all_ch || wr.ch == 2'(CH_ID));
  end
  assign arm  = my_wr.en && my_wr.sel == SEL_CTRL && my_wr.addr == '0 && my_wr.data[0];
  assign halt = my_wr.en && my_wr.sel == SEL_CTRL && my_wr.addr == '0 && my_wr.data[1];

  logic [SEQ_AW-1:0] seq_raddr;
  logic [31:0]       seq_rdata;
  logic [EVT_AW-1:0] evt_raddr;
  event_t            evt_rdata;

  sequence_memory #(.EVT_DEPTH(EVT_DEPTH), .SEQ_DEPTH(SEQ_DEPTH)) u_mem (
    .clk, .wr(my_wr), .seq_raddr, .seq_rdata, .evt_raddr, .evt_rdata
  );

  logic              spi_start, spi_busy;
  logic [FTW_W-1:0]  spi_ftw, ph_ftw;
  logic [ASF_W-1:0]  spi_asf;
  logic [POW_W-1:0]  ph_offset, ph_pow;
  logic [TIME_W-1:0] t_next, t;
  logic              sh_start, sh_shaped;
  logic [VGA_W-1:0]  sh_level;

  channel_sequencer #(.SEQ_AW(SEQ_AW), .EVT_AW(EVT_AW)) u_seq (
    .clk, .rst_n, .arm, .halt, .trigger,
    .seq_raddr, .seq_rdata, .evt_raddr, .evt_rdata,
    .spi_start, .spi_ftw, .spi_asf, .spi_busy,
    .ph_ftw, .ph_offset, .t_next, .ph_pow,
    .sh_start, .sh_shaped, .sh_level,
    .io_update(dds.io_update), .par_data(dds.par_data), .par_f(dds.par_f),
    .par_txen(dds.par_txen), .ttl,
    .armed(status.armed), .running(status.running), .done(status.done),
    .late_count(status.late_count), .edge_count(status.edge_count), .t
  );

  dds_spi_writer #(.SCLK_HALF(SCLK_HALF)) u_spi (
    .clk, .rst_n, .start(spi_start), .ftw(spi_ftw), .asf(spi_asf), .busy(spi_busy),
    .sclk(dds.sclk), .csn(dds.csn), .sdio(dds.sdio)
  );

  phase_tracker u_phase (
    .clk, .ftw(ph_ftw), .pow_offset(ph_offset), .t_next, .pow_out(ph_pow)
  );

  pulse_shaper #(.SHAPE_LEN(SHAPE_LEN), .SAMPLE_HOLD(SAMPLE_HOLD)) u_shape (
    .clk, .rst_n, .wr(my_wr), .start(sh_start), .shaped(sh_shaped), .level(sh_level),
    .dac(vga_dac), .ramping(status.ramping)
  );

endmodule
