// rf_pkg: types and constants shared by the pulse-sequencer logic.
//
// The 48-bit backplane command word is split as
//   [47:44] slot      geographical address of the channel card, 4'hF = all cards
//   [43]    all_ch    1 = write every channel of the card
//   [42:41] ch        channel 0..3 on the card
//   [40:39] sel       memory select: event table, sequence list, shape table, control
//   [38:32] addr      word address inside the selected memory
//   [31:0]  data
// The 48-bit total and the AD9910 widths (32-bit frequency, 16-bit phase, 14-bit
// amplitude) and the 14-bit VGA DAC are the paper's; the split of the word, the event
// record and the sequence-entry encoding are this design's own.
package rf_pkg;

  localparam int unsigned CMD_W   = 48;
  localparam int unsigned FTW_W   = 32;
  localparam int unsigned POW_W   = 16;
  localparam int unsigned ASF_W   = 14;
  localparam int unsigned VGA_W   = 14;
  localparam int unsigned ADDR_W  = 7;
  localparam int unsigned TIME_W  = 32;
  localparam logic [3:0]  SLOT_BCAST = 4'hF;

  // memory select field of the command word
  typedef enum logic [1:0] {
    SEL_EVT   = 2'd0,   // event table: addr = {event[4:0], word[1:0]}
    SEL_SEQ   = 2'd1,   // sequence list: addr = entry
    SEL_SHAPE = 2'd2,   // shape table: addr = sample
    SEL_CTRL  = 2'd3    // control register: addr 0, data[0]=arm, data[1]=halt
  } mem_sel_e;

  typedef struct packed {
    logic [3:0]        slot;
    logic              all_ch;
    logic [1:0]        ch;
    mem_sel_e          sel;
    logic [ADDR_W-1:0] addr;
    logic [31:0]       data;
  } cmd_word_t;

  // decoded write as issued by the link receiver on a channel card
  typedef struct packed {
    logic              en;
    logic              all_ch;
    logic [1:0]        ch;
    mem_sel_e          sel;
    logic [ADDR_W-1:0] addr;
    logic [31:0]       data;
  } bus_wr_t;

  // one backplane lane: frame strobe and serial data, one bit per clock
  typedef struct packed {
    logic frame;
    logic data;
  } link_t;

  // pulse event ("edge"), four 32-bit words in the event table
  //   word 0: ftw
  //   word 1: [29:16] asf, [15:0] pow (phase offset added to the coherent phase)
  //   word 2: wait, clocks from this edge to the next one
  //   word 3: [13:0] vga level, [16] shaped, [17] spi (load ftw/asf before the edge),
  //           [18] ttl output level
  typedef struct packed {
    logic [FTW_W-1:0]  ftw;
    logic [ASF_W-1:0]  asf;
    logic [POW_W-1:0]  pow;
    logic [TIME_W-1:0] wait_cyc;
    logic [VGA_W-1:0]  vga;
    logic              shaped;
    logic              spi;
    logic              ttl;
  } event_t;

  // sequence-list entry: [31:30] opcode, [29:8] count, [7:0] event index
  typedef enum logic [1:0] {
    OP_PLAY  = 2'd0,   // play event [7:0]
    OP_LOOP  = 2'd1,   // following entries up to OP_ENDL run count times
    OP_ENDL  = 2'd2,   // end of loop body
    OP_END   = 2'd3    // end of sequence
  } seq_op_e;

  typedef struct packed {
    seq_op_e     op;
    logic [21:0] count;
    logic [7:0]  idx;
  } seq_entry_t;

  // pins of one AD9910: SPI, IO_UPDATE and the parallel data port
  typedef struct packed {
    logic             sclk;
    logic             csn;
    logic             sdio;
    logic             io_update;
    logic [POW_W-1:0] par_data;
    logic [1:0]       par_f;
    logic             par_txen;
  } dds_pins_t;

  // per-channel status
  typedef struct packed {
    logic        armed;
    logic        running;
    logic        done;
    logic        ramping;
    logic [15:0] late_count;
    logic [31:0] edge_count;
  } ch_status_t;

  // AD9910 parallel-port destination code for phase (F[1:0]), from the datasheet
  localparam logic [1:0] PAR_DEST_PHASE = 2'b01;
  // AD9910 single-tone profile 0 register address
  localparam logic [4:0] REG_PROFILE0   = 5'h0E;

endpackage
