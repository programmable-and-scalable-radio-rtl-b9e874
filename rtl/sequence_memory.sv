// sequence_memory: one channel's pulse-sequence store.
//
// Two dual-port RAMs, written from the backplane link and read by the sequencer:
//   * the event table, EVT_DEPTH pulse events of four 32-bit words each (frequency,
//     amplitude and phase offset, wait time, VGA level and flags; layout in rf_pkg);
//   * the sequence list, SEQ_DEPTH 32-bit entries that play events by index and mark
//     loops, so a sequence of thousands of pulses built from a few distinct events fits
//     in a few hundred bytes.
// Writes take effect on the clock edge of the write strobe; reads are synchronous with
// one clock of latency. Because the ports are separate, the host may rewrite entries
// ahead of the running sequencer, which is how a running sequence is changed in real
// time. A write and a read of the same entry in the same clock return the old value.
//
// The paper says a pulse sequence is a set of predefined events, that the repetitive
// structure keeps a typical sequence under 2 kB, and that sequences can be updated while
// running. The two-table organisation and the depths (1 kB per channel) are this
// design's.
module sequence_memory
  import rf_pkg::*;
#(
  parameter int unsigned EVT_DEPTH = 32,
  parameter int unsigned SEQ_DEPTH = 128
) (
  input  logic                         clk,
  input  bus_wr_t                      wr,        // en already qualified for this channel
  input  logic [$clog2(SEQ_DEPTH)-1:0] seq_raddr,
  output logic [31:0]                  seq_rdata,
  input  logic [$clog2(EVT_DEPTH)-1:0] evt_raddr,
  output event_t                       evt_rdata
);

  localparam int unsigned EAW = $clog2(EVT_DEPTH);
  localparam int unsigned SAW = $clog2(SEQ_DEPTH);

  logic [31:0] evt_w0 [EVT_DEPTH];
  logic [31:0] evt_w1 [EVT_DEPTH];
  logic [31:0] evt_w2 [EVT_DEPTH];
  logic [31:0] evt_w3 [EVT_DEPTH];
  logic [31:0] seq_ram [SEQ_DEPTH];

  logic [EAW-1:0] evt_waddr;
  logic [SAW-1:0] seq_waddr;
  assign evt_waddr = EAW'(wr.addr[ADDR_W-1:2]);
  assign seq_waddr = SAW'(wr.addr);

  always_ff @(posedge clk) begin
    if (wr.en && wr.sel == SEL_EVT) begin
      unique case (wr.addr[1:0])
        2'd0: evt_w0[evt_waddr] <= wr.data;
        2'd1: evt_w1[evt_waddr] <= wr.data;
        2'd2: evt_w2[evt_waddr] <= wr.data;
        2'd3: evt_w3[evt_waddr] <= wr.data;
      endcase
    end
    if (wr.en && wr.sel == SEL_SEQ) seq_ram[seq_waddr] <= wr.data;
  end

  logic [31:0] r0, r1, r2, r3;
  always_ff @(posedge clk) begin
    r0        <= evt_w0[evt_raddr];
    r1        <= evt_w1[evt_raddr];
    r2        <= evt_w2[evt_raddr];
    r3        <= evt_w3[evt_raddr];
    seq_rdata <= seq_ram[seq_raddr];
  end

  always_comb begin
    evt_rdata.ftw      = r0;
    evt_rdata.asf      = r1[29:16];
    evt_rdata.pow      = r1[15:0];
    evt_rdata.wait_cyc = r2;
    evt_rdata.vga      = r3[13:0];
    evt_rdata.shaped   = r3[16];
    evt_rdata.spi      = r3[17];
    evt_rdata.ttl      = r3[18];
  end

endmodule
