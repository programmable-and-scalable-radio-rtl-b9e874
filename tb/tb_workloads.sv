// tb_workloads: runs the kinds of sequences the instrument is built for on one
// four-channel card at its default sizes, programmed only through its command lane.
//
//  A. A mixed-species gate sequence shaped like the published oscilloscope example
//     (about 220 us on four channels: two qubit drives with shaped pulses and repeated
//     short pulses, two cooling/detection tones). Every edge time of every channel is
//     checked against the schedule expanded here from the same program.
//  B. A single-sideband (Hartley) pair: two channels with one frequency and phase
//     offsets 0 and 90 degrees. After every edge their phase words must differ by
//     exactly 0x4000 and their frequencies agree.
//  C. A long repetitive sequence: 2000 repetitions of a two-edge pulse (4000 edges)
//     from 2 events and 4 list entries (48 bytes of program), with no late edge.
// The kinds of use follow the published instrument: a mixed-species experiment, a
// quadrature pair for single-sideband mixing and long sequences held in little memory.
// The frequencies, durations and pulse counts are this testbench's own. It has no ports;
// the card sits in slot 3, and each run is armed by a broadcast write and started by a
// 4-clock trigger pulse. Times are compared in 8 ns clocks from the first edge of the run.
module tb_workloads;
  import rf_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  link_t lane = '0;
  logic tclk_a = 0;
  dds_pins_t [3:0] dds;
  logic [3:0][13:0] vga_dac;
  logic [3:0] ttl;
  ch_status_t [3:0] status;
  longint cycle = 0;
  int checks = 0, failures = 0;

  channel_card dut (.clk, .rst_n, .slot_id(4'd3), .lane, .tclk_a, .dds, .vga_dac, .ttl, .status);
  logic [31:0] m_ftw [4];
  logic [15:0] m_pow [4];
  for (genvar c = 0; c < 4; c++) begin : g_m
    ad9910_model u_m (.clk, .pins(dds[c]), .cycle);
    assign m_ftw[c] = u_m.act_ftw;
    assign m_pow[c] = u_m.act_pow;
  end
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  longint upd [4][$];
  for (genvar c = 0; c < 4; c++) begin : g_rec
    always @(posedge clk) if (rst_n && dds[c].io_update) upd[c].push_back(cycle);
  end

  // Hartley check: after any update on channel 2 or 3, phases differ by 90 degrees
  int hartley_on = 0, hartley_checked = 0;
  always @(negedge clk)
    if (hartley_on != 0 && rst_n && cycle > 2 && upd[2].size() > 0 && upd[2][$] == cycle - 1) begin
      checks++; hartley_checked++;
      if (m_pow[3] - m_pow[2] != 16'h4000 || m_ftw[2] != m_ftw[3]) begin
        failures++;
        $display("FAIL hartley pair: pow %h %h ftw %h %h", m_pow[2], m_pow[3], m_ftw[2], m_ftw[3]);
      end
    end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(input logic [47:0] w);
    for (int i = 0; i < 48; i++) begin
      @(negedge clk); lane.frame = 1; lane.data = w[47 - i];
    end
    @(negedge clk); lane = '0;
  endtask

  // program description kept for the reference schedule
  typedef struct { logic [31:0] ftw; logic [15:0] pow; int wt; logic [13:0] vga;
                   bit shaped; bit spi; bit tt; } ev_t;
  typedef struct { logic [1:0] op; int cnt; int idx; } se_t;
  ev_t evs [4][$];
  se_t seqs [4][$];

  task automatic load_channel(input int ch);
    foreach (evs[ch][e])
      for (int w = 0; w < 4; w++)
        send(mk_word(4'd3, 0, 2'(ch), SEL_EVT, 7'(e * 4 + w),
                     evt_word(w, evs[ch][e].ftw, 14'h3FFF, evs[ch][e].pow, 32'(evs[ch][e].wt),
                              evs[ch][e].vga, evs[ch][e].shaped, evs[ch][e].spi, evs[ch][e].tt)));
    foreach (seqs[ch][i])
      send(mk_word(4'd3, 0, 2'(ch), SEL_SEQ, 7'(i), seq_word(seqs[ch][i].op, seqs[ch][i].cnt, seqs[ch][i].idx)));
  endtask

  // expand the list (one loop level) into due times
  function automatic void schedule(input int ch, ref longint due [$], ref int order [$]);
    longint t = 0;
    int p = 0, ls = 0, lc = 0;
    due.delete(); order.delete();
    while (p < seqs[ch].size()) begin
      se_t s = seqs[ch][p];
      if (s.op == OP_PLAY) begin
        due.push_back(t); order.push_back(s.idx); t += evs[ch][s.idx].wt; p++;
      end else if (s.op == OP_LOOP) begin ls = p + 1; lc = s.cnt; p++; end
      else if (s.op == OP_ENDL) begin
        if (lc > 1) begin lc--; p = ls; end else p++;
      end else break;
    end
  endfunction

  task automatic run_and_check(input string name, input int nclk);
    longint due [$];
    int order [$];
    longint t0;
    for (int c = 0; c < 4; c++) upd[c].delete();
    send(mk_word(4'd3, 1, 0, SEL_CTRL, 0, 32'h1));
    repeat (300) @(negedge clk);
    @(negedge clk); tclk_a = 1; repeat (4) @(negedge clk); tclk_a = 0;
    repeat (nclk) @(negedge clk);
    t0 = -1;
    for (int c = 0; c < 4; c++) if (upd[c].size() > 0 && (t0 < 0 || upd[c][0] < t0)) t0 = upd[c][0];
    for (int c = 0; c < 4; c++) begin
      int bad = 0;
      schedule(c, due, order);
      check(upd[c].size() == due.size(), $sformatf("%s ch %0d edges %0d exp %0d", name, c, upd[c].size(), due.size()));
      for (int i = 0; i < due.size() && i < upd[c].size(); i++)
        if (upd[c][i] - t0 != due[i]) bad++;
      check(bad == 0, $sformatf("%s ch %0d: %0d edges off schedule", name, c, bad));
      check(status[c].done && status[c].late_count == 0, $sformatf("%s ch %0d done, no late edge", name, c));
      $display("%s ch %0d: %0d edges, last at %0d clocks (%0d ns)", name, c, upd[c].size(),
               upd[c].size() ? upd[c][$] - t0 : 0, upd[c].size() ? 8 * (upd[c][$] - t0) : 0);
    end
  endtask

  function automatic ev_t E(input logic [31:0] f, input int wt, input int vga, input bit shaped,
                            input bit spi, input bit tt, input logic [15:0] pow = 16'h0);
    ev_t e;
    e.ftw = f; e.pow = pow; e.wt = wt; e.vga = 14'(vga); e.shaped = shaped; e.spi = spi; e.tt = tt;
    return e;
  endfunction
  function automatic se_t S(input logic [1:0] op, input int cnt, input int idx);
    se_t s;
    s.op = op; s.cnt = cnt; s.idx = idx;
    return s;
  endfunction

  localparam logic [31:0] FBE = 32'h0CCC_CCCD, FCA = 32'h1333_3333, FCOOL = 32'h0A3D_70A4,
                          FDET = 32'h0B85_1EB8, FSB = 32'h0851_EB85;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 128; k++)
      send(mk_word(4'd3, 1, 0, SEL_SHAPE, 7'(k), 32'((k * 16383) / 127)));

    // ---- A: mixed-species sequence, 8 ns clocks (125 clocks = 1 us) ----
    // ch0 qubit Be: wait 36 us, two shaped pulses, 3 short pulses, conditional-style gap
    evs[0] = '{E(FBE, 4500, 0, 0, 1, 0), E(FBE, 1000, 12000, 1, 0, 1), E(FBE, 1500, 0, 1, 0, 0),
               E(FBE, 60, 12000, 0, 0, 1), E(FBE, 1200, 0, 0, 0, 0), E(FBE, 2000, 0, 0, 0, 0)};
    seqs[0] = '{S(OP_PLAY, 0, 0), S(OP_LOOP, 2, 0), S(OP_PLAY, 0, 1), S(OP_PLAY, 0, 2), S(OP_ENDL, 0, 0),
                S(OP_LOOP, 3, 0), S(OP_PLAY, 0, 3), S(OP_PLAY, 0, 4), S(OP_ENDL, 0, 0),
                S(OP_PLAY, 0, 5), S(OP_LOOP, 2, 0), S(OP_PLAY, 0, 1), S(OP_PLAY, 0, 2), S(OP_ENDL, 0, 0),
                S(OP_END, 0, 0)};
    // ch1 cool/detect Be: cooling 29 us, off, detection at the end
    evs[1] = '{E(FCOOL, 3600, 10000, 0, 1, 1), E(FCOOL, 22400, 0, 0, 0, 0), E(FDET, 1500, 10000, 0, 1, 1),
               E(FDET, 100, 0, 0, 0, 0)};
    seqs[1] = '{S(OP_PLAY, 0, 0), S(OP_PLAY, 0, 1), S(OP_PLAY, 0, 2), S(OP_PLAY, 0, 3), S(OP_END, 0, 0)};
    // ch2 qubit Ca: shaped pulses interleaved, short pulses
    evs[2] = '{E(FCA, 8000, 0, 0, 1, 0), E(FCA, 1000, 12000, 1, 0, 1), E(FCA, 1800, 0, 1, 0, 0),
               E(FCA, 50, 9000, 0, 0, 1), E(FCA, 1400, 0, 0, 0, 0)};
    seqs[2] = '{S(OP_PLAY, 0, 0), S(OP_LOOP, 2, 0), S(OP_PLAY, 0, 1), S(OP_PLAY, 0, 2), S(OP_ENDL, 0, 0),
                S(OP_LOOP, 4, 0), S(OP_PLAY, 0, 3), S(OP_PLAY, 0, 4), S(OP_ENDL, 0, 0), S(OP_END, 0, 0)};
    // ch3 cool/detect Ca: cooling, a detection pulse mid-sequence, another at the end
    evs[3] = '{E(FCOOL, 3600, 10000, 0, 1, 1), E(FCOOL, 10800, 0, 0, 0, 0), E(FDET, 1250, 10000, 0, 1, 1),
               E(FDET, 10250, 0, 0, 0, 0), E(FDET, 1250, 10000, 0, 0, 1), E(FDET, 100, 0, 0, 0, 0)};
    seqs[3] = '{S(OP_PLAY, 0, 0), S(OP_PLAY, 0, 1), S(OP_PLAY, 0, 2), S(OP_PLAY, 0, 3), S(OP_PLAY, 0, 4),
                S(OP_PLAY, 0, 5), S(OP_END, 0, 0)};
    for (int c = 0; c < 4; c++) load_channel(c);
    run_and_check("mixed-species", 28500);
    check(m_ftw[0] == FBE && m_ftw[2] == FCA && m_ftw[1] == FDET && m_ftw[3] == FDET, "A final frequencies");

    // ---- B: Hartley I/Q pair on ch2/ch3, ch0/ch1 idle ----
    evs[2] = '{E(FSB, 2000, 8000, 1, 1, 1, 16'h0000), E(FSB + 32'h100, 3000, 0, 1, 1, 0, 16'h0000),
               E(FSB, 1000, 8000, 0, 1, 1, 16'h0000)};
    evs[3] = '{E(FSB, 2000, 8000, 1, 1, 1, 16'h4000), E(FSB + 32'h100, 3000, 0, 1, 1, 0, 16'h4000),
               E(FSB, 1000, 8000, 0, 1, 1, 16'h4000)};
    seqs[2] = '{S(OP_PLAY, 0, 0), S(OP_PLAY, 0, 1), S(OP_PLAY, 0, 2), S(OP_END, 0, 0)};
    seqs[3] = seqs[2];
    evs[0] = '{E(FBE, 10, 0, 0, 0, 0)};
    seqs[0] = '{S(OP_PLAY, 0, 0), S(OP_END, 0, 0)};
    evs[1] = evs[0];
    seqs[1] = seqs[0];
    for (int c = 0; c < 4; c++) load_channel(c);
    hartley_on = 1;
    run_and_check("hartley", 6500);
    hartley_on = 0;
    check(hartley_checked == 3, $sformatf("hartley edges checked %0d", hartley_checked));

    // ---- C: 2000 repetitions of a pulse on ch0 (others idle) ----
    evs[0] = '{E(FBE, 20, 6000, 0, 0, 1), E(FBE, 30, 0, 0, 0, 0)};
    seqs[0] = '{S(OP_LOOP, 2000, 0), S(OP_PLAY, 0, 0), S(OP_PLAY, 0, 1), S(OP_ENDL, 0, 0), S(OP_END, 0, 0)};
    evs[2] = evs[1]; seqs[2] = seqs[1];
    evs[3] = evs[1]; seqs[3] = seqs[1];
    for (int c = 0; c < 4; c++) load_channel(c);
    run_and_check("repetitive", 101000);
    check(status[0].edge_count == 4000, $sformatf("repetitive edge count %0d", status[0].edge_count));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
