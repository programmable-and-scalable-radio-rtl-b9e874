// tb_rf_system: end-to-end run of the whole shelf at its default size (8 cards x 4
// channels), driven only through the processor port of the master card, with a
// behavioural AD9910 on every channel.
//
// Programme:
//  * broadcast to every card and channel: a 128-sample shape table, four events and a
//    looped sequence (shaped pulse, five short pulses, a pause, shaped pulse: 15 edges);
//  * channel-addressed words give each of the 32 channels its own frequency;
//  * card 0 channel 1 is a detection channel: its TTL output is the photon-counting
//    gate; card 0 channel 0 has a placeholder entry that the processor rewrites after
//    reading the detection result (a conditional pulse, done while the sequence runs);
//  * card 7 channel 3 has a wait too short for the next SPI load: one late edge.
// Run 1 has a bright ion (photons counted, pulse inserted), run 2 a dark one (no
// pulse), and card 5 is halted during run 2. Checks: edge times of every channel
// against the schedule, identical start clocks on all cards, the frequency, amplitude
// and coherent phase each DDS ends with, edge and late counts, the conditional pulse.
// Each mechanism (broadcast, unicast, channel write, loop, shaped ramp, SPI load,
// late edge, detection, real-time rewrite, halt) is counted and must occur.
module tb_rf_system;
  import rf_pkg::*;
  import tb_util_pkg::*;
  localparam int NC = 32;
  logic clk = 0, rst_n = 0;
  logic cpu_word_valid = 0, cpu_word_ready;
  logic [47:0] cpu_word = '0;
  logic cpu_trig = 0, cpu_trig_ready;
  logic cpu_gate;
  logic [15:0] cpu_threshold = 16'd3;
  logic [7:0][15:0] cpu_counts;
  logic [7:0] cpu_outcome;
  logic cpu_det_done;
  logic [7:0] pmt = '0;
  dds_pins_t [NC-1:0] dds;
  logic [NC-1:0][13:0] vga_dac;
  logic [NC-1:0] ttl;
  ch_status_t [NC-1:0] status;
  longint cycle = 0;
  int checks = 0, failures = 0;

  rf_system dut (.*);
  assign cpu_gate = ttl[1];

  logic [31:0] m_ftw [NC];
  logic [15:0] m_pow [NC];
  int          m_spi [NC], m_bad [NC];
  for (genvar c = 0; c < NC; c++) begin : g_m
    ad9910_model u_m (.clk, .pins(dds[c]), .cycle);
    assign m_ftw[c] = u_m.act_ftw;
    assign m_pow[c] = u_m.act_pow;
    assign m_spi[c] = u_m.spi_writes;
    assign m_bad[c] = u_m.bad_spi;
  end
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_bcast = 0, n_unicast = 0, n_chwrite = 0, n_shaped = 0, n_late = 0, n_detect = 0,
      n_rewrite = 0, n_halt = 0, n_loop_edges = 0, n_spi = 0, n_trig = 0;
  logic [NC-1:0] ramp_q = '0;
  always @(posedge clk)
    for (int c = 0; c < NC; c++) begin
      if (rst_n && status[c].ramping && !ramp_q[c]) n_shaped++;
      ramp_q[c] <= status[c].ramping;
    end

  longint upd [NC][$];
  for (genvar c = 0; c < NC; c++) begin : g_rec
    always @(posedge clk) if (rst_n && dds[c].io_update) upd[c].push_back(cycle);
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(input logic [47:0] w);
    @(negedge clk);
    cpu_word = w; cpu_word_valid = 1;
    while (!cpu_word_ready) @(negedge clk);
    @(negedge clk);
    cpu_word_valid = 0;
    if (w[47:44] == 4'hF) n_bcast++; else n_unicast++;
    if (!w[43]) n_chwrite++;
  endtask

  task automatic wr_evt(input logic [3:0] slot, input bit all, input int ch, input int e,
                        input logic [31:0] ftw, input int wt, input logic [13:0] vga,
                        input bit shaped, input bit spi, input bit tt);
    for (int w = 0; w < 4; w++)
      send(mk_word(slot, all, 2'(ch), SEL_EVT, 7'(e * 4 + w),
                   evt_word(w, ftw, 14'h3FFF, 16'h0, 32'(wt), vga, shaped, spi, tt)));
  endtask

  task automatic wr_seq(input logic [3:0] slot, input bit all, input int ch, input int a,
                        input logic [1:0] op, input int cnt, input int idx);
    send(mk_word(slot, all, 2'(ch), SEL_SEQ, 7'(a), seq_word(op, cnt, idx)));
  endtask

  task automatic trigger_all();
    @(negedge clk);
    cpu_trig = 1;
    while (!cpu_trig_ready) @(negedge clk);
    @(negedge clk);
    cpu_trig = 0;
    n_trig++;
  endtask

  function automatic logic [31:0] ch_ftw(input int c);
    return 32'h0800_0000 + 32'(c) * 32'h0013_5791;
  endfunction

  localparam logic [31:0] G = 32'h0555_5555, H = 32'h0AAA_AAAB;
  // schedule of the common sequence: e0 1000, e1 400, 5 x (e2 40, e3 60),
  // then e4 (300, gives the SPI load of the following e0 time), e0, e1: 15 edges
  longint common_due [15] = '{0, 1000, 1400, 1440, 1500, 1540, 1600, 1640, 1700, 1740,
                              1800, 1840, 1900, 2200, 3200};

  // bright ion: photons during the detection gate
  bit bright = 1;
  always @(negedge clk) pmt[0] <= bright && cpu_gate && (cycle % 16 < 8);
  always @(posedge clk) if (rst_n && cpu_det_done) n_detect++;

  task automatic run(input int runno);
    longint t0;
    int n;
    for (int c = 0; c < NC; c++) upd[c].delete();
    send(mk_word(4'hF, 1, 0, SEL_CTRL, 0, 32'h1));          // arm everything
    repeat (300) @(negedge clk);
    trigger_all();
    // processor: wait for the detection result, then rewrite card 0 ch 0 entry 2
    n = 0;
    while (!cpu_det_done && n < 5000) begin @(negedge clk); n++; end
    check(cpu_outcome[0] == bright, $sformatf("run %0d detection outcome %0d", runno, cpu_outcome[0]));
    wr_seq(4'd0, 0, 0, 2, OP_PLAY, 0, cpu_outcome[0] ? 11 : 10);
    n_rewrite++;
    if (runno == 2) begin
      repeat (200) @(negedge clk);
      send(mk_word(4'd5, 1, 0, SEL_CTRL, 0, 32'h2));        // halt card 5
      n_halt++;
    end
    repeat (4000) @(negedge clk);
    // all common channels: times relative to the first edge of card 1 channel 0
    t0 = upd[4].size() > 0 ? upd[4][0] : 0;
    for (int c = 0; c < NC; c++) begin
      bit common = !(c == 0 || c == 1 || c == 31);
      bit halted = (runno == 2) && (c / 4 == 5);
      if (common && !halted) begin
        check(upd[c].size() == 15, $sformatf("run %0d ch %0d edges %0d", runno, c, upd[c].size()));
        for (int i = 0; i < 15 && i < upd[c].size(); i++)
          check(upd[c][i] - t0 == common_due[i], $sformatf("run %0d ch %0d edge %0d at %0d", runno, c, i, upd[c][i] - t0));
        check(m_ftw[c] == ch_ftw(c), $sformatf("ch %0d ftw", c));
        check(m_pow[c] == exp_pow(ch_ftw(c), 3200, 16'h0), $sformatf("ch %0d coherent phase", c));
        check(status[c].done && status[c].late_count == 0 && status[c].edge_count == 15, $sformatf("ch %0d status", c));
        n_loop_edges += 10;
      end
      if (halted) begin
        check(!status[c].armed && !status[c].done && upd[c].size() < 15 && upd[c].size() > 0,
              $sformatf("ch %0d halted after %0d edges", c, upd[c].size()));
      end
    end
    // card 0 channel 0: e8 at 0, e9 at 2500, then conditional pulse or idle at 3500
    check(upd[0].size() == 4 && upd[0][0] == t0 && upd[0][2] - t0 == 3500, $sformatf("run %0d ch0 edges", runno));
    check(m_ftw[0] == (bright ? H : G), $sformatf("run %0d conditional pulse ftw %h", runno, m_ftw[0]));
    // card 7 channel 3: late edge
    check(status[31].late_count == 1 && status[31].done, "late edge on ch 31");
    if (status[31].late_count != 0) n_late++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // broadcast programme
    for (int k = 0; k < 128; k++)
      send(mk_word(4'hF, 1, 0, SEL_SHAPE, 7'(k), 32'((k * 16383) / 127)));
    wr_evt(4'hF, 1, 0, 0, 32'h0, 1000, 14'd10000, 1, 1, 1);
    wr_evt(4'hF, 1, 0, 1, 32'h0, 400, 14'd0, 1, 0, 0);
    wr_evt(4'hF, 1, 0, 2, 32'h0, 40, 14'd6000, 0, 0, 1);
    wr_evt(4'hF, 1, 0, 3, 32'h0, 60, 14'd0, 0, 0, 0);
    wr_evt(4'hF, 1, 0, 4, 32'h0, 300, 14'd0, 0, 0, 0);
    wr_seq(4'hF, 1, 0, 0, OP_PLAY, 0, 0);
    wr_seq(4'hF, 1, 0, 1, OP_PLAY, 0, 1);
    wr_seq(4'hF, 1, 0, 2, OP_LOOP, 5, 0);
    wr_seq(4'hF, 1, 0, 3, OP_PLAY, 0, 2);
    wr_seq(4'hF, 1, 0, 4, OP_PLAY, 0, 3);
    wr_seq(4'hF, 1, 0, 5, OP_ENDL, 0, 0);
    wr_seq(4'hF, 1, 0, 6, OP_PLAY, 0, 4);
    wr_seq(4'hF, 1, 0, 7, OP_PLAY, 0, 0);
    wr_seq(4'hF, 1, 0, 8, OP_PLAY, 0, 1);
    wr_seq(4'hF, 1, 0, 9, OP_END, 0, 0);
    // each channel its own frequency (event 0 word 0)
    for (int c = 0; c < NC; c++) send(mk_word(4'(c / 4), 0, 2'(c % 4), SEL_EVT, 7'd0, ch_ftw(c)));
    // card 0 ch 1: detection window t = 500 .. 1500
    wr_evt(4'd0, 0, 1, 5, 32'h0, 500, 14'd0, 0, 0, 0);
    wr_evt(4'd0, 0, 1, 6, 32'h0, 1000, 14'd8000, 0, 0, 1);
    wr_evt(4'd0, 0, 1, 7, 32'h0, 100, 14'd0, 0, 0, 0);
    wr_seq(4'd0, 0, 1, 0, OP_PLAY, 0, 5);
    wr_seq(4'd0, 0, 1, 1, OP_PLAY, 0, 6);
    wr_seq(4'd0, 0, 1, 2, OP_PLAY, 0, 7);
    wr_seq(4'd0, 0, 1, 3, OP_END, 0, 0);
    // card 0 ch 0: e8 (2500), e9 (1000), placeholder, e10, end
    wr_evt(4'd0, 0, 0, 8, G, 2500, 14'd0, 0, 1, 0);
    wr_evt(4'd0, 0, 0, 9, G, 1000, 14'd0, 0, 0, 0);
    wr_evt(4'd0, 0, 0, 10, G, 200, 14'd0, 0, 0, 0);
    wr_evt(4'd0, 0, 0, 11, H, 200, 14'd9000, 0, 1, 1);
    wr_seq(4'd0, 0, 0, 0, OP_PLAY, 0, 8);
    wr_seq(4'd0, 0, 0, 1, OP_PLAY, 0, 9);
    wr_seq(4'd0, 0, 0, 2, OP_PLAY, 0, 10);
    wr_seq(4'd0, 0, 0, 3, OP_PLAY, 0, 10);
    wr_seq(4'd0, 0, 0, 4, OP_END, 0, 0);
    // card 7 ch 3: 20-clock wait before an SPI load
    wr_evt(4'd7, 0, 3, 12, 32'h0, 20, 14'd0, 0, 0, 0);
    wr_seq(4'd7, 0, 3, 0, OP_PLAY, 0, 12);
    wr_seq(4'd7, 0, 3, 1, OP_PLAY, 0, 0);
    wr_seq(4'd7, 0, 3, 2, OP_END, 0, 0);

    bright = 1;
    run(1);
    bright = 0;
    run(2);

    for (int c = 0; c < NC; c++) begin
      n_spi += m_spi[c];
      check(m_bad[c] == 0, "no malformed SPI frames");
    end
    $display("mechanisms: broadcast=%0d unicast=%0d channel_write=%0d trigger=%0d loop_edges=%0d shaped=%0d spi=%0d late=%0d detect=%0d rewrite=%0d halt=%0d",
             n_bcast, n_unicast, n_chwrite, n_trig, n_loop_edges, n_shaped, n_spi, n_late, n_detect, n_rewrite, n_halt);
    check(n_bcast > 0, "broadcast used");
    check(n_unicast > 0, "unicast used");
    check(n_chwrite > 0, "channel-addressed write used");
    check(n_trig == 2, "triggers");
    check(n_loop_edges > 0, "loops played");
    check(n_shaped > 0, "shaped ramps");
    check(n_spi > 0, "SPI loads");
    check(n_late > 0, "late edge");
    check(n_detect == 2, "detections");
    check(n_rewrite == 2, "real-time rewrites");
    check(n_halt == 1, "halt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
