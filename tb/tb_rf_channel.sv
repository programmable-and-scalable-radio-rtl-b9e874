// tb_rf_channel: one complete channel driving a behavioural AD9910. The program is
// written over the channel bus: a linear shape table, four events and a looped
// sequence. For each edge the test checks the clock it lands on relative to the first
// edge, the frequency and amplitude the DDS made active at IO_UPDATE, the phase word
// (frequency x elapsed time, so a tone keeps its phase across other tones), the VGA
// code at the end of each shaped ramp and right after an unshaped step, and that
// writes addressed to another channel are ignored.
module tb_rf_channel;
  import rf_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_wr_t wr = '0;
  logic trigger = 0;
  dds_pins_t dds;
  logic [13:0] vga_dac;
  logic ttl;
  ch_status_t status;
  longint cycle = 0;
  int checks = 0, failures = 0;

  rf_channel #(.CH_ID(2)) dut (.*);
  ad9910_model u_dds (.clk, .pins(dds), .cycle);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic bw(input mem_sel_e sel, input int addr, input logic [31:0] data,
                    input logic [1:0] ch = 2'd2, input bit all = 0);
    @(negedge clk);
    wr.en = 1; wr.all_ch = all; wr.ch = ch; wr.sel = sel; wr.addr = 7'(addr); wr.data = data;
    @(negedge clk);
    wr.en = 0;
  endtask

  typedef struct { logic [31:0] ftw; logic [13:0] asf; logic [15:0] pow; int wt;
                   logic [13:0] vga; bit shaped; bit spi; bit ttl; } ev_t;
  ev_t ev [4];
  int order [] = '{0, 1, 0, 1, 2, 3};

  initial begin
    ev[0] = '{32'h0CCC_CCCD, 14'h3FFF, 16'h0000, 600, 14'd8000, 1, 1, 1};
    ev[1] = '{32'h0CCC_CCCD, 14'h3FFF, 16'h0000, 400, 14'd0,    1, 0, 0};
    ev[2] = '{32'h1999_999A, 14'h2000, 16'h0000, 300, 14'd12000, 0, 1, 1};
    ev[3] = '{32'h0CCC_CCCD, 14'h3FFF, 16'h4000, 300, 14'd0,    1, 1, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 128; k++) bw(SEL_SHAPE, k, 32'((k * 16383) / 127));
    for (int e = 0; e < 4; e++)
      for (int w = 0; w < 4; w++)
        bw(SEL_EVT, e * 4 + w, evt_word(w, ev[e].ftw, ev[e].asf, ev[e].pow, ev[e].wt,
                                        ev[e].vga, ev[e].shaped, ev[e].spi, ev[e].ttl));
    bw(SEL_SEQ, 0, seq_word(OP_LOOP, 2, 0));
    bw(SEL_SEQ, 1, seq_word(OP_PLAY, 0, 0));
    bw(SEL_SEQ, 2, seq_word(OP_PLAY, 0, 1));
    bw(SEL_SEQ, 3, seq_word(OP_ENDL, 0, 0));
    bw(SEL_SEQ, 4, seq_word(OP_PLAY, 0, 2));
    bw(SEL_SEQ, 5, seq_word(OP_PLAY, 0, 3));
    bw(SEL_SEQ, 6, seq_word(OP_END, 0, 0));
    // a write for channel 1 must not reach this channel
    bw(SEL_SEQ, 0, seq_word(OP_END, 0, 0), 2'd1);
    bw(SEL_CTRL, 0, 32'h1, 2'd0, 1);      // arm, all-channel write
    repeat (250) @(negedge clk);
    check(status.armed && !status.running, "armed");
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    begin
      longint c0 = -1, due = 0;
      foreach (order[i]) begin
        ev_t e;
        longint tfire;
        int n = 0;
        e = ev[order[i]];
        while (!dds.io_update && n < 3000) begin @(negedge clk); n++; end
        if (c0 < 0) c0 = cycle;
        tfire = cycle - c0;
        check(tfire == due, $sformatf("edge %0d at %0d, due %0d", i, tfire, due));
        @(negedge clk);   // model has taken the update
        if (e.spi) check(u_dds.act_ftw == e.ftw && u_dds.act_asf == e.asf,
                         $sformatf("edge %0d ftw %h asf %h", i, u_dds.act_ftw, u_dds.act_asf));
        check(u_dds.act_pow == exp_pow(u_dds.act_ftw, tfire, e.pow),
              $sformatf("edge %0d pow %h exp %h", i, u_dds.act_pow, exp_pow(u_dds.act_ftw, tfire, e.pow)));
        check(ttl == e.ttl, "ttl");
        if (!e.shaped) check(vga_dac == e.vga, "vga step");
        else begin
          repeat (128 * 2 - 1) @(negedge clk);
          check(vga_dac == e.vga && !status.ramping, $sformatf("edge %0d vga %0d exp %0d", i, vga_dac, e.vga));
        end
        due += e.wt;
      end
    end
    repeat (400) @(negedge clk);
    check(status.done && status.late_count == 0 && status.edge_count == 6, "done, no late edges");
    check(u_dds.spi_writes == 4 && u_dds.bad_spi == 0, $sformatf("spi writes %0d", u_dds.spi_writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
