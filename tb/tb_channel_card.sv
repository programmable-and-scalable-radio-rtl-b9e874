// tb_channel_card: programs a card only through its serial command lane. The same short
// sequence is broadcast to all four channels (all-channel bit), then channel 3 gets a
// different frequency by a channel-addressed word, and a word for another slot must be
// ignored. A pulse on the trigger lane must start all four channels on the same clock,
// and the four DDS models must end with the expected frequencies and phases.
module tb_channel_card;
  import rf_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] slot_id = 4'd2;
  link_t lane = '0;
  logic tclk_a = 0;
  dds_pins_t [3:0] dds;
  logic [3:0][13:0] vga_dac;
  logic [3:0] ttl;
  ch_status_t [3:0] status;
  longint cycle = 0;
  int checks = 0, failures = 0;

  channel_card #(.NUM_CH(4), .SHAPE_LEN(8)) dut (.*);
  for (genvar c = 0; c < 4; c++) begin : g_m
    ad9910_model u_m (.clk, .pins(dds[c]), .cycle);
  end
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

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

  task automatic wr(input logic [3:0] slot, input bit all, input int ch, input mem_sel_e sel,
                    input int addr, input logic [31:0] data);
    send(mk_word(slot, all, 2'(ch), sel, 7'(addr), data));
  endtask

  longint upd [4][$];
  for (genvar c = 0; c < 4; c++) begin : g_rec
    always @(posedge clk) if (rst_n && dds[c].io_update) upd[c].push_back(cycle);
  end

  localparam logic [31:0] F0 = 32'h0A3D_70A4, F3 = 32'h1234_5678;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 4; w++) begin
      wr(4'd2, 1, 0, SEL_EVT, 0 + w, evt_word(w, F0, 14'h3FFF, 16'h0, 200, 14'd5000, 0, 1, 1));
      wr(4'd2, 1, 0, SEL_EVT, 4 + w, evt_word(w, F0, 14'h3FFF, 16'h0, 50, 14'd0, 0, 0, 0));
    end
    wr(4'd2, 1, 0, SEL_SEQ, 0, seq_word(OP_PLAY, 0, 0));
    wr(4'd2, 1, 0, SEL_SEQ, 1, seq_word(OP_PLAY, 0, 1));
    wr(4'd2, 1, 0, SEL_SEQ, 2, seq_word(OP_END, 0, 0));
    wr(4'd2, 0, 3, SEL_EVT, 0, F3);                        // channel 3: other frequency
    wr(4'd5, 1, 0, SEL_EVT, 0, 32'hFFFF_FFFF);             // other slot: ignored
    wr(4'hF, 1, 0, SEL_CTRL, 0, 32'h1);                    // broadcast arm
    repeat (200) @(negedge clk);
    for (int c = 0; c < 4; c++) check(status[c].armed && !status[c].running, "armed");
    @(negedge clk); tclk_a = 1; repeat (4) @(negedge clk); tclk_a = 0;
    repeat (600) @(negedge clk);
    for (int c = 0; c < 4; c++) begin
      check(upd[c].size() == 2, $sformatf("ch %0d updates %0d", c, upd[c].size()));
      if (upd[c].size() == 2) begin
        check(upd[c][0] == upd[0][0], $sformatf("ch %0d starts with ch 0", c));
        check(upd[c][1] - upd[c][0] == 200, "second edge 200 clocks later");
      end
      check(status[c].done && status[c].late_count == 0, "done");
    end
    check(g_m[0].u_m.act_ftw == F0 && g_m[1].u_m.act_ftw == F0 && g_m[2].u_m.act_ftw == F0, "ftw ch0-2");
    check(g_m[3].u_m.act_ftw == F3, "ch3 own frequency");
    check(g_m[3].u_m.act_pow == exp_pow(F3, 200, 16'h0), "ch3 phase from its own frequency");
    check(g_m[0].u_m.act_pow == exp_pow(F0, 200, 16'h0), "ch0 phase");
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
