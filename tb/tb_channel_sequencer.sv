// tb_channel_sequencer: runs the sequencer against testbench models of its memories
// (one-clock read latency), of the SPI writer (busy for 146 clocks) and of the phase
// pipeline. The program uses a loop, events with and without SPI loads, and one edge
// whose SPI load cannot finish within the previous 7-clock wait. Checks for every edge:
// the edge order after loop expansion, that it fires exactly at its scheduled clock
// (or, for the late one, after it and counted in late_count), the phase word on the
// parallel port, the frequency handed to SPI, the TTL level; then done, halt and
// that a trigger without arm does nothing.
module tb_channel_sequencer;
  import rf_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic arm = 0, halt = 0, trigger = 0;
  logic [6:0] seq_raddr;
  logic [31:0] seq_rdata;
  logic [4:0] evt_raddr;
  event_t evt_rdata;
  logic spi_start, spi_busy;
  logic [31:0] spi_ftw, ph_ftw;
  logic [13:0] spi_asf;
  logic [15:0] ph_offset, ph_pow;
  logic [31:0] t_next, t;
  logic sh_start, sh_shaped;
  logic [13:0] sh_level;
  logic io_update, par_txen, ttl, armed, running, done;
  logic [15:0] par_data, late_count;
  logic [1:0] par_f;
  logic [31:0] edge_count;
  int checks = 0, failures = 0;

  channel_sequencer #(.SEQ_AW(7), .EVT_AW(5)) dut (.*);
  always #5 clk = ~clk;

  // memory and peripheral models
  event_t      evts [32];
  logic [31:0] seqm [128];
  always_ff @(posedge clk) begin
    seq_rdata <= seqm[seq_raddr];
    evt_rdata <= evts[evt_raddr];
  end
  int spi_cnt = 0;
  logic [31:0] spi_last_ftw = '0;
  assign spi_busy = spi_cnt != 0;
  always_ff @(posedge clk) begin
    if (spi_start) begin spi_cnt <= 146; spi_last_ftw <= spi_ftw; end
    else if (spi_cnt != 0) spi_cnt <= spi_cnt - 1;
    ph_pow <= exp_pow(ph_ftw, longint'(t_next), ph_offset);
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic set_evt(input int i, input logic [31:0] f, input logic [15:0] p,
                         input int w, input bit spi, input bit tt);
    evts[i] = '{ftw: f, asf: 14'h3FFF, pow: p, wait_cyc: 32'(w), vga: 14'(i * 100),
                shaped: 1'b0, spi: spi, ttl: tt};
  endtask

  int order [$];
  longint due [$];
  int late_idx;
  logic [31:0] cur_ftw = '0;   // frequency the DDS plays: last one loaded over SPI

  initial begin
    set_evt(0, 32'h1000_0001, 16'h0000, 400, 1, 1);
    set_evt(1, 32'h2345_6789, 16'h4000, 300, 1, 1);
    set_evt(2, 32'h2345_6789, 16'h1111, 10, 0, 0);
    set_evt(3, 32'h2345_6789, 16'h8000, 7, 0, 1);
    seqm[0] = seq_word(OP_PLAY, 0, 0);
    seqm[1] = seq_word(OP_LOOP, 3, 0);
    seqm[2] = seq_word(OP_PLAY, 0, 2);
    seqm[3] = seq_word(OP_PLAY, 0, 3);
    seqm[4] = seq_word(OP_ENDL, 0, 0);
    seqm[5] = seq_word(OP_PLAY, 0, 1);
    seqm[6] = seq_word(OP_PLAY, 0, 2);
    seqm[7] = seq_word(OP_END, 0, 0);
    order = '{0, 2, 3, 2, 3, 2, 3, 1, 2};
    late_idx = 7;
    begin
      longint tt = 0;
      foreach (order[i]) begin due.push_back(tt); tt += evts[order[i]].wait_cyc; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // trigger without arm: nothing happens
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    repeat (5) @(negedge clk);
    check(!running && !armed && edge_count == 0, "trigger ignored when not armed");
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    repeat (300) @(negedge clk);
    check(armed && !running && !io_update, "armed, waiting for trigger");
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    foreach (order[i]) begin
      int n = 0;
      if (evts[order[i]].spi) cur_ftw = evts[order[i]].ftw;
      while (!io_update && n < 2000) begin @(negedge clk); n++; end
      // io_update is registered: the edge fired at t-1
      if (i == late_idx) begin
        check(longint'(t) - 1 > due[i], $sformatf("edge %0d late as expected (t=%0d due=%0d)", i, t - 1, due[i]));
      end else begin
        check(longint'(t) - 1 == due[i], $sformatf("edge %0d fired at %0d, due %0d", i, t - 1, due[i]));
      end
      check(par_txen && par_f == 2'b01, "parallel phase write");
      check(par_data == exp_pow(cur_ftw, longint'(t) - 1, evts[order[i]].pow),
            $sformatf("edge %0d phase %h", i, par_data));
      check(ttl == evts[order[i]].ttl, "ttl");
      if (evts[order[i]].spi) check(spi_last_ftw == evts[order[i]].ftw, "spi ftw");
      @(negedge clk);
    end
    while (!done && t < 5000) @(negedge clk);
    check(done && !running, "done after last wait");
    check(t - 1 == 32'(due[8] + evts[2].wait_cyc) || t == 32'(due[8] + evts[2].wait_cyc), $sformatf("done time %0d", t));
    check(late_count == 1, $sformatf("late_count %0d", late_count));
    check(edge_count == 9, $sformatf("edge_count %0d", edge_count));
    // halt in the middle of a second run
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    repeat (200) @(negedge clk);
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    repeat (100) @(negedge clk);
    halt = 1; @(negedge clk); halt = 0;
    begin
      int n0;
      n0 = edge_count;
      repeat (1000) @(negedge clk);
      check(!armed && !running && edge_count == n0 && n0 == 1, $sformatf("halt stops the sequence %0d %0d %0d %0d", armed, running, edge_count, n0));
    end
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
