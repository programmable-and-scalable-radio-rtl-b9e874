// tb_sequence_memory: writes random event records and sequence entries through the bus,
// reads them back through the sequencer ports and compares with a shadow copy; also
// checks that writes to other memories do not land here and that a read in the same
// clock as a write of the same entry returns the old value.
module tb_sequence_memory;
  import rf_pkg::*;
  logic clk = 0;
  bus_wr_t wr = '0;
  logic [6:0] seq_raddr = '0;
  logic [31:0] seq_rdata;
  logic [4:0] evt_raddr = '0;
  event_t evt_rdata;
  int checks = 0, failures = 0;
  logic [31:0] ev [32][4];
  logic [31:0] sq [128];

  sequence_memory #(.EVT_DEPTH(32), .SEQ_DEPTH(128)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic write(input mem_sel_e sel, input logic [6:0] addr, input logic [31:0] data);
    @(negedge clk);
    wr.en = 1; wr.sel = sel; wr.addr = addr; wr.data = data;
    @(negedge clk);
    wr.en = 0;
  endtask

  initial begin
    for (int e = 0; e < 32; e++) for (int w = 0; w < 4; w++) begin
      ev[e][w] = $urandom; write(SEL_EVT, 7'({e[4:0], w[1:0]}), ev[e][w]);
    end
    for (int i = 0; i < 128; i++) begin sq[i] = $urandom; write(SEL_SEQ, 7'(i), sq[i]); end
    // writes to shape / control must not change anything
    write(SEL_SHAPE, 7'd3, 32'hDEAD_BEEF);
    write(SEL_CTRL, 7'd0, 32'h1);
    for (int e = 0; e < 32; e++) begin
      @(negedge clk); evt_raddr = 5'(e);
      @(negedge clk);
      check(evt_rdata.ftw == ev[e][0], "ftw");
      check(evt_rdata.asf == ev[e][1][29:16] && evt_rdata.pow == ev[e][1][15:0], "asf/pow");
      check(evt_rdata.wait_cyc == ev[e][2], "wait");
      check(evt_rdata.vga == ev[e][3][13:0] && evt_rdata.shaped == ev[e][3][16]
            && evt_rdata.spi == ev[e][3][17] && evt_rdata.ttl == ev[e][3][18], "flags");
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); seq_raddr = 7'(i);
      @(negedge clk);
      check(seq_rdata == sq[i], $sformatf("seq %0d", i));
    end
    // read-during-write returns old data, then new
    @(negedge clk); seq_raddr = 7'd9; wr.en = 1; wr.sel = SEL_SEQ; wr.addr = 7'd9; wr.data = ~sq[9];
    @(negedge clk); wr.en = 0;
    check(seq_rdata == sq[9], "old value on collision");
    @(negedge clk);
    check(seq_rdata == ~sq[9], "new value after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
