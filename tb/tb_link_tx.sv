// tb_link_tx: checks the master-side serialiser. Sends unicast words to several slots
// and broadcast words, rebuilds each word from the lane bits, and checks the value, that
// only the addressed lanes carry a frame, the 48-clock frame length and the idle gap.
module tb_link_tx;
  import rf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic word_valid = 0, word_ready;
  logic [47:0] word = '0;
  link_t [7:0] lanes;
  int checks = 0, failures = 0;

  link_tx #(.NUM_SLOTS(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send_and_check(input logic [47:0] w);
    logic [47:0] got [8];
    int nb [8];
    int idle_after = 0;
    for (int s = 0; s < 8; s++) begin got[s] = '0; nb[s] = 0; end
    @(negedge clk);
    check(word_ready, "ready before send");
    word = w; word_valid = 1;
    @(negedge clk);
    word_valid = 0;
    for (int c = 0; c < 60; c++) begin
      for (int s = 0; s < 8; s++)
        if (lanes[s].frame) begin got[s] = {got[s][46:0], lanes[s].data}; nb[s]++; end
      if (c == 48) check(!word_ready, "gap clock after word");
      @(negedge clk);
    end
    for (int s = 0; s < 8; s++) begin
      bit addressed = (w[47:44] == 4'hF) || (w[47:44] == 4'(s));
      if (addressed) begin
        check(nb[s] == 48, $sformatf("slot %0d frame length %0d", s, nb[s]));
        check(got[s] == w, $sformatf("slot %0d word %h vs %h", s, got[s], w));
      end else begin
        check(nb[s] == 0, $sformatf("slot %0d must stay idle", s));
      end
    end
    check(word_ready, "ready after word");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send_and_check({4'd3, 44'h123_4567_89AB});
    send_and_check({4'd0, 44'hFED_CBA9_8765});
    send_and_check({4'd7, 44'h0AA_5555_AAAA});
    send_and_check({4'hF, 44'h001_0000_0001});
    for (int i = 0; i < 6; i++) send_and_check({4'($urandom_range(0, 7)), 44'({$urandom, $urandom})});
    send_and_check({4'hF, 44'({$urandom, $urandom})});
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
