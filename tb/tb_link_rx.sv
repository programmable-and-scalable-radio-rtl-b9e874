// tb_link_rx: checks the card-side deserialiser. Drives words bit by bit, checks the
// decoded fields, that words for other slots are dropped and broadcasts accepted, that
// a truncated frame is ignored, and that the write strobe comes exactly one clock after
// the last bit (8 ns at 125 MHz, below the paper's 20 ns).
module tb_link_rx;
  import rf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] slot_id = 4'd5;
  link_t lane = '0;
  bus_wr_t wr;
  int checks = 0, failures = 0;

  link_rx dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // drive nbits of w (MSB first); return the clock count from last bit to strobe
  task automatic drive(input logic [47:0] w, input int nbits, input bit expect_wr);
    int lat = -1;
    for (int i = 0; i < nbits; i++) begin
      @(negedge clk);
      lane.frame = 1; lane.data = w[47-i];
    end
    @(negedge clk);
    lane = '0;
    for (int c = 0; c < 5; c++) begin
      if (wr.en && lat < 0) lat = c;
      @(negedge clk);
    end
    if (expect_wr) begin
      check(lat == 0, $sformatf("write latency %0d clocks after last bit", lat));
    end else begin
      check(lat < 0, "no write expected");
    end
  endtask

  bus_wr_t seen;
  always @(posedge clk) if (rst_n && wr.en) seen <= wr;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      logic [3:0] slot;
      logic [43:0] body;
      bit hit;
      slot = (i % 3 == 0) ? 4'd5 : (i % 3 == 1) ? 4'hF : 4'($urandom_range(0, 14));
      body = 44'({$urandom, $urandom});
      hit  = (slot == 4'd5) || (slot == 4'hF);
      drive({slot, body}, 48, hit);
      if (hit) begin
        check(seen.all_ch == body[43] && seen.ch == body[42:41] && seen.sel == mem_sel_e'(body[40:39])
              && seen.addr == body[38:32] && seen.data == body[31:0], "decoded fields");
      end
    end
    // truncated frame then a good one
    drive({4'd5, 44'h0F0_F0F0_F0F0}, 30, 0);
    drive({4'd5, 44'h1AB_CDEF_0123}, 48, 1);
    check(seen.data == 32'hCDEF_0123, "good word after truncated frame");
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
