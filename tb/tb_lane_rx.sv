// tb_lane_rx -- checks one lane deserializer.
//
// The testbench drives the lane as the far transmitter does: data and
// ser_valid change on the rising edge of the forwarded unit-interval clock
// and are sampled by the receiver on the next rising edge, words of 16 unit
// intervals bit 0 first, in bursts separated by idle unit intervals (ser_valid
// low). The word clock runs at 1/16 of the unit-interval rate with an
// arbitrary phase. Checks: every word comes out in order in the word-clock
// domain; word_valid falls when all words are taken; no overflow in normal
// operation; and when the reader stops taking words, overflow is raised once
// the FIFO (8 words) has filled.
`timescale 1ps/1ps
module tb_lane_rx;
  int checks = 0, failures = 0;
  logic clk = 0, clk_fwd = 0, rst_n = 0;
  always #1000 clk = ~clk;
  initial begin #211; forever #62.5 clk_fwd = ~clk_fwd; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        ser_data, ser_valid, word_valid, word_pop, overflow;
  logic [15:0] word;
  bit          reader_on = 1;

  lane_rx dut (.clk_fwd, .rst_n, .ser_data, .ser_valid, .clk, .word_valid, .word, .word_pop, .overflow);

  logic [15:0] sent[$];
  int got = 0;

  assign word_pop = word_valid && reader_on;

  always @(posedge clk) begin
    if (rst_n && word_pop) begin
      logic [15:0] e;
      got++;
      e = (sent.size() > 0) ? sent.pop_front() : 16'hxxxx;
      check(word == e, $sformatf("word %0d: %h, expected %h", got, word, e));
    end
  end

  task automatic send_word(input logic [15:0] w);
    sent.push_back(w);
    for (int u = 0; u < 16; u++) begin
      @(posedge clk_fwd);
      #5 ser_valid = 1; ser_data = w[u];
    end
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(posedge clk_fwd);
      #5 ser_valid = 0; ser_data = 0;
    end
  endtask

  initial begin
    ser_data = 0; ser_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int b = 0; b < 20; b++) begin
      int len;
      len = 1 + $urandom % 10;
      for (int i = 0; i < len; i++) send_word(16'($urandom));
      idle(1 + $urandom % 40);
    end
    idle(80);
    check(sent.size() == 0, $sformatf("%0d words not delivered", sent.size()));
    check(!word_valid, "word_valid low when empty");
    check(!overflow, "no overflow while the reader keeps up");

    // stop the reader: 8 words fit, the next one overflows
    reader_on = 0;
    for (int i = 0; i < 8; i++) send_word(16'($urandom));
    idle(2);
    check(!overflow, "8 words fit in the FIFO");
    send_word(16'($urandom));
    idle(2);
    check(overflow, "overflow raised by the ninth word");
    $display("words %0d", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
