// tb_lane_tx -- checks one lane serializer.
//
// The word clock runs at 2 ns and the unit-interval clock at 1/16 of that,
// with an arbitrary phase between them, as the 2 GHz logic clock and the
// 32 GT/s lane clock. Random words are written in bursts (one per word clock)
// and gaps. The serial output is sampled on the falling edge of the
// unit-interval clock; each run of 16 unit intervals with ser_valid high must
// be one word, bit 0 first, in order. Checks: every word arrives intact; a
// burst leaves the lane as one unbroken run of valid unit intervals (the lane
// keeps up with one word per clock); the lane idles at 0 between bursts; the
// FIFO never fills at this rate.
`timescale 1ps/1ps
module tb_lane_tx;
  int checks = 0, failures = 0;
  logic clk = 0, clk_ui = 0, rst_n = 0;
  always #1000 clk = ~clk;
  initial begin #37; forever #62.5 clk_ui = ~clk_ui; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        word_valid, fifo_full, ser_data, ser_valid;
  logic [15:0] word;

  lane_tx dut (.clk, .rst_n, .word_valid, .word, .fifo_full, .clk_ui, .ser_data, .ser_valid);

  logic [15:0] sent[$];
  int got = 0, runs = 0, ui = 0, idle_ones = 0, full_seen = 0;
  logic [15:0] sh;
  bit prev_valid = 0;

  always @(negedge clk_ui) if (rst_n) begin
    if (ser_valid) begin
      sh[ui] = ser_data;
      ui++;
      if (!prev_valid) runs++;
      if (ui == 16) begin
        logic [15:0] e;
        ui = 0;
        got++;
        e = (sent.size() > 0) ? sent.pop_front() : 16'hxxxx;
        check(sh == e, $sformatf("word %0d: %h, expected %h", got, sh, e));
      end
    end else begin
      if (ser_data) idle_ones++;
      if (prev_valid && ui != 0) check(0, "valid run ended mid-word");
    end
    prev_valid = ser_valid;
  end

  always @(posedge clk) if (rst_n && fifo_full) full_seen++;

  initial begin
    word_valid = 0; word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int b = 0; b < 20; b++) begin
      int len;
      len = 1 + $urandom % 12;
      for (int i = 0; i < len; i++) begin
        logic [15:0] w;
        w = 16'($urandom);
        #10 word_valid = 1; word = w;
        sent.push_back(w);
        @(posedge clk);
      end
      #10 word_valid = 0;
      repeat (4 + $urandom % 4) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    check(sent.size() == 0, $sformatf("%0d words not sent", sent.size()));
    check(runs == 20, $sformatf("each burst is one unbroken run (%0d runs for 20 bursts)", runs));
    check(idle_ones == 0, "idle lane stays at 0");
    check(full_seen == 0, "FIFO never full at one word per clock");
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
