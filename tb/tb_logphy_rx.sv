// tb_logphy_rx -- checks the receive logical PHY at its default size
// (64 lanes, 16 unit intervals per clock).
//
// The testbench plays the 64 lane receivers: it scrambles random beats with a
// bit-serial LFSR model per lane (seed (0x1DBFBC ^ l*0x2F1A3) | 1, lane l
// carrying beat bytes l and 64+l) and offers the lane words with random
// skew: some lanes get their word a clock or two before the others. Checks:
// a beat is taken (lane_pop) only when every lane has its word, the
// descrambled beat comes out one clock after it is taken, equal to the beat
// sent, and beats come out in order.
`timescale 1ns/1ps
module tb_logphy_rx;
  localparam int N = 64;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic              lane_valid [N];
  logic [15:0]       lane_word  [N];
  logic              lane_pop, beat_valid;
  logic [N*16-1:0]   beat_data;

  logphy_rx dut (.clk, .rst_n, .lane_valid, .lane_word, .lane_pop, .beat_valid, .beat_data);

  logic [23:1] lfsr [N];
  function automatic logic [15:0] next_key(input int l);
    logic [15:0] k;
    for (int u = 0; u < 16; u++) begin
      logic fb;
      k[u] = lfsr[l][23];
      fb = lfsr[l][23] ^ lfsr[l][21] ^ lfsr[l][16] ^ lfsr[l][8] ^ lfsr[l][5] ^ lfsr[l][2];
      lfsr[l] = {lfsr[l][22:1], fb};
    end
    return k;
  endfunction

  logic [N*16-1:0] sent[$];
  int got = 0;

  always @(posedge clk) begin
    if (beat_valid) begin
      got++;
      if (sent.size() == 0) check(0, "beat out of nowhere");
      else begin
        logic [N*16-1:0] e;
        e = sent.pop_front();
        check(beat_data == e, $sformatf("beat %0d differs", got));
      end
    end
  end

  initial begin
    logic [N*16-1:0] d;
    logic [15:0] w [N];
    int delay [N];
    for (int l = 0; l < N; l++) begin lane_valid[l] = 0; lane_word[l] = '0; end
    for (int l = 0; l < N; l++) lfsr[l] = (23'h1DBFBC ^ 23'(l * 32'h0002F1A3)) | 23'h1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int maxd;
      for (int i = 0; i < N*16/32; i++) d[i*32 +: 32] = $urandom;
      for (int l = 0; l < N; l++) w[l] = {d[(N + l)*8 +: 8], d[l*8 +: 8]} ^ next_key(l);
      sent.push_back(d);
      maxd = 0;
      for (int l = 0; l < N; l++) begin
        delay[l] = (n % 4 == 0) ? $urandom % 3 : 0;
        if (delay[l] > maxd) maxd = delay[l];
      end
      // offer the words lane by lane as their delays expire
      for (int c = 0; c <= maxd; c++) begin
        #0.1;
        for (int l = 0; l < N; l++)
          if (delay[l] <= c) begin lane_valid[l] = 1; lane_word[l] = w[l]; end
        #0.1;
        check(lane_pop == (c == maxd), "lane_pop only when all lanes hold a word");
        @(posedge clk);
      end
      #0.1;
      for (int l = 0; l < N; l++) lane_valid[l] = 0;
      if (n % 3 == 0) @(posedge clk);
    end
    repeat (3) @(posedge clk);
    check(got == 200, $sformatf("%0d of 200 beats delivered", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
