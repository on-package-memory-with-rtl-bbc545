// tb_logphy_tx -- checks the transmit logical PHY at its default size
// (64 lanes, 16 unit intervals per clock).
//
// Random 128-byte beats are sent with random idle clocks. One clock after
// each beat, lane l must hold beat byte l (unit intervals 0..7) and byte
// 64+l (unit intervals 8..15), XORed with the lane's scrambler key; the keys
// come from a bit-serial LFSR model kept here per lane, with the per-lane
// seed (0x1DBFBC ^ l*0x2F1A3) | 1. lane_valid must follow beat_valid by one
// clock, and the keys must advance only on beats.
`timescale 1ns/1ps
module tb_logphy_tx;
  localparam int N = 64;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic              beat_valid, lane_valid;
  logic [N*16-1:0]   beat_data;
  logic [15:0]       lane_word [N];

  logphy_tx dut (.clk, .rst_n, .beat_valid, .beat_data, .lane_valid, .lane_word);

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

  initial begin
    logic [N*16-1:0] d;
    logic [15:0] exp_w [N];
    int beats;
    beat_valid = 0; beat_data = '0;
    for (int l = 0; l < N; l++) lfsr[l] = (23'h1DBFBC ^ 23'(l * 32'h0002F1A3)) | 23'h1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    beats = 0;
    for (int n = 0; n < 300; n++) begin
      bit go;
      go = ($urandom % 3) != 0;
      for (int i = 0; i < N*16/32; i++) d[i*32 +: 32] = $urandom;
      #0.1 beat_valid = go; beat_data = d;
      @(posedge clk);
      #0.1 beat_valid = 0;
      check(lane_valid == go, "lane_valid one clock after beat_valid");
      if (go) begin
        beats++;
        for (int l = 0; l < N; l++) begin
          exp_w[l] = {d[(N + l)*8 +: 8], d[l*8 +: 8]} ^ next_key(l);
          check(lane_word[l] == exp_w[l], $sformatf("beat %0d lane %0d: %h, expected %h", beats, l, lane_word[l], exp_w[l]));
        end
      end
    end
    $display("beats %0d", beats);
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
