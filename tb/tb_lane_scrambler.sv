// tb_lane_scrambler -- checks the per-lane scrambler.
//
// A scrambler and a descrambler with the same seed are chained, as on the two
// dies. Random words are sent with random gaps (adv low). Checks: the
// scrambled word is the data XOR the next 16 output bits of a bit-serial
// model of the LFSR x^23+x^21+x^16+x^8+x^5+x^2+1 kept here (bit u of the word
// is unit interval u); the key holds while adv is low; the descrambler gives
// back the data; an all-zero input gives a non-constant, balanced output.
`timescale 1ns/1ps
module tb_lane_scrambler;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam logic [22:0] SEED = 23'h0BEEF1;

  logic        adv;
  logic [15:0] din, mid, dout;

  lane_scrambler #(.UI_PER_CLK(16), .SEED(SEED)) u_scr   (.clk, .rst_n, .adv, .din(din), .dout(mid));
  lane_scrambler #(.UI_PER_CLK(16), .SEED(SEED)) u_descr (.clk, .rst_n, .adv, .din(mid), .dout(dout));

  // bit-serial reference: register bits numbered 1..23, output is bit 23,
  // feedback taps at the polynomial's exponents
  logic [23:1] lfsr;
  function automatic logic ref_bit();
    logic o, fb;
    o  = lfsr[23];
    fb = lfsr[23] ^ lfsr[21] ^ lfsr[16] ^ lfsr[8] ^ lfsr[5] ^ lfsr[2];
    lfsr = {lfsr[22:1], fb};
    return o;
  endfunction

  initial begin
    logic [15:0] key, d;
    int ones, changes, sent;
    logic [15:0] prev;
    adv = 0; din = '0;
    lfsr = SEED;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ones = 0; changes = 0; sent = 0; prev = '0;
    for (int n = 0; n < 600; n++) begin
      bit go;
      go = ($urandom % 4) != 0;
      d  = (n < 200) ? 16'h0000 : 16'($urandom);
      #0.1 adv = go; din = d;
      #0.1;
      begin
        // the key in use now is the next 16 reference bits, consumed only
        // when the word is sent
        logic [23:1] save;
        save = lfsr;
        for (int u = 0; u < 16; u++) key[u] = ref_bit();
        if (!go) lfsr = save;
      end
      check(mid == (d ^ key), $sformatf("word %0d: scrambled %h, expected %h", n, mid, d ^ key));
      check(dout == d, $sformatf("word %0d: descrambled %h, sent %h", n, dout, d));
      if (n < 200 && go) begin
        ones += $countones(mid);
        sent++;
        if (mid != prev) changes++;
        prev = mid;
      end
      @(posedge clk);
    end
    check(changes > 100, "scrambled zeros are not constant");
    check(ones * 10 > sent * 16 * 4 && ones * 10 < sent * 16 * 6,
          $sformatf("scrambled zeros are balanced (%0d ones in %0d bits)", ones, sent * 16));
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
