// tb_flit_crc16 -- checks the beat-serial flit CRC.
//
// Random 256-byte flits are fed through two CRC units, one with the default
// 128-byte beat (2 beats per flit, the x64 module) and one with 32-byte beats
// (8 beats), with idle clocks between beats. The CRC of the last beat must
// equal a reference worked out here by plain polynomial long division of the
// flit's bytes 0..253 (bit stream taken byte 0 first, most significant bit
// first; the first 16 bits inverted for the all-ones preset; 16 zero bits
// appended) by x^16+x^15+x^14+x^13+x^12+x^6+x^4+x+1. Also checks that
// every single-bit error in a flit changes the CRC, for a sample of
// positions, and that the CRC bytes themselves are not covered.
`timescale 1ns/1ps
module tb_flit_crc16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic            a_valid, a_first, a_last;
  logic [1023:0]   a_data;
  logic [15:0]     a_crc;
  logic            b_valid, b_first, b_last;
  logic [255:0]    b_data;
  logic [15:0]     b_crc;

  flit_crc16 #(.BEAT_BYTES(128)) u_a (.clk, .rst_n, .in_valid(a_valid), .in_first(a_first),
                                      .in_last(a_last), .in_data(a_data), .crc(a_crc));
  flit_crc16 #(.BEAT_BYTES(32))  u_b (.clk, .rst_n, .in_valid(b_valid), .in_first(b_first),
                                      .in_last(b_last), .in_data(b_data), .crc(b_crc));

  // reference: long division over the message bit stream
  function automatic logic [15:0] ref_crc(input logic [2047:0] flit);
    localparam logic [16:0] G = 17'h1F053;
    bit stream[];
    logic [16:0] r;
    stream = new[254*8 + 16];
    for (int i = 0; i < 254; i++)
      for (int b = 0; b < 8; b++) stream[i*8 + b] = flit[i*8 + 7 - b];
    for (int i = 0; i < 16; i++) stream[i] = ~stream[i];
    for (int i = 254*8; i < 254*8 + 16; i++) stream[i] = 1'b0;
    r = '0;
    foreach (stream[i]) begin
      r = {r[15:0], stream[i]};
      if (r[16]) r = r ^ G;
    end
    return r[15:0];
  endfunction

  function automatic logic [2047:0] rnd_flit();
    logic [2047:0] f;
    for (int i = 0; i < 64; i++) f[i*32 +: 32] = $urandom;
    return f;
  endfunction

  // run one flit through both units; returns the two CRCs
  task automatic run(input logic [2047:0] f, input bit gaps, output logic [15:0] ca, output logic [15:0] cb);
    fork
      for (int k = 0; k < 2; k++) begin
        #0.1 a_valid = 1; a_first = (k == 0); a_last = (k == 1); a_data = f[k*1024 +: 1024];
        if (k == 1) #0.1 ca = a_crc;
        @(posedge clk);
        #0.1 a_valid = 0;
        if (gaps) repeat ($urandom % 3) @(posedge clk);
      end
      for (int k = 0; k < 8; k++) begin
        #0.1 b_valid = 1; b_first = (k == 0); b_last = (k == 7); b_data = f[k*256 +: 256];
        if (k == 7) #0.1 cb = b_crc;
        @(posedge clk);
        #0.1 b_valid = 0;
        if (gaps) repeat ($urandom % 3) @(posedge clk);
      end
    join
  endtask

  initial begin
    logic [2047:0] f, g;
    logic [15:0]   ca, cb, r, ca2, cb2;
    a_valid = 0; a_first = 0; a_last = 0; a_data = '0;
    b_valid = 0; b_first = 0; b_last = 0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // all-zero flit and random flits against the reference
    for (int n = 0; n < 40; n++) begin
      f = (n == 0) ? '0 : rnd_flit();
      r = ref_crc(f);
      run(f, n % 2 == 1, ca, cb);
      check(ca == r, $sformatf("flit %0d: 2-beat CRC %h, reference %h", n, ca, r));
      check(cb == r, $sformatf("flit %0d: 8-beat CRC %h, reference %h", n, cb, r));
    end

    // the CRC field itself is not covered
    f = rnd_flit();
    run(f, 0, ca, cb);
    g = f; g[254*8 +: 16] = ~g[254*8 +: 16];
    run(g, 0, ca2, cb2);
    check(ca == ca2 && cb == cb2, "bytes 254..255 are not covered");

    // single-bit errors anywhere in bytes 0..253 are detected
    for (int n = 0; n < 40; n++) begin
      int bitpos;
      bitpos = (n == 0) ? 0 : (n == 1) ? 254*8 - 1 : $urandom % (254*8);
      g = f; g[bitpos] = ~g[bitpos];
      run(g, 0, ca2, cb2);
      check(ca2 != ca && cb2 != cb, $sformatf("bit %0d flip not detected", bitpos));
    end

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
