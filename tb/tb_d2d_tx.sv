// tb_d2d_tx -- checks the transmit die-to-die adapter at the x64 beat width
// (128-byte beats, two per flit).
//
// The testbench feeds random protocol flits, plays the far receiver's acks
// and naks, and takes apart every flit leaving on the beat interface. The
// type of each flit is known from the header of the flit before (the first
// flit after reset is a NOP flit). Checks: every flit's CRC equals a
// reference computed here by long division; CXL.Mem flits carry the protocol
// flit's bytes 0..249 unchanged and consecutive sequence numbers; after a
// nak, the flits after the nak'ed sequence number are sent again in order
// before any new flit; with no acks the adapter stops after 16 outstanding
// flits; the local ack state appears in the header; back-to-back flits leave
// on consecutive clocks (two clocks per 256-byte flit).
`timescale 1ns/1ps
module tb_d2d_tx;
  import ucie_mem_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic              fdi_valid, fdi_ready, la_valid, la_nak, la_owed, la_sent;
  logic              ra_valid, ra_nak, beat_valid, replaying;
  logic [FLIT_W-1:0] fdi_flit;
  logic [SEQ_W-1:0]  la_seq, ra_seq;
  logic [1023:0]     beat_data;

  d2d_tx dut (.*);

  function automatic logic [15:0] ref_crc(input logic [2047:0] flit);
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
      if (r[16]) r = r ^ 17'h1F053;
    end
    return r[15:0];
  endfunction

  // flits offered, by sequence number
  logic [FLIT_W-1:0] by_seq [64];
  int next_new = 0;                 // sequence number of the next new flit
  int exp_seq[$];                   // expected sequence of CXL.Mem flits
  int n_nop = 0, n_mem = 0, n_bad = 0, gaps_in_burst = 0;

  // beat monitor
  logic [FLIT_W-1:0] asm_f;
  int  bc = 0;
  prot_id_e cur_type = PROT_NOP;
  always @(posedge clk) begin
    if (!rst_n) bc = 0;
    else if (beat_valid) begin
      asm_f[bc*1024 +: 1024] = beat_data;
      bc++;
      if (bc == 2) begin
        flit_hdr_t h;
        bc = 0;
        h  = asm_f[HDR_OFF*8 +: 16];
        check(asm_f[CRC_OFF*8 +: 16] == ref_crc(asm_f), "CRC of flit");
        check(h.ack_vld == la_valid && h.ack_seq == la_seq && h.nak == la_nak, "local ack state in header");
        if (cur_type == PROT_CXLMEM) begin
          n_mem++;
          if (exp_seq.size() == 0) begin check(0, "unexpected CXL.Mem flit"); end
          else begin
            int s;
            s = exp_seq.pop_front();
            check(h.seq == SEQ_W'(s), $sformatf("sequence %0d, expected %0d", h.seq, s));
            check(asm_f[0 +: 250*8] == by_seq[s % 64][0 +: 250*8], $sformatf("body of flit %0d", s));
          end
        end else n_nop++;
        cur_type = prot_id_e'(h.prot_next);
      end
    end else if (bc == 1) check(0, "flit interrupted between beats");
  end

  // new flits accepted by the adapter get the next sequence number
  always @(posedge clk) begin
    if (rst_n && fdi_valid && fdi_ready) begin
      by_seq[next_new % 64] = fdi_flit;
      exp_seq.push_back(next_new);
      next_new++;
    end
  end

  function automatic logic [FLIT_W-1:0] rnd_flit();
    logic [FLIT_W-1:0] f;
    for (int i = 0; i < FLIT_W/32; i++) f[i*32 +: 32] = $urandom;
    return f;
  endfunction

  task automatic ack(input bit nak, input int s);
    #0.1 ra_valid = 1; ra_nak = nak; ra_seq = SEQ_W'(s);
    @(posedge clk);
    #0.1 ra_valid = 0;
    if (nak) for (int q = s + 1; q < next_new; q++) exp_seq.push_back(q);
  endtask

  // offer n new flits, back to back
  task automatic offer(input int n);
    for (int i = 0; i < n; i++) begin
      #0.1 fdi_valid = 1; fdi_flit = rnd_flit();
      @(posedge clk);
      while (!fdi_ready) @(posedge clk);
    end
    #0.1 fdi_valid = 0;
  endtask

  initial begin
    int busy;
    fdi_valid = 0; fdi_flit = '0; la_valid = 0; la_seq = '0; la_nak = 0; la_owed = 0;
    ra_valid = 0; ra_nak = 0; ra_seq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(!beat_valid, "lanes idle with nothing to send");

    // one flit: NOP flit announcing CXL.Mem, then the flit
    la_valid = 1; la_seq = 6'd9;
    offer(1);
    repeat (8) @(posedge clk);
    check(n_nop == 1 && n_mem == 1, $sformatf("NOP then CXL.Mem (%0d, %0d)", n_nop, n_mem));

    // a burst of 10: flits leave on consecutive clocks
    fork
      offer(10);
      begin
        busy = 0;
        repeat (30) begin @(posedge clk); if (beat_valid) busy++; end
      end
    join
    check(busy == 22, $sformatf("NOP + 10 flits in 22 consecutive beats (%0d)", busy));
    ack(0, 10);

    // no acks: the adapter stops after 16 outstanding flits
    fork
      offer(20);
      begin
        repeat (60) @(posedge clk);
        check(next_new == 11 + 16, $sformatf("stopped after 16 outstanding (%0d)", next_new - 11));
        ack(0, 20);
      end
    join
    repeat (20) @(posedge clk);
    ack(0, next_new - 1);

    // nak in the middle of a stream: replay before new flits
    fork
      offer(12);
      begin
        repeat (14) @(posedge clk);
        ack(1, next_new - 5);
      end
    join
    repeat (40) @(posedge clk);
    ack(0, next_new - 1);
    repeat (10) @(posedge clk);
    check(exp_seq.size() == 0, $sformatf("%0d flits not sent", exp_seq.size()));
    $display("NOP flits %0d, CXL.Mem flits %0d", n_nop, n_mem);
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
