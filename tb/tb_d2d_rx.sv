// tb_d2d_rx -- checks the receive die-to-die adapter at the x64 beat width
// (128-byte beats, two per flit).
//
// The testbench plays the far transmitter: it builds flits (random body,
// 2-byte header, CRC by long division here) and sends them as beats. The
// sequence: a NOP flit announcing CXL.Mem, a run of CXL.Mem flits, a flit
// with a corrupted bit, the flits after it (which must be dropped), a replay
// from the lost flit, a duplicate, and a NOP flit carrying an ack. Checks:
// intact in-order flits are delivered one clock after their last beat and
// unchanged; the CRC error is counted and raises a nak for the local
// transmitter; flits are dropped until the expected sequence number comes
// back; the parked type after the error is NOP; the far side's ack fields
// come out on ra_*; la_seq follows the last flit taken.
`timescale 1ns/1ps
module tb_d2d_rx;
  import ucie_mem_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic              beat_valid, fdi_valid, la_valid, la_nak, la_owed, la_sent, ra_valid, ra_nak;
  logic [1023:0]     beat_data;
  logic [FLIT_W-1:0] fdi_flit;
  logic [SEQ_W-1:0]  la_seq, ra_seq;
  logic [31:0]       crc_errors, dropped, nop_flits;

  d2d_rx dut (.*);

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

  logic [FLIT_W-1:0] body [64];
  logic [FLIT_W-1:0] exp_q[$];
  int delivered = 0, ra_seen = 0;
  logic [SEQ_W-1:0] last_ra;

  always @(posedge clk) begin
    if (fdi_valid) begin
      delivered++;
      if (exp_q.size() == 0) check(0, "unexpected delivery");
      else check(fdi_flit[0 +: 250*8] == exp_q.pop_front()[0 +: 250*8], $sformatf("flit %0d body", delivered));
    end
    if (ra_valid) begin ra_seen++; last_ra = ra_seq; end
  end

  // send one flit; corrupt flips one bit after the CRC is computed
  task automatic send(input logic [FLIT_W-1:0] b, input prot_id_e next, input int seq,
                      input bit ackv, input int ackseq, input bit corrupt);
    logic [FLIT_W-1:0] f;
    flit_hdr_t h;
    f = b;
    h.prot_next = next; h.seq = SEQ_W'(seq); h.ack_vld = ackv; h.nak = 1'b0; h.ack_seq = SEQ_W'(ackseq);
    f[HDR_OFF*8 +: 16] = h;
    f[CRC_OFF*8 +: 16] = ref_crc(f);
    if (corrupt) f[777] = ~f[777];
    for (int k = 0; k < 2; k++) begin
      #0.1 beat_valid = 1; beat_data = f[k*1024 +: 1024];
      @(posedge clk);
    end
    #0.1 beat_valid = 0;
  endtask

  function automatic logic [FLIT_W-1:0] rnd_flit();
    logic [FLIT_W-1:0] f;
    for (int i = 0; i < FLIT_W/32; i++) f[i*32 +: 32] = $urandom;
    return f;
  endfunction

  initial begin
    beat_valid = 0; beat_data = '0; la_sent = 0;
    for (int i = 0; i < 64; i++) body[i] = rnd_flit();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // a CXL.Mem flit sent before any NOP flit is taken as NOP (parked type)
    send(body[0], PROT_NOP, 0, 0, 0, 0);
    @(posedge clk); #0.2;
    check(delivered == 0 && nop_flits == 1, "first flit after reset is treated as NOP");

    // NOP announcing CXL.Mem, then flits 0..5
    send('0, PROT_CXLMEM, 63, 1, 20, 0);
    for (int s = 0; s < 6; s++) begin
      exp_q.push_back(body[s]);
      send(body[s], PROT_CXLMEM, s, 1, 21 + s, 0);
      if (s == 0) #0.2 check(fdi_valid, "flit delivered one clock after its last beat");
    end
    @(posedge clk); #0.2;
    check(delivered == 6, $sformatf("six flits delivered (%0d)", delivered));
    check(la_valid && la_seq == 5 && la_owed, "ack state follows the last flit taken");
    check(ra_seen >= 6 && last_ra == 26, "far side's ack passed on");

    // acknowledge to the local transmitter
    #0.1 la_sent = 1; @(posedge clk); #0.1 la_sent = 0;
    check(!la_owed, "la_sent clears the owed ack");

    // flit 6 corrupted, 7 and 8 follow: all lost, nak raised
    send(body[6], PROT_CXLMEM, 6, 1, 27, 1);
    send(body[7], PROT_CXLMEM, 7, 1, 27, 0);
    send(body[8], PROT_CXLMEM, 8, 1, 27, 0);
    @(posedge clk); #0.2;
    check(crc_errors == 1, "CRC error counted");
    check(la_nak && la_seq == 5, "nak with the last good sequence number");
    check(delivered == 6, "nothing delivered after the error");
    check(nop_flits == 3, "flit after the error is taken as NOP (type parked)");
    check(dropped == 1, "out-of-order flit dropped");
    #0.1 la_sent = 1; @(posedge clk); #0.1 la_sent = 0;

    // replay 6..8, then a duplicate of 8, then flit 9
    for (int s = 6; s < 9; s++) begin
      exp_q.push_back(body[s]);
      send(body[s], PROT_CXLMEM, s, 1, 30, 0);
    end
    send(body[8], PROT_CXLMEM, 8, 1, 30, 0);
    exp_q.push_back(body[9]);
    send(body[9], PROT_NOP, 9, 1, 30, 0);
    // trailing NOP flit carrying an ack only
    send('0, PROT_NOP, 9, 1, 33, 0);
    repeat (2) @(posedge clk); #0.2;
    check(delivered == 10, $sformatf("replayed flits delivered (%0d)", delivered));
    check(dropped == 2, "duplicate dropped");
    check(last_ra == 33 && nop_flits == 4, "NOP flit's ack used, flit not delivered");
    check(exp_q.size() == 0, "all expected flits delivered");
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
