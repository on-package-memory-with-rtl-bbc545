// tb_retry_buffer -- checks the go-back-N retry store.
//
// The adapter never pushes into a full store or during a replay (the store
// asserts both rules). A directed part fills the store (16 flits, full must rise), acknowledges
// part of it, naks in the middle and checks that exactly the flits after the
// nak come back in order with their contents, and that a stale ack is
// ignored. A random part then runs 3000 clocks of pushes, cumulative acks,
// naks (including a nak of the last acknowledged flit, which replays
// everything outstanding) and replay pops across several wraps of the 6-bit
// sequence number, against a model kept here: the model holds each flit by
// sequence number and the list of flits a replay must produce.
`timescale 1ns/1ps
module tb_retry_buffer;
  import ucie_mem_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic              push, full, ack_valid, ack_nak, replay_valid, replay_pop;
  logic [FLIT_W-1:0] push_flit, replay_flit;
  logic [SEQ_W-1:0]  push_seq, ack_seq, replay_seq;
  logic [SEQ_W:0]    outstanding;

  retry_buffer #(.RB_DEPTH(16)) dut (.*);

  // model
  logic [FLIT_W-1:0] stored [64];
  int m_base = 0, m_next = 0;       // unwrapped counts
  int m_replay[$];

  function automatic logic [FLIT_W-1:0] rnd_flit();
    logic [FLIT_W-1:0] f;
    for (int i = 0; i < FLIT_W/32; i++) f[i*32 +: 32] = $urandom;
    return f;
  endfunction

  // one clock with the given controls; model updated alongside
  task automatic step(input bit do_push, input bit do_ack, input bit nak, input int ack_abs, input bit do_pop);
    logic [FLIT_W-1:0] f;
    f = rnd_flit();
    #0.1;
    push = do_push; push_flit = f;
    ack_valid = do_ack; ack_nak = nak; ack_seq = SEQ_W'(ack_abs);
    replay_pop = do_pop;
    #0.1;
    check(push_seq == SEQ_W'(m_next), "push_seq is the next sequence number");
    check(full == (m_next - m_base >= 16), "full flag");
    check(outstanding == SEQ_W'(m_next - m_base), "outstanding count");
    check(replay_valid == (m_replay.size() > 0), $sformatf("replay_valid %0d, model %0d", replay_valid, m_replay.size()));
    if (replay_valid && m_replay.size() > 0) begin
      check(replay_seq == SEQ_W'(m_replay[0]), "replay sequence order");
      check(replay_flit == stored[m_replay[0] % 64], "replayed flit contents");
    end
    @(posedge clk);
    // model update, in the order the store applies them
    if (do_pop && m_replay.size() > 0 && !(do_ack && nak)) void'(m_replay.pop_front());
    if (do_push && !full) begin stored[m_next % 64] = f; m_next++; end
    if (do_ack) begin
      if (ack_abs >= m_base && ack_abs < m_next - (do_push && !full ? 1 : 0)) begin
        m_base = ack_abs + 1;
      end
      if (nak && ack_abs >= m_base - 1) begin
        m_replay.delete();
        for (int s = ack_abs + 1; s < m_next - (do_push && !full ? 1 : 0); s++) m_replay.push_back(s);
      end
    end
    #0.1 push = 0; ack_valid = 0; replay_pop = 0;
  endtask

  initial begin
    push = 0; push_flit = '0; ack_valid = 0; ack_nak = 0; ack_seq = '0; replay_pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // directed: fill, ack, nak, replay, stale ack
    for (int i = 0; i < 16; i++) step(1, 0, 0, 0, 0);
    #0.2 check(m_next == 16 && full, "store holds 16 flits, then full");
    step(0, 1, 0, 4, 0);
    check(outstanding == 11, "ack of 4 frees five flits");
    step(0, 1, 1, 7, 0);
    check(replay_valid && replay_seq == 8, "nak of 7 replays from 8");
    for (int i = 0; i < 8; i++) step(0, 0, 0, 0, 1);
    check(!replay_valid, "replay ends after flit 15");
    step(0, 1, 0, 2, 0);
    check(outstanding == 8, "stale ack ignored");
    step(0, 1, 0, 15, 0);
    check(outstanding == 0, "all acknowledged");

    // random: pushes only when no replay is pending (as the adapter does)
    for (int n = 0; n < 3000; n++) begin
      int r, a;
      bit do_push, do_ack, nak, do_pop;
      r = $urandom % 100;
      do_pop  = (m_replay.size() > 0) && (r < 70);
      do_push = (m_replay.size() == 0) && (r < 60);
      do_ack  = ($urandom % 4) == 0 && (m_next > m_base || ($urandom % 8) == 0);
      nak     = do_ack && (($urandom % 6) == 0);
      if (m_next > m_base) a = m_base - 1 + ($urandom % (m_next - m_base + 1));
      else                 a = m_base - 1;
      if (a < 0) begin do_ack = 0; a = 0; end
      if (nak) begin do_pop = 0; do_push = 0; end
      if (m_replay.size() > 0 || m_next - m_base >= 16) do_push = 0;
      step(do_push, do_ack, nak, a, do_pop);
    end
    check(m_next > 300, $sformatf("sequence numbers wrapped (%0d flits)", m_next));
    $display("flits pushed %0d", m_next);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
