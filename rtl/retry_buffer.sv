// retry_buffer -- link-level retry store of the die-to-die adapter.
//
// Every protocol flit the adapter sends is written here under its sequence
// number and kept until the far receiver acknowledges it. An ack (ack_valid
// with ack_seq) frees every flit up to and including ack_seq. A nak carries
// the same cumulative ack and in addition starts a replay of every flit after
// ack_seq, in order; the adapter takes replayed flits through the
// replay_valid / replay_pop handshake. New flits are refused (full) while
// RB_DEPTH flits are unacknowledged.
//
// Sequence numbers are SEQ_W (6) bits and wrap; RB_DEPTH must be at most half
// the sequence space so that a stale ack can be recognised and ignored.
//
// Timing: push, ack and pop take effect at the next clock edge; replay_flit is
// read combinationally from the store at replay_seq.
//
// Link-level retry with a retry buffer follows the UCIe adapter the design
// uses; the go-back-N policy, cumulative acks and the depth are this design's
// choices.
module retry_buffer
  import ucie_mem_pkg::*;
#(
  parameter int RB_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // new flit
  input  logic              push,
  input  logic [FLIT_W-1:0] push_flit,
  output logic [SEQ_W-1:0]  push_seq,     // sequence number the pushed flit gets
  output logic              full,
  // acknowledgements from the far receiver
  input  logic              ack_valid,
  input  logic              ack_nak,
  input  logic [SEQ_W-1:0]  ack_seq,
  // replay
  output logic              replay_valid,
  output logic [SEQ_W-1:0]  replay_seq,
  output logic [FLIT_W-1:0] replay_flit,
  input  logic              replay_pop,
  output logic [SEQ_W:0]    outstanding
);
  localparam int RA = $clog2(RB_DEPTH);

  logic [FLIT_W-1:0] mem [RB_DEPTH];
  logic [SEQ_W-1:0]  base, nxt, rpl;
  logic              replaying;

  logic [SEQ_W-1:0] win, ack_off;
  logic             ack_in_win;
  assign win        = nxt - base;
  assign ack_off    = ack_seq - base;
  assign ack_in_win = ack_valid && (ack_off < win);

  assign outstanding  = {1'b0, win};
  assign full         = (win >= SEQ_W'(RB_DEPTH));
  assign push_seq     = nxt;
  assign replay_valid = replaying && (rpl != nxt);
  assign replay_seq   = rpl;
  assign replay_flit  = mem[rpl[RA-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[nxt[RA-1:0]] <= push_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base      <= '0;
      nxt       <= '0;
      rpl       <= '0;
      replaying <= 1'b0;
    end else begin
      if (push && !full) nxt <= nxt + 1'b1;
      if (ack_valid && ack_nak && (ack_in_win || ack_seq == base - 1'b1)) begin
        // go back: resend everything after ack_seq
        if (ack_in_win) base <= ack_seq + 1'b1;
        rpl       <= ack_seq + 1'b1;
        replaying <= (ack_seq + 1'b1 != nxt);
      end else begin
        if (ack_in_win) base <= ack_seq + 1'b1;
        if (replay_pop && replay_valid) begin
          rpl <= rpl + 1'b1;
          if (rpl + 1'b1 == nxt) replaying <= 1'b0;
        end
      end
    end
  end

  a_no_push_when_full : assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_push_in_replay : assert property (@(posedge clk) disable iff (!rst_n) !(push && replay_valid));

endmodule
