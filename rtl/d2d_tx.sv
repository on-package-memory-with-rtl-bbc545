// d2d_tx -- transmit half of the die-to-die (D2D) adapter.
//
// Takes whole flits from the protocol layer (FDI side) and sends them as
// FLIT_BYTES/BEAT_BYTES beats of BEAT_BYTES (= 2N) bytes, one beat per clock,
// to the logical PHY (RDI side). For every flit it
//   * arbitrates (arb/mux) between a replay from the retry buffer, a new
//     protocol flit and a NOP flit;
//   * keeps new protocol flits in the retry buffer under their sequence
//     number until acknowledged;
//   * writes the 2-byte flit header after the arbitration, in the last beat:
//     the protocol identifier of the NEXT flit, this flit's sequence number
//     and the ack/nak state reported by the local receiver (d2d_rx);
//   * writes the CRC into bytes 254..255, computed beat by beat.
//
// Protocol identifier rule: the receiver parks the identifier at NOP after
// reset and learns the type of each flit from the header of the one before.
// So the type of a flit is committed while the previous flit's last beat is
// sent: CXL.Mem if a replay or a new flit is ready then, NOP otherwise. When
// NOP was announced and work arrives, one NOP flit (announcing CXL.Mem) goes
// first. NOP flits also carry acks when the link is otherwise idle; they do
// not use a sequence number (their sequence field repeats the last one used,
// so a receiver that mistakes one for a protocol flit drops it as a
// duplicate) and are not acknowledged.
//
// Ports: fdi_* valid/ready flit input; la_* the local receiver's ack state
// (la_sent pulses when a header carrying it has gone out); ra_* ack/nak
// received from the far side; beat_* the RDI output, valid only while a flit
// is being sent (the lanes idle otherwise).
//
// Follows the paper: HDR after arb/mux, protocol identifier for the next
// flit, retry buffer, CRC over the whole flit. Own choices: HDR bit layout,
// go-back-N retry, ack carried in every header, the NOP rules above.
module d2d_tx
  import ucie_mem_pkg::*;
#(
  parameter int BEAT_BYTES = 128,
  parameter int RB_DEPTH   = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // FDI: flits from the protocol layer
  input  logic                    fdi_valid,
  output logic                    fdi_ready,
  input  logic [FLIT_W-1:0]       fdi_flit,
  // ack state of the local receiver, to be reported
  input  logic                    la_valid,
  input  logic [SEQ_W-1:0]        la_seq,
  input  logic                    la_nak,
  input  logic                    la_owed,
  output logic                    la_sent,
  // ack/nak received from the far receiver
  input  logic                    ra_valid,
  input  logic                    ra_nak,
  input  logic [SEQ_W-1:0]        ra_seq,
  // RDI: beats to the logical PHY
  output logic                    beat_valid,
  output logic [BEAT_BYTES*8-1:0] beat_data,
  // status
  output logic                    replaying
);
  localparam int NB     = FLIT_BYTES / BEAT_BYTES;
  localparam int BEAT_W = BEAT_BYTES * 8;
  localparam int BA     = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [1:0] {SRC_NONE, SRC_NOP, SRC_NEW, SRC_REPLAY} src_e;

  // retry buffer
  logic              rb_push, rb_full, rb_rvalid, rb_pop;
  logic [SEQ_W-1:0]  rb_seq, rb_rseq;
  logic [FLIT_W-1:0] rb_rflit;

  retry_buffer #(.RB_DEPTH(RB_DEPTH)) u_rb (
    .clk, .rst_n,
    .push(rb_push), .push_flit(fdi_flit), .push_seq(rb_seq), .full(rb_full),
    .ack_valid(ra_valid), .ack_nak(ra_nak), .ack_seq(ra_seq),
    .replay_valid(rb_rvalid), .replay_seq(rb_rseq), .replay_flit(rb_rflit),
    .replay_pop(rb_pop), .outstanding()
  );

  logic              sending;
  logic [BA-1:0]     bc;
  logic [FLIT_W-1:0] cur_body;
  logic [SEQ_W-1:0]  cur_seq;
  prot_id_e          adv_next;     // type announced for the next flit

  // ---------------- arbitration at the start of a flit ----------------
  src_e              src;
  logic              new_ok;
  assign new_ok = fdi_valid && !rb_full && !rb_rvalid;

  always_comb begin
    src = SRC_NONE;
    if (!sending) begin
      if (adv_next == PROT_NOP) begin
        if (rb_rvalid || new_ok || la_owed || la_nak) src = SRC_NOP;
      end else begin
        if (rb_rvalid)   src = SRC_REPLAY;
        else if (new_ok) src = SRC_NEW;
      end
    end
  end

  assign fdi_ready = (src == SRC_NEW);
  assign rb_push   = (src == SRC_NEW);
  assign rb_pop    = (src == SRC_REPLAY);

  logic              act_valid;
  logic [FLIT_W-1:0] act_body;
  logic [SEQ_W-1:0]  act_seq;
  logic [BA-1:0]     act_bc;
  logic              last;

  always_comb begin
    act_valid = sending || (src != SRC_NONE);
    act_bc    = sending ? bc : '0;
    act_body  = cur_body;
    act_seq   = cur_seq;
    case (src)
      SRC_NOP:    begin act_body = '0;       act_seq = (rb_rvalid ? rb_rseq : rb_seq) - 1'b1; end
      SRC_NEW:    begin act_body = fdi_flit; act_seq = rb_seq;  end
      SRC_REPLAY: begin act_body = rb_rflit; act_seq = rb_rseq; end
      default: ;
    endcase
    last = act_valid && (act_bc == BA'(NB-1));
  end

  // ---------------- header and CRC in the last beat ----------------
  prot_id_e  next_type;
  flit_hdr_t hdr;
  assign next_type = (rb_rvalid || (fdi_valid && !rb_full)) ? PROT_CXLMEM : PROT_NOP;

  always_comb begin
    hdr.prot_next = next_type;
    hdr.seq       = act_seq;
    hdr.ack_vld   = la_valid;
    hdr.nak       = la_nak;
    hdr.ack_seq   = la_seq;
  end

  logic [FLIT_W-1:0] full_flit;
  logic [BEAT_W-1:0] beat_nocrc;
  logic [15:0]       crc;

  always_comb begin
    full_flit = act_body;
    full_flit[HDR_OFF*8 +: 16] = hdr;
    full_flit[CRC_OFF*8 +: 16] = '0;
    beat_nocrc = full_flit[act_bc*BEAT_W +: BEAT_W];
  end

  flit_crc16 #(.BEAT_BYTES(BEAT_BYTES)) u_crc (
    .clk, .rst_n,
    .in_valid(act_valid), .in_first(act_valid && act_bc == '0), .in_last(last),
    .in_data(beat_nocrc), .crc(crc)
  );

  always_comb begin
    beat_valid = act_valid;
    beat_data  = beat_nocrc;
    if (last) beat_data[BEAT_W-16 +: 16] = crc;
  end

  assign la_sent   = last;
  assign replaying = rb_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending  <= 1'b0;
      bc       <= '0;
      cur_body <= '0;
      cur_seq  <= '0;
      adv_next <= PROT_NOP;
    end else begin
      if (src != SRC_NONE) begin
        cur_body <= act_body;
        cur_seq  <= act_seq;
      end
      if (act_valid) begin
        if (last) begin
          sending  <= 1'b0;
          bc       <= '0;
          adv_next <= next_type;
        end else begin
          sending  <= 1'b1;
          bc       <= act_bc + 1'b1;
        end
      end
    end
  end

  initial assert (NB >= 2) else $error("d2d_tx needs at least two beats per flit");
  // a flit announced as CXL.Mem must find a replay or a new flit ready
  a_committed : assert property (@(posedge clk) disable iff (!rst_n)
    (!sending && adv_next == PROT_CXLMEM) |-> (rb_rvalid || new_ok));

endmodule
