// d2d_rx -- receive half of the die-to-die (D2D) adapter.
//
// Collects FLIT_BYTES/BEAT_BYTES beats from the logical PHY into a flit,
// folding each beat into the CRC as it arrives, and in the clock after the
// last beat either delivers the flit to the protocol layer (fdi_valid, one
// clock pulse, no back-pressure: the protocol layer is credit managed) or
// drops it.
//
// * CRC: a flit whose CRC (bytes 254..255, over bytes 0..253) does not match
//   is dropped; the first such error raises a NAK for the local transmitter
//   to send and starts recovery, in which flits are dropped until the
//   expected sequence number arrives intact. After a CRC error the parked
//   protocol identifier is reset to NOP, as after link training, because the
//   damaged header cannot be trusted.
// * Protocol identifier: cur_type, parked at NOP after reset, is the type of
//   the flit being received; each intact flit's header sets it for the next
//   flit. NOP flits are never delivered; only their ack fields are used.
// * Sequence: an intact CXL.Mem flit is delivered only if its sequence number
//   is the expected one; duplicates (replays of flits already taken) and
//   flits after a loss are dropped.
// * Acks: the ack/nak fields of every intact flit are passed to the local
//   transmitter (ra_*, one clock pulse). The local ack state (la_*) tells the
//   local transmitter the last sequence number taken, whether a NAK is due and
//   whether an ack is owed; la_sent clears the last two.
//
// Follows the paper: CRC check with error path to the retry logic, parked
// protocol identifier with NOP after (re)training. Own choices: header bit
// layout, go-back-N recovery, resetting the parked identifier on a CRC error.
module d2d_rx
  import ucie_mem_pkg::*;
#(
  parameter int BEAT_BYTES = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // RDI: beats from the logical PHY
  input  logic                    beat_valid,
  input  logic [BEAT_BYTES*8-1:0] beat_data,
  // FDI: intact, in-order CXL.Mem flits
  output logic                    fdi_valid,
  output logic [FLIT_W-1:0]       fdi_flit,
  // local ack state for the local transmitter
  output logic                    la_valid,
  output logic [SEQ_W-1:0]        la_seq,
  output logic                    la_nak,
  output logic                    la_owed,
  input  logic                    la_sent,
  // ack/nak from the far side
  output logic                    ra_valid,
  output logic                    ra_nak,
  output logic [SEQ_W-1:0]        ra_seq,
  // statistics
  output logic [31:0]             crc_errors,
  output logic [31:0]             dropped,
  output logic [31:0]             nop_flits
);
  localparam int NB     = FLIT_BYTES / BEAT_BYTES;
  localparam int BEAT_W = BEAT_BYTES * 8;
  localparam int BA     = (NB > 1) ? $clog2(NB) : 1;

  logic [BA-1:0]     bc;
  logic [FLIT_W-1:0] buf_flit;
  logic [15:0]       crc;
  logic              last;
  prot_id_e          cur_type;
  logic [SEQ_W-1:0]  exp_seq;
  logic              recovery;

  assign last = beat_valid && (bc == BA'(NB-1));

  flit_crc16 #(.BEAT_BYTES(BEAT_BYTES)) u_crc (
    .clk, .rst_n,
    .in_valid(beat_valid), .in_first(beat_valid && bc == '0), .in_last(last),
    .in_data(beat_data), .crc(crc)
  );

  // the complete flit as seen during its last beat
  logic [FLIT_W-1:0] whole;
  always_comb begin
    whole = buf_flit;
    whole[bc*BEAT_W +: BEAT_W] = beat_data;
  end

  flit_hdr_t hdr;
  logic      crc_ok;
  assign hdr    = whole[HDR_OFF*8 +: 16];
  assign crc_ok = (crc == beat_data[BEAT_W-16 +: 16]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bc         <= '0;
      buf_flit   <= '0;
      cur_type   <= PROT_NOP;
      exp_seq    <= '0;
      recovery   <= 1'b0;
      fdi_valid  <= 1'b0;
      fdi_flit   <= '0;
      la_valid   <= 1'b0;
      la_seq     <= '1;
      la_nak     <= 1'b0;
      la_owed    <= 1'b0;
      ra_valid   <= 1'b0;
      ra_nak     <= 1'b0;
      ra_seq     <= '0;
      crc_errors <= '0;
      dropped    <= '0;
      nop_flits  <= '0;
    end else begin
      fdi_valid <= 1'b0;
      ra_valid  <= 1'b0;
      if (la_sent) begin
        la_nak  <= 1'b0;
        la_owed <= 1'b0;
      end
      if (beat_valid) begin
        buf_flit[bc*BEAT_W +: BEAT_W] <= beat_data;
        bc <= last ? '0 : bc + 1'b1;
      end
      if (last) begin
        if (!crc_ok) begin
          crc_errors <= crc_errors + 1'b1;
          cur_type   <= PROT_NOP;
          if (!recovery) begin
            la_nak   <= 1'b1;
            recovery <= 1'b1;
          end
        end else begin
          ra_valid <= hdr.ack_vld;
          ra_nak   <= hdr.nak;
          ra_seq   <= hdr.ack_seq;
          cur_type <= hdr.prot_next;
          if (cur_type == PROT_CXLMEM) begin
            if (hdr.seq == exp_seq) begin
              fdi_valid <= 1'b1;
              fdi_flit  <= whole;
              exp_seq   <= exp_seq + 1'b1;
              la_valid  <= 1'b1;
              la_seq    <= exp_seq;
              la_owed   <= 1'b1;
              recovery  <= 1'b0;
            end else begin
              dropped <= dropped + 1'b1;
            end
          end else begin
            nop_flits <= nop_flits + 1'b1;
          end
        end
      end
    end
  end

endmodule
