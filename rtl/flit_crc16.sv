// flit_crc16 -- CRC-16 of a 256-byte flit, computed one datapath beat at a
// time.
//
// The die-to-die datapath moves BEAT_BYTES (= 2N) bytes per clock, so a
// flit takes FLIT_BYTES/BEAT_BYTES beats. The CRC covers flit bytes 0..253;
// bytes 254..255 hold the CRC itself. On each valid beat the block folds the
// beat's bytes into the running remainder (restarting from the preset value
// on the first beat) and presents the updated remainder combinationally on
// crc; on the last beat only its first BEAT_BYTES-2 bytes are folded in, so crc
// is then the flit's CRC. The fold is a pure XOR network of the remainder
// and the beat bits, written here as the bit-serial definition and left to
// synthesis to flatten.
//
// That one 2-byte CRC covers the whole flit follows the optimized flit
// format; the polynomial (0x1F053) and the all-ones preset are this design's
// choice.
module flit_crc16
  import ucie_mem_pkg::*;
#(
  parameter int BEAT_BYTES = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [BEAT_BYTES*8-1:0] in_data,
  output logic [15:0]             crc
);
  logic [15:0] rem;

  always_comb begin
    logic [15:0] c;
    c = in_first ? CRC_INIT : rem;
    for (int i = 0; i < BEAT_BYTES; i++)
      if (!(in_last && i >= BEAT_BYTES-2)) c = crc16_byte(c, in_data[i*8 +: 8]);
    crc = c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        rem <= CRC_INIT;
    else if (in_valid) rem <= crc;
  end

endmodule
