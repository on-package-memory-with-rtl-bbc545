// ucie_mem_pkg -- shared types and constants of the UCIe-Memory link.
//
// The link carries CXL.Mem traffic between a SoC and a memory logic die in
// 256-byte flits. The optimized flit holds fifteen 16-byte G-slots (bytes
// 0..239), one 10-byte HS-slot (bytes 240..249) for headers only, a 2-byte
// flit header (HDR, bytes 250..251), a 2-byte Credit field (252..253) and a
// 2-byte CRC (254..255) that covers the whole flit. The field widths of the
// optimized request (62 bits) and response (16 bits) headers are the
// published ones; the order of the fields inside a header, the command
// encodings, the HDR bit layout, the CRC polynomial and the slot-valid bits
// are this design's own choices (see the README).
//
// Flit byte i is bits [8*i +: 8] of a flit vector; a beat of the die-to-die
// datapath is 2*N bytes, beat b holding flit bytes b*2N .. b*2N+2N-1.
package ucie_mem_pkg;

  // ---------------- flit geometry ----------------
  localparam int FLIT_BYTES     = 256;
  localparam int FLIT_W         = FLIT_BYTES * 8;
  localparam int SLOT_BYTES     = 16;
  localparam int SLOT_W         = SLOT_BYTES * 8;
  localparam int G_SLOTS        = 15;                 // G-slots 0..14
  localparam int N_SLOTS        = G_SLOTS + 1;        // plus the HS-slot
  localparam int HS_BYTES       = 10;
  localparam int HS_W           = HS_BYTES * 8;
  localparam int HS_OFF         = 240;                // byte offset of HS-slot
  localparam int HDR_OFF        = 250;                // flit header
  localparam int CREDIT_OFF     = 252;                // credit field
  localparam int CRC_OFF        = 254;                // CRC over bytes 0..253
  localparam int LINE_BYTES     = 64;                 // cache line
  localparam int LINE_W         = LINE_BYTES * 8;
  localparam int CHUNKS_PER_LINE = LINE_BYTES / SLOT_BYTES;  // 4 G-slots

  // ---------------- optimized CXL.Mem headers (Table 2, "Opt") ----------------
  typedef enum logic [2:0] {
    REQ_NOP   = 3'd0,
    REQ_MEMRD = 3'd1,
    REQ_MEMWR = 3'd2        // carries one cache line of data
  } req_cmd_e;

  typedef enum logic [2:0] {
    RSP_NOP     = 3'd0,
    RSP_MEMDATA = 3'd1,     // read data return, carries one cache line
    RSP_CMP     = 3'd2      // write completion, no data
  } rsp_cmd_e;

  typedef struct packed {
    req_cmd_e    cmd;       // 3
    logic [3:0]  meta;      // 4
    logic [7:0]  tag;       // 8
    logic [45:0] addr;      // 46: cache-line address, byte address [51:6]
    logic        poison;    // 1
  } req_hdr_t;              // 62 bits

  typedef struct packed {
    rsp_cmd_e    cmd;       // 3
    logic [3:0]  meta;      // 4
    logic [7:0]  tag;       // 8
    logic        poison;    // 1
  } rsp_hdr_t;              // 16 bits

  localparam int REQ_W = $bits(req_hdr_t);
  localparam int RSP_W = $bits(rsp_hdr_t);
  localparam int REQ_PER_SLOT = 1;   // one request per HS- or G-slot
  localparam int RSP_PER_SLOT = 4;   // four responses per HS- or G-slot

  // ---------------- flit header (HDR, 2 bytes) ----------------
  typedef enum logic [1:0] {
    PROT_NOP    = 2'd0,
    PROT_CXLMEM = 2'd1,
    PROT_RSVD2  = 2'd2,
    PROT_RSVD3  = 2'd3
  } prot_id_e;

  typedef struct packed {
    prot_id_e   prot_next;  // protocol of the NEXT flit on this direction
    logic [5:0] seq;        // sequence number of this flit
    logic       ack_vld;    // ack_seq below is meaningful
    logic       nak;        // replay everything after ack_seq
    logic [5:0] ack_seq;    // last flit received in order and intact
  } flit_hdr_t;             // 16 bits

  localparam int SEQ_W = 6;

  // ---------------- CRC-16 ----------------
  // Polynomial x^16+x^15+x^14+x^13+x^12+x^6+x^4+x+1 (0x1F053, the CRC-16
  // of the CXL/UCIe flit formats), register preset to all ones, bytes fed in
  // increasing byte order, each byte most-significant bit first.
  localparam logic [15:0] CRC_POLY = 16'hF053;
  localparam logic [15:0] CRC_INIT = 16'hFFFF;

  function automatic logic [15:0] crc16_byte(input logic [15:0] crc, input logic [7:0] b);
    logic [15:0] c;
    c = crc;
    for (int i = 7; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ b[i];
      c  = {c[14:0], 1'b0};
      if (fb) c = c ^ CRC_POLY;
    end
    return c;
  endfunction

endpackage
