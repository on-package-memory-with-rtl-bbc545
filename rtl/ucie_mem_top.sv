// ucie_mem_top -- UCIe-Memory link: a SoC and a memory logic die joined by a
// symmetric UCIe module carrying optimized CXL.Mem.
//
// The SoC die sends MemRd/MemWr requests to the logic die, whose memory
// controller answers with MemData (read data) and Cmp (write completion)
// responses. Each die holds one ucie_mem_stack: flit packing/unpacking with
// credits, the die-to-die adapter (flit header, CRC, retry), the logical PHY
// (lane mapping, scrambling) and N_LANES lane serializers/deserializers per
// direction.
//
// What the design does not contain is brought out as ports:
//   * the SoC side request/response ports (the compute die is not part of
//     the design);
//   * the memory-controller side request/response ports (the controller and
//     the DRAM behind it are not part of the design);
//   * the serial main band of each die (N data lanes, valid and forwarded
//     clock per direction): the analog drivers and the package channel lie
//     between soc_tx_* and mem_rx_*, and between mem_tx_* and soc_rx_*;
//   * the clocks, which come from the PLLs: each die's logic clock and its
//     transmit bit clock (UI_PER_CLK bit clocks per logic clock).
//
// Defaults are the paper's UCIe-A module: 64 data lanes at 32 GT/s, a 2 GHz
// logic clock, so 16 unit intervals and one 128-byte beat per clock and a
// 256-byte flit every two clocks.
//
// rst_n is an asynchronous reset throughout; it also appears in the
// 'disable iff' of the protocol assertions, which linters report as a
// synchronous use of the same net. No flip-flop uses it synchronously.
module ucie_mem_top
  import ucie_mem_pkg::*;
#(
  parameter int N_LANES    = 64,
  parameter int UI_PER_CLK = 16,
  parameter int QDEPTH     = 16,
  parameter int RB_DEPTH   = 16
) (
  input  logic               rst_n,
  // SoC die
  input  logic               clk_soc,
  input  logic               clk_ui_soc,
  input  logic               soc_req_valid,
  output logic               soc_req_ready,
  input  req_hdr_t           soc_req_hdr,
  input  logic [LINE_W-1:0]  soc_req_data,
  output logic               soc_rsp_valid,
  input  logic               soc_rsp_ready,
  output rsp_hdr_t           soc_rsp_hdr,
  output logic [LINE_W-1:0]  soc_rsp_data,
  output logic               soc_rsp_has_data,
  output logic [N_LANES-1:0] soc_tx_data,
  output logic               soc_tx_valid,
  output logic               soc_tx_clk,
  input  logic [N_LANES-1:0] soc_rx_data,
  input  logic               soc_rx_valid,
  input  logic               soc_rx_clk,
  // memory logic die
  input  logic               clk_mem,
  input  logic               clk_ui_mem,
  output logic               mc_req_valid,
  input  logic               mc_req_ready,
  output req_hdr_t           mc_req_hdr,
  output logic [LINE_W-1:0]  mc_req_data,
  output logic               mc_req_has_data,
  input  logic               mc_rsp_valid,
  output logic               mc_rsp_ready,
  input  rsp_hdr_t           mc_rsp_hdr,
  input  logic [LINE_W-1:0]  mc_rsp_data,
  output logic [N_LANES-1:0] mem_tx_data,
  output logic               mem_tx_valid,
  output logic               mem_tx_clk,
  input  logic [N_LANES-1:0] mem_rx_data,
  input  logic               mem_rx_valid,
  input  logic               mem_rx_clk,
  // status
  output logic [31:0]        soc_crc_errors,
  output logic [31:0]        mem_crc_errors,
  output logic [31:0]        soc_dropped,
  output logic [31:0]        mem_dropped,
  output logic [31:0]        soc_nop_flits,
  output logic [31:0]        mem_nop_flits,
  output logic               soc_replaying,
  output logic               mem_replaying,
  output logic [15:0]        soc_tx_credits,
  output logic [15:0]        mem_tx_credits,
  output logic               lane_overflow
);
  logic        soc_ovf, mem_ovf;

  ucie_mem_stack #(
    .N_LANES(N_LANES), .UI_PER_CLK(UI_PER_CLK),
    .TX_HDR_W(REQ_W), .TX_HPS(REQ_PER_SLOT), .TX_DATA_CMD(3'(REQ_MEMWR)),
    .RX_HDR_W(RSP_W), .RX_HPS(RSP_PER_SLOT), .RX_DATA_CMD(3'(RSP_MEMDATA)),
    .QDEPTH(QDEPTH), .RB_DEPTH(RB_DEPTH)
  ) u_soc (
    .clk(clk_soc), .clk_ui(clk_ui_soc), .rst_n,
    .tx_valid(soc_req_valid), .tx_ready(soc_req_ready), .tx_hdr(soc_req_hdr), .tx_data(soc_req_data),
    .rx_valid(soc_rsp_valid), .rx_ready(soc_rsp_ready), .rx_hdr(soc_rsp_hdr), .rx_data(soc_rsp_data),
    .rx_has_data(soc_rsp_has_data),
    .ser_tx_data(soc_tx_data), .ser_tx_valid(soc_tx_valid), .ser_tx_clk(soc_tx_clk),
    .ser_rx_data(soc_rx_data), .ser_rx_valid(soc_rx_valid), .ser_rx_clk(soc_rx_clk),
    .crc_errors(soc_crc_errors), .dropped(soc_dropped), .nop_flits(soc_nop_flits),
    .replaying(soc_replaying), .tx_credits(soc_tx_credits), .lane_overflow(soc_ovf)
  );

  ucie_mem_stack #(
    .N_LANES(N_LANES), .UI_PER_CLK(UI_PER_CLK),
    .TX_HDR_W(RSP_W), .TX_HPS(RSP_PER_SLOT), .TX_DATA_CMD(3'(RSP_MEMDATA)),
    .RX_HDR_W(REQ_W), .RX_HPS(REQ_PER_SLOT), .RX_DATA_CMD(3'(REQ_MEMWR)),
    .QDEPTH(QDEPTH), .RB_DEPTH(RB_DEPTH)
  ) u_mem (
    .clk(clk_mem), .clk_ui(clk_ui_mem), .rst_n,
    .tx_valid(mc_rsp_valid), .tx_ready(mc_rsp_ready), .tx_hdr(mc_rsp_hdr), .tx_data(mc_rsp_data),
    .rx_valid(mc_req_valid), .rx_ready(mc_req_ready), .rx_hdr(mc_req_hdr), .rx_data(mc_req_data),
    .rx_has_data(mc_req_has_data),
    .ser_tx_data(mem_tx_data), .ser_tx_valid(mem_tx_valid), .ser_tx_clk(mem_tx_clk),
    .ser_rx_data(mem_rx_data), .ser_rx_valid(mem_rx_valid), .ser_rx_clk(mem_rx_clk),
    .crc_errors(mem_crc_errors), .dropped(mem_dropped), .nop_flits(mem_nop_flits),
    .replaying(mem_replaying), .tx_credits(mem_tx_credits), .lane_overflow(mem_ovf)
  );

  assign lane_overflow = soc_ovf | mem_ovf;

endmodule
