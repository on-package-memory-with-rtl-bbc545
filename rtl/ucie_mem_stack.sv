// ucie_mem_stack -- the UCIe-Memory interface of one die: memory protocol
// layer, die-to-die adapter, logical PHY and lane PHYs for one transmit and
// one receive direction of a symmetric N-lane UCIe module.
//
//   transmit: transactions -> cxlmem_flit_pack -> d2d_tx -> logphy_tx
//             -> lane_tx x N -> serial lanes + valid + forwarded clock
//   receive:  serial lanes -> lane_rx x N -> logphy_rx -> d2d_rx
//             -> cxlmem_flit_unpack -> transactions
//
// The same block serves both dies; the parameters say what it sends and
// receives. On the SoC die it sends requests (62-bit headers, one per slot,
// MemWr carries data) and receives responses (16-bit headers, four per slot,
// MemData carries data); on the memory logic die the reverse. The transmit
// and receive halves are tied together inside the die only through the
// credit and ack/nak loops: credits for the far receiver's queue come back
// in the Credit field of received flits, and acks/naks for sent flits come
// back in the header of received flits.
//
// clk is the die's logic clock (2 GHz in the paper's 32 GT/s design, one
// beat of 2N bytes per clock), clk_ui the transmit bit clock, forwarded with
// the data as tx_clk; rx_clk is the forwarded clock of the far die.
module ucie_mem_stack
  import ucie_mem_pkg::*;
#(
  parameter int         N_LANES     = 64,
  parameter int         UI_PER_CLK  = 16,
  parameter int         TX_HDR_W    = REQ_W,
  parameter int         TX_HPS      = REQ_PER_SLOT,
  parameter logic [2:0] TX_DATA_CMD = 3'(REQ_MEMWR),
  parameter int         RX_HDR_W    = RSP_W,
  parameter int         RX_HPS      = RSP_PER_SLOT,
  parameter logic [2:0] RX_DATA_CMD = 3'(RSP_MEMDATA),
  parameter int         QDEPTH      = 16,
  parameter int         RB_DEPTH    = 16
) (
  input  logic                 clk,
  input  logic                 clk_ui,
  input  logic                 rst_n,
  // transactions to send
  input  logic                 tx_valid,
  output logic                 tx_ready,
  input  logic [TX_HDR_W-1:0]  tx_hdr,
  input  logic [LINE_W-1:0]    tx_data,
  // transactions received
  output logic                 rx_valid,
  input  logic                 rx_ready,
  output logic [RX_HDR_W-1:0]  rx_hdr,
  output logic [LINE_W-1:0]    rx_data,
  output logic                 rx_has_data,
  // main-band transmit: N data lanes, valid, forwarded clock
  output logic [N_LANES-1:0]   ser_tx_data,
  output logic                 ser_tx_valid,
  output logic                 ser_tx_clk,
  // main-band receive
  input  logic [N_LANES-1:0]   ser_rx_data,
  input  logic                 ser_rx_valid,
  input  logic                 ser_rx_clk,
  // status
  output logic [31:0]          crc_errors,
  output logic [31:0]          dropped,
  output logic [31:0]          nop_flits,
  output logic                 replaying,
  output logic [15:0]          tx_credits,
  output logic                 lane_overflow
);
  localparam int BEAT_BYTES = N_LANES * UI_PER_CLK / 8;

  // ---------------- protocol layer ----------------
  logic              pk_valid, pk_ready;
  logic [FLIT_W-1:0] pk_flit;
  logic [15:0]       crd_rcvd;
  logic [7:0]        crd_free;
  logic              up_valid;
  logic [FLIT_W-1:0] up_flit;

  cxlmem_flit_pack #(
    .HDR_W(TX_HDR_W), .HPS(TX_HPS), .DATA_CMD(TX_DATA_CMD), .QDEPTH(QDEPTH), .CREDITS(QDEPTH)
  ) u_pack (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_ready(tx_ready), .in_hdr(tx_hdr), .in_data(tx_data),
    .credit_rcvd(crd_rcvd), .credit_free(crd_free),
    .out_valid(pk_valid), .out_ready(pk_ready), .out_flit(pk_flit),
    .tx_credits(tx_credits)
  );

  cxlmem_flit_unpack #(
    .HDR_W(RX_HDR_W), .HPS(RX_HPS), .DATA_CMD(RX_DATA_CMD), .QDEPTH(QDEPTH)
  ) u_unpack (
    .clk, .rst_n,
    .in_valid(up_valid), .in_flit(up_flit),
    .out_valid(rx_valid), .out_ready(rx_ready), .out_hdr(rx_hdr), .out_data(rx_data),
    .out_has_data(rx_has_data),
    .credit_rcvd(crd_rcvd), .credit_free(crd_free)
  );

  // ---------------- die-to-die adapter ----------------
  logic                    la_valid, la_nak, la_owed, la_sent;
  logic [SEQ_W-1:0]        la_seq;
  logic                    ra_valid, ra_nak;
  logic [SEQ_W-1:0]        ra_seq;
  logic                    tb_valid, rb_valid;
  logic [BEAT_BYTES*8-1:0] tb_data, rb_data;

  d2d_tx #(.BEAT_BYTES(BEAT_BYTES), .RB_DEPTH(RB_DEPTH)) u_d2d_tx (
    .clk, .rst_n,
    .fdi_valid(pk_valid), .fdi_ready(pk_ready), .fdi_flit(pk_flit),
    .la_valid, .la_seq, .la_nak, .la_owed, .la_sent,
    .ra_valid, .ra_nak, .ra_seq,
    .beat_valid(tb_valid), .beat_data(tb_data),
    .replaying
  );

  d2d_rx #(.BEAT_BYTES(BEAT_BYTES)) u_d2d_rx (
    .clk, .rst_n,
    .beat_valid(rb_valid), .beat_data(rb_data),
    .fdi_valid(up_valid), .fdi_flit(up_flit),
    .la_valid, .la_seq, .la_nak, .la_owed, .la_sent,
    .ra_valid, .ra_nak, .ra_seq,
    .crc_errors, .dropped, .nop_flits
  );

  // ---------------- logical PHY ----------------
  logic                  lt_valid;
  logic [UI_PER_CLK-1:0] lt_word [N_LANES];
  logic                  lr_valid [N_LANES];
  logic [UI_PER_CLK-1:0] lr_word  [N_LANES];
  logic                  lr_pop;

  logphy_tx #(.N_LANES(N_LANES), .UI_PER_CLK(UI_PER_CLK)) u_lp_tx (
    .clk, .rst_n, .beat_valid(tb_valid), .beat_data(tb_data),
    .lane_valid(lt_valid), .lane_word(lt_word)
  );

  logphy_rx #(.N_LANES(N_LANES), .UI_PER_CLK(UI_PER_CLK)) u_lp_rx (
    .clk, .rst_n, .lane_valid(lr_valid), .lane_word(lr_word),
    .lane_pop(lr_pop), .beat_valid(rb_valid), .beat_data(rb_data)
  );

  // ---------------- lane PHYs ----------------
  logic [N_LANES-1:0] tx_full, tx_lane_valid, rx_ovf;

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    lane_tx #(.UI_PER_CLK(UI_PER_CLK)) u_ltx (
      .clk, .rst_n, .word_valid(lt_valid), .word(lt_word[l]), .fifo_full(tx_full[l]),
      .clk_ui, .ser_data(ser_tx_data[l]), .ser_valid(tx_lane_valid[l])
    );
    lane_rx #(.UI_PER_CLK(UI_PER_CLK)) u_lrx (
      .clk_fwd(ser_rx_clk), .rst_n, .ser_data(ser_rx_data[l]), .ser_valid(ser_rx_valid),
      .clk, .word_valid(lr_valid[l]), .word(lr_word[l]), .word_pop(lr_pop),
      .overflow(rx_ovf[l])
    );
  end

  // every lane serializer frames the same words, so lane 0's framing drives
  // the valid lane; the others must agree with it
  assign ser_tx_valid  = tx_lane_valid[0];
  a_lanes_in_step : assert property (@(posedge clk_ui) disable iff (!rst_n)
    tx_lane_valid == {N_LANES{tx_lane_valid[0]}});
  assign ser_tx_clk    = clk_ui;
  assign lane_overflow = |rx_ovf || |(tx_full & {N_LANES{lt_valid}});

endmodule
