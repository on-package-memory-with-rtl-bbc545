// cxlmem_flit_pack -- memory protocol layer transmitter: builds optimized
// 256-byte CXL.Mem flits from a stream of headers and cache lines.
//
// One instance serves one direction. On the SoC die it packs requests
// (HDR_W = 62, one per slot, data follows MemWr); on the memory logic die it
// packs responses (HDR_W = 16, four per slot, data follows MemData).
//
// Transactions (a header plus, when its command is DATA_CMD, a 64-byte line)
// enter a QDEPTH-entry queue at one per clock. A flit is assembled in a single
// clock by walking the slots in wire order, G-slot 0 .. G-slot 14, then the
// HS-slot:
//   * a G-slot carries the next 16-byte chunk of data whenever a header that
//     has already been sent still owes data (data follows its headers in
//     header order, four G-slots per line, and may continue into the next
//     flit);
//   * otherwise a slot (G or HS) carries up to HPS headers, one header credit
//     each. The HS-slot never carries data.
// A header slot is {headers, valid bits}: bits [HPS-1:0] say which of the HPS
// header positions hold a header, header k sits at bits [HPS+k*HDR_W +: HDR_W].
// The receiver tells data slots from header slots by keeping the same count
// of data still owed, so no per-slot type field is needed.
//
// Credits: the far receiver's queue holds CREDITS transactions; one credit is
// spent per header sent and credit_rcvd adds credits returned by the far side.
// Local entries freed by the local receiver (credit_free) are accumulated and
// returned in the flit's 2-byte Credit field. A flit is produced when there is
// a header or data to send, or credits to return.
//
// The flit leaves through a registered valid/ready port one clock after the
// transaction that fills it has been queued (packing takes one clock). HDR and
// CRC bytes are left zero for the die-to-die adapter to fill.
//
// Follows the published flit: slot positions, slot sizes, HS-slot for headers
// only, headers per slot, 4 G-slots per line. Own choices: the valid bits,
// data-owed rule, queue depth, credit units (one per transaction).
module cxlmem_flit_pack
  import ucie_mem_pkg::*;
#(
  parameter int         HDR_W    = REQ_W,
  parameter int         HPS      = REQ_PER_SLOT,
  parameter logic [2:0] DATA_CMD = 3'(REQ_MEMWR),
  parameter int         QDEPTH   = 16,
  parameter int         CREDITS  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // transaction input
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [HDR_W-1:0]  in_hdr,
  input  logic [LINE_W-1:0] in_data,
  // credits
  input  logic [15:0]       credit_rcvd,   // credits returned by the far side
  input  logic [7:0]        credit_free,   // local receive entries freed
  // flit output
  output logic              out_valid,
  input  logic              out_ready,
  output logic [FLIT_W-1:0] out_flit,
  // status
  output logic [15:0]       tx_credits
);
  localparam int QA = $clog2(QDEPTH);

  logic [HDR_W-1:0]  q_hdr  [QDEPTH];
  logic [LINE_W-1:0] q_data [QDEPTH];
  logic              q_has  [QDEPTH];

  logic [QA:0] wp, hp, dp;     // write, next header, next data entry
  logic [1:0]  ch;             // next chunk of entry dp
  logic [15:0] crd;            // credits held
  logic [23:0] ret_acc;        // credits to return

  // ---------------- input queue ----------------
  logic [QA:0] used;
  assign used     = wp - dp;
  assign in_ready = (used < (QA+1)'(QDEPTH));

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      q_hdr[wp[QA-1:0]]  <= in_hdr;
      q_data[wp[QA-1:0]] <= in_data;
      q_has[wp[QA-1:0]]  <= (in_hdr[HDR_W-1 -: 3] == DATA_CMD);
    end
  end

  // ---------------- flit assembly (one clock) ----------------
  logic [FLIT_W-1:0] f_n;
  logic [QA:0]       hp_n, dp_n;
  logic [1:0]        ch_n;
  logic [15:0]       spent_n;
  logic              f_busy;
  logic [15:0]       ret_now;

  always_comb begin
    logic [QA:0] h, d;
    logic [1:0]  c;
    logic [15:0] cr;
    logic [SLOT_W-1:0] slot;
    f_n    = '0;
    h      = hp;
    d      = dp;
    c      = ch;
    cr     = crd;
    f_busy = 1'b0;
    for (int s = 0; s < N_SLOTS; s++) begin
      // skip entries that owe no data
      for (int k = 0; k < QDEPTH; k++)
        if (d != h && !q_has[d[QA-1:0]]) d = d + 1'b1;
      slot = '0;
      if (s < G_SLOTS && d != h) begin
        slot   = q_data[d[QA-1:0]][c*SLOT_W +: SLOT_W];
        f_busy = 1'b1;
        if (c == 2'(CHUNKS_PER_LINE-1)) begin
          c = '0;
          d = d + 1'b1;
        end else begin
          c = c + 1'b1;
        end
      end else begin
        for (int k = 0; k < HPS; k++) begin
          if (h != wp && cr != 0) begin
            slot[k] = 1'b1;
            slot[HPS + k*HDR_W +: HDR_W] = q_hdr[h[QA-1:0]];
            h       = h + 1'b1;
            cr      = cr - 1'b1;
            f_busy  = 1'b1;
          end
        end
      end
      if (s < G_SLOTS) f_n[s*SLOT_W +: SLOT_W] = slot;
      else             f_n[HS_OFF*8 +: HS_W]   = slot[HS_W-1:0];
    end
    // once every header is out, retire trailing entries that owe no data
    for (int k = 0; k < QDEPTH; k++)
      if (d != h && !q_has[d[QA-1:0]]) d = d + 1'b1;
    ret_now = (ret_acc > 24'hFFFF) ? 16'hFFFF : ret_acc[15:0];
    f_n[CREDIT_OFF*8 +: 16] = ret_now;
    hp_n    = h;
    dp_n    = d;
    ch_n    = c;
    spent_n = crd - cr;
  end

  logic load;
  assign load = (!out_valid || out_ready) && (f_busy || ret_acc != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      hp        <= '0;
      dp        <= '0;
      ch        <= '0;
      crd       <= 16'(CREDITS);
      ret_acc   <= '0;
      out_valid <= 1'b0;
      out_flit  <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (load) begin
        out_flit  <= f_n;
        out_valid <= 1'b1;
        hp        <= hp_n;
        dp        <= dp_n;
        ch        <= ch_n;
        crd       <= crd - spent_n + credit_rcvd;
        ret_acc   <= ret_acc - 24'(ret_now) + 24'(credit_free);
      end else begin
        if (out_ready) out_valid <= 1'b0;
        crd     <= crd + credit_rcvd;
        ret_acc <= ret_acc + 24'(credit_free);
      end
    end
  end

  assign tx_credits = crd;

  // never spend more credits than the far receiver granted
  a_credit_bound : assert property (@(posedge clk) disable iff (!rst_n) crd <= 16'(CREDITS));

endmodule
