// cxlmem_flit_unpack -- memory protocol layer receiver: takes apart the
// optimized 256-byte CXL.Mem flits delivered by the die-to-die adapter.
//
// The mirror of cxlmem_flit_pack. A flit is parsed in one clock by walking
// G-slot 0 .. G-slot 14 and then the HS-slot. While a received header still
// owes data, a G-slot is the next 16-byte chunk of that header's line;
// otherwise the slot holds up to HPS headers, each flagged by a valid bit in
// bits [HPS-1:0]. Headers and their reassembled lines go into a QDEPTH-entry
// queue, whose size is the number of credits the far transmitter starts with;
// an entry is offered on the output once its line is complete (or at once if
// its command carries no data). Each entry popped raises credit_free for one
// clock, which the local packer returns to the far side. The Credit field of
// every flit received is passed on as credit_rcvd for the local packer.
//
// Timing: a transaction whose header and data arrive in flit k can leave on
// the clock after flit k is presented (unpacking takes one clock).
//
// The queue cannot overflow while the far transmitter honours its credits;
// an assertion checks this.
module cxlmem_flit_unpack
  import ucie_mem_pkg::*;
#(
  parameter int         HDR_W    = REQ_W,
  parameter int         HPS      = REQ_PER_SLOT,
  parameter logic [2:0] DATA_CMD = 3'(REQ_MEMWR),
  parameter int         QDEPTH   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // flit input from the die-to-die adapter (no back-pressure: credits)
  input  logic              in_valid,
  input  logic [FLIT_W-1:0] in_flit,
  // transaction output
  output logic              out_valid,
  input  logic              out_ready,
  output logic [HDR_W-1:0]  out_hdr,
  output logic [LINE_W-1:0] out_data,
  output logic              out_has_data,
  // credits
  output logic [15:0]       credit_rcvd,
  output logic [7:0]        credit_free
);
  localparam int QA = $clog2(QDEPTH);

  logic [HDR_W-1:0]  q_hdr  [QDEPTH];
  logic [LINE_W-1:0] q_data [QDEPTH];
  logic              q_has  [QDEPTH];
  logic              q_done [QDEPTH];

  logic [QA:0] wp, dp, rp;
  logic [1:0]  ch;

  logic [HDR_W-1:0]  q_hdr_n  [QDEPTH];
  logic [LINE_W-1:0] q_data_n [QDEPTH];
  logic              q_has_n  [QDEPTH];
  logic              q_done_n [QDEPTH];
  logic [QA:0]       wp_n, dp_n;
  logic [1:0]        ch_n;
  logic              pop;
  logic              overflow;

  assign pop = out_valid && out_ready;

  always_comb begin
    logic [QA:0] w, d;
    logic [1:0]  c;
    logic [SLOT_W-1:0] slot;
    logic [HDR_W-1:0]  h;
    slot     = '0;
    h        = '0;
    q_hdr_n  = q_hdr;
    q_data_n = q_data;
    q_has_n  = q_has;
    q_done_n = q_done;
    if (pop) q_done_n[rp[QA-1:0]] = 1'b0;
    w        = wp;
    d        = dp;
    c        = ch;
    overflow = 1'b0;
    if (in_valid) begin
      for (int s = 0; s < N_SLOTS; s++) begin
        for (int k = 0; k < QDEPTH; k++)
          if (d != w && !q_has_n[d[QA-1:0]]) d = d + 1'b1;
        if (s < G_SLOTS) slot = in_flit[s*SLOT_W +: SLOT_W];
        else             slot = SLOT_W'(in_flit[HS_OFF*8 +: HS_W]);
        if (s < G_SLOTS && d != w) begin
          q_data_n[d[QA-1:0]][c*SLOT_W +: SLOT_W] = slot;
          if (c == 2'(CHUNKS_PER_LINE-1)) begin
            q_done_n[d[QA-1:0]] = 1'b1;
            c = '0;
            d = d + 1'b1;
          end else begin
            c = c + 1'b1;
          end
        end else begin
          for (int k = 0; k < HPS; k++) begin
            if (slot[k]) begin
              h = slot[HPS + k*HDR_W +: HDR_W];
              if ((w - rp) >= (QA+1)'(QDEPTH)) overflow = 1'b1;
              q_hdr_n[w[QA-1:0]]  = h;
              q_has_n[w[QA-1:0]]  = (h[HDR_W-1 -: 3] == DATA_CMD);
              q_done_n[w[QA-1:0]] = (h[HDR_W-1 -: 3] != DATA_CMD);
              w = w + 1'b1;
            end
          end
        end
      end
      for (int k = 0; k < QDEPTH; k++)
        if (d != w && !q_has_n[d[QA-1:0]]) d = d + 1'b1;
    end
    wp_n = w;
    dp_n = d;
    ch_n = c;
  end

  always_ff @(posedge clk) begin
    q_hdr  <= q_hdr_n;
    q_data <= q_data_n;
    q_has  <= q_has_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp          <= '0;
      dp          <= '0;
      rp          <= '0;
      ch          <= '0;
      credit_rcvd <= '0;
      credit_free <= '0;
      for (int i = 0; i < QDEPTH; i++) q_done[i] <= 1'b0;
    end else begin
      wp          <= wp_n;
      dp          <= dp_n;
      ch          <= ch_n;
      q_done      <= q_done_n;
      if (pop) rp <= rp + 1'b1;
      credit_rcvd <= in_valid ? in_flit[CREDIT_OFF*8 +: 16] : 16'd0;
      credit_free <= {7'd0, pop};
    end
  end

  assign out_valid    = (rp != wp) && q_done[rp[QA-1:0]];
  assign out_hdr      = q_hdr[rp[QA-1:0]];
  assign out_data     = q_data[rp[QA-1:0]];
  assign out_has_data = q_has[rp[QA-1:0]];

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && overflow));

endmodule
