// tb_cxlmem_flit_pack -- checks the flit packer in both directions.
//
// Two packers are driven with random transactions: a request packer (62-bit
// headers, one per slot, MemWr carries a line) and a response packer (16-bit
// headers, four per slot, MemData carries a line). Every flit produced is
// taken apart by an independent reference parser that follows the slot rules
// (G-slots 0..14 then the 10-byte HS-slot; a G-slot holds data while a header
// owes data; header slots flag their headers with valid bits), and the
// recovered stream of headers and lines must equal the stream put in. Also
// checked: the one-clock packing latency, that the HS-slot is used, that no
// header is sent without a credit, and that freed entries come back in the
// Credit field.
`timescale 1ns/1ps
module tb_cxlmem_flit_pack;
  import ucie_mem_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUTs ----------------
  logic              q_in_valid, q_in_ready, q_out_valid, q_out_ready;
  logic [REQ_W-1:0]  q_in_hdr;
  logic [LINE_W-1:0] q_in_data;
  logic [FLIT_W-1:0] q_out_flit;
  logic [15:0]       q_crd_rcvd, q_credits;
  logic [7:0]        q_crd_free;

  cxlmem_flit_pack #(.HDR_W(REQ_W), .HPS(1), .DATA_CMD(3'(REQ_MEMWR)), .QDEPTH(16), .CREDITS(16)) u_req (
    .clk, .rst_n, .in_valid(q_in_valid), .in_ready(q_in_ready), .in_hdr(q_in_hdr), .in_data(q_in_data),
    .credit_rcvd(q_crd_rcvd), .credit_free(q_crd_free),
    .out_valid(q_out_valid), .out_ready(q_out_ready), .out_flit(q_out_flit), .tx_credits(q_credits));

  logic              r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  logic [RSP_W-1:0]  r_in_hdr;
  logic [LINE_W-1:0] r_in_data;
  logic [FLIT_W-1:0] r_out_flit;
  logic [15:0]       r_credits;

  cxlmem_flit_pack #(.HDR_W(RSP_W), .HPS(4), .DATA_CMD(3'(RSP_MEMDATA)), .QDEPTH(16), .CREDITS(64)) u_rsp (
    .clk, .rst_n, .in_valid(r_in_valid), .in_ready(r_in_ready), .in_hdr(r_in_hdr), .in_data(r_in_data),
    .credit_rcvd(16'd0), .credit_free(8'd0),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit), .tx_credits(r_credits));

  // ---------------- reference parser ----------------
  typedef struct { logic [63:0] hdr; logic [LINE_W-1:0] data; } txn_t;
  txn_t exp_q[$], exp_r[$];

  // parser state per direction: headers still owed data, chunk index
  int   owe_q[$], owe_r[$];
  txn_t got_q[$], got_r[$];
  int   chunk_q = 0, chunk_r = 0;
  int   hs_used = 0, hdrs_seen_q = 0, credit_field_sum = 0;

  task automatic parse(input logic [FLIT_W-1:0] f, input int hw, input int hps, input logic [2:0] dcmd,
                       ref txn_t got[$], ref int owe[$], ref int chunk, input bit is_req);
    for (int s = 0; s < 16; s++) begin
      logic [127:0] slot;
      slot = (s < 15) ? f[s*128 +: 128] : {48'd0, f[240*8 +: 80]};
      if (s < 15 && owe.size() > 0) begin
        got[owe[0]].data[chunk*128 +: 128] = slot;
        chunk++;
        if (chunk == 4) begin chunk = 0; void'(owe.pop_front()); end
      end else begin
        for (int k = 0; k < hps; k++) begin
          if (slot[k]) begin
            txn_t t;
            t.hdr  = 64'(slot >> (hps + k*hw)) & ((64'd1 << hw) - 1);
            t.data = '0;
            got.push_back(t);
            if (is_req) hdrs_seen_q++;
            if (s == 15) hs_used++;
            if (t.hdr[hw-1 -: 3] == dcmd) owe.push_back(got.size() - 1);
          end
        end
      end
    end
  endtask

  always @(posedge clk) begin
    if (q_out_valid && q_out_ready) begin
      parse(q_out_flit, REQ_W, 1, 3'(REQ_MEMWR), got_q, owe_q, chunk_q, 1'b1);
      credit_field_sum += q_out_flit[252*8 +: 16];
      check(q_out_flit[250*8 +: 16] == 0 && q_out_flit[254*8 +: 16] == 0, "HDR/CRC bytes must be left zero");
    end
    if (r_out_valid && r_out_ready)
      parse(r_out_flit, RSP_W, 4, 3'(RSP_MEMDATA), got_r, owe_r, chunk_r, 1'b0);
  end

  // far receiver model: frees the entries of headers it has seen, a few at a
  // time and at random moments, and returns them as credits
  bit far_en = 1'b0;
  int far_returned = 0;
  always @(posedge clk) begin
    int avail, n;
    q_crd_rcvd <= 16'd0;
    avail = hdrs_seen_q - far_returned;
    if (far_en && avail > 0 && ($urandom % 4) == 0) begin
      n = (avail > 3) ? 3 : avail;
      q_crd_rcvd   <= 16'(n);
      far_returned += n;
    end
  end

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] d;
    for (int i = 0; i < LINE_W/32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  // ---------------- stimulus ----------------
  task automatic push_req(input bit wr);
    req_hdr_t h;
    txn_t t;
    h.cmd = wr ? REQ_MEMWR : REQ_MEMRD; h.meta = 4'($urandom); h.tag = 8'($urandom);
    h.addr = {14'd0, 32'($urandom)}; h.poison = 1'b0;
    t.hdr = 64'(h); t.data = wr ? rnd_line() : '0;
    q_in_hdr <= h; q_in_data <= t.data; q_in_valid <= 1'b1;
    exp_q.push_back(t);
    @(posedge clk);
    while (!q_in_ready) @(posedge clk);
  endtask

  task automatic push_rsp(input bit dat);
    rsp_hdr_t h;
    txn_t t;
    h.cmd = dat ? RSP_MEMDATA : RSP_CMP; h.meta = 4'($urandom); h.tag = 8'($urandom); h.poison = 1'b0;
    t.hdr = 64'(h); t.data = dat ? rnd_line() : '0;
    r_in_hdr <= h; r_in_data <= t.data; r_in_valid <= 1'b1;
    exp_r.push_back(t);
    @(posedge clk);
    while (!r_in_ready) @(posedge clk);
  endtask

  initial begin
    q_in_valid = 0; q_in_hdr = '0; q_in_data = '0; q_out_ready = 1; q_crd_free = 0;
    r_in_valid = 0; r_in_hdr = '0; r_in_data = '0; r_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // latency: one read into an idle packer comes out one clock later
    push_req(1'b0);
    q_in_valid <= 1'b0;
    check(!q_out_valid, "no flit before the transaction is queued");
    @(posedge clk);
    #0.1 check(q_out_valid, "flit valid one clock after the transaction is queued");
    @(posedge clk);

    // credits: 16 granted, one used; push 20 more reads with no credit return
    for (int i = 0; i < 20; i++) push_req(1'b0);
    q_in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    check(hdrs_seen_q == 16, $sformatf("only credited headers sent (saw %0d)", hdrs_seen_q));
    check(q_credits == 0, "credits exhausted");
    // the far side starts returning credits
    far_en = 1'b1;
    repeat (12) @(posedge clk);
    check(hdrs_seen_q == 21, $sformatf("held headers sent after credit return (saw %0d)", hdrs_seen_q));

    // random mixed requests with output back-pressure
    fork
      begin
        for (int i = 0; i < 60; i++) push_req($urandom % 2);
        q_in_valid <= 1'b0;
      end
      begin
        repeat (200) begin @(posedge clk); q_out_ready <= ($urandom % 3) != 0; end
        q_out_ready <= 1'b1;
      end
    join
    repeat (20) @(posedge clk);

    // full flit: while the output is held, queue three writes (15 G-slots of
    // header + data) and a read, whose header must go into the HS-slot
    q_out_ready <= 1'b0;
    push_req(1'b0);
    for (int i = 0; i < 3; i++) push_req(1'b1);
    push_req(1'b0);
    q_in_valid <= 1'b0;
    begin
      int hs0 = hs_used;
      q_out_ready <= 1'b1;
      repeat (10) @(posedge clk);
      check(hs_used == hs0 + 1, "read header of a full flit went into the HS-slot");
    end

    // local entries freed -> Credit field
    repeat (7) begin q_crd_free <= 8'd1; @(posedge clk); end
    q_crd_free <= 8'd0;
    repeat (5) @(posedge clk);
    check(credit_field_sum == 7, $sformatf("Credit field returned %0d of 7", credit_field_sum));

    // responses: bursts of completions (four per slot) and read data
    r_out_ready <= 1'b0;
    push_rsp(1'b0);
    for (int i = 0; i < 4; i++) push_rsp(1'b1);
    push_rsp(1'b0);
    push_rsp(1'b0);
    r_out_ready <= 1'b1;
    for (int i = 0; i < 50; i++) push_rsp(($urandom % 3) == 0);
    r_in_valid <= 1'b0;
    repeat (30) @(posedge clk);

    // compare streams
    check(got_q.size() == exp_q.size(), $sformatf("request count %0d vs %0d", got_q.size(), exp_q.size()));
    foreach (exp_q[i]) if (i < got_q.size())
      check(got_q[i].hdr == exp_q[i].hdr && got_q[i].data == exp_q[i].data, $sformatf("request %0d mismatch", i));
    check(got_r.size() == exp_r.size(), $sformatf("response count %0d vs %0d", got_r.size(), exp_r.size()));
    foreach (exp_r[i]) if (i < got_r.size())
      check(got_r[i].hdr == exp_r[i].hdr && got_r[i].data == exp_r[i].data, $sformatf("response %0d mismatch", i));
    check(hs_used >= 3, "HS-slot carried request and response headers");
    $display("requests %0d, responses %0d, HS-slot headers %0d", got_q.size(), got_r.size(), hs_used);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
