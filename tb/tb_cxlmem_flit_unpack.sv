// tb_cxlmem_flit_unpack -- checks the flit unpacker in both directions.
//
// The testbench builds 256-byte flits itself from random transaction lists
// (G-slots 0..14 then the HS-slot; a header slot flags its headers with valid
// bits; a line's four 16-byte chunks follow in the next G-slots, continuing
// into the next flit when needed), feeds them to a request unpacker and a
// response unpacker, and checks that the same headers and lines come out in
// order. It also checks that the Credit field of each flit is passed on, that
// every popped entry raises credit_free, and the one-clock unpacking latency.
`timescale 1ns/1ps
module tb_cxlmem_flit_unpack;
  import ucie_mem_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUTs ----------------
  logic              q_in_valid, q_out_valid, q_out_ready, q_out_has;
  logic [FLIT_W-1:0] q_in_flit;
  logic [REQ_W-1:0]  q_out_hdr;
  logic [LINE_W-1:0] q_out_data;
  logic [15:0]       q_crd_rcvd;
  logic [7:0]        q_crd_free;

  cxlmem_flit_unpack #(.HDR_W(REQ_W), .HPS(1), .DATA_CMD(3'(REQ_MEMWR)), .QDEPTH(16)) u_req (
    .clk, .rst_n, .in_valid(q_in_valid), .in_flit(q_in_flit),
    .out_valid(q_out_valid), .out_ready(q_out_ready), .out_hdr(q_out_hdr), .out_data(q_out_data),
    .out_has_data(q_out_has), .credit_rcvd(q_crd_rcvd), .credit_free(q_crd_free));

  logic              r_in_valid, r_out_valid, r_out_ready, r_out_has;
  logic [FLIT_W-1:0] r_in_flit;
  logic [RSP_W-1:0]  r_out_hdr;
  logic [LINE_W-1:0] r_out_data;
  logic [15:0]       r_crd_rcvd;
  logic [7:0]        r_crd_free;

  cxlmem_flit_unpack #(.HDR_W(RSP_W), .HPS(4), .DATA_CMD(3'(RSP_MEMDATA)), .QDEPTH(16)) u_rsp (
    .clk, .rst_n, .in_valid(r_in_valid), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_hdr(r_out_hdr), .out_data(r_out_data),
    .out_has_data(r_out_has), .credit_rcvd(r_crd_rcvd), .credit_free(r_crd_free));

  // ---------------- reference flit builder ----------------
  typedef struct { logic [63:0] hdr; bit has; logic [LINE_W-1:0] data; } txn_t;

  // builder state: transactions not yet placed, data chunks still owed
  txn_t pend[$];
  txn_t owed[$];
  int   owed_chunk = 0;

  // Build one flit from pend/owed, taking at most max_hdr headers.
  function automatic logic [FLIT_W-1:0] build(input int hw, input int hps, input int max_hdr,
                                              input logic [15:0] credit);
    logic [FLIT_W-1:0] f = '0;
    int taken = 0;
    for (int s = 0; s < 16; s++) begin
      logic [127:0] slot = '0;
      if (s < 15 && owed.size() > 0) begin
        slot = owed[0].data[owed_chunk*128 +: 128];
        owed_chunk++;
        if (owed_chunk == 4) begin owed_chunk = 0; void'(owed.pop_front()); end
      end else begin
        for (int k = 0; k < hps; k++) begin
          if (pend.size() > 0 && taken < max_hdr) begin
            txn_t t;
            t = pend.pop_front();
            slot[k] = 1'b1;
            slot |= 128'(t.hdr & ((64'd1 << hw) - 1)) << (hps + k*hw);
            taken++;
            if (t.has) owed.push_back(t);
          end
        end
      end
      if (s < 15) f[s*128 +: 128] = slot;
      else        f[240*8 +: 80] = slot[79:0];
    end
    f[252*8 +: 16] = credit;
    return f;
  endfunction

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] d;
    for (int i = 0; i < LINE_W/32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  function automatic txn_t rnd_req(input bit wr);
    req_hdr_t h;
    txn_t t;
    h.cmd = wr ? REQ_MEMWR : REQ_MEMRD; h.meta = 4'($urandom); h.tag = 8'($urandom);
    h.addr = {14'd0, 32'($urandom)}; h.poison = 1'($urandom);
    t.hdr = 64'(h); t.has = wr; t.data = wr ? rnd_line() : '0;
    return t;
  endfunction

  function automatic txn_t rnd_rsp(input bit dat);
    rsp_hdr_t h;
    txn_t t;
    h.cmd = dat ? RSP_MEMDATA : RSP_CMP; h.meta = 4'($urandom); h.tag = 8'($urandom); h.poison = 1'($urandom);
    t.hdr = 64'(h); t.has = dat; t.data = dat ? rnd_line() : '0;
    return t;
  endfunction

  // ---------------- output checking ----------------
  txn_t exp_q[$], exp_r[$];
  int   got_q = 0, got_r = 0, free_q = 0, crd_sum = 0;

  always @(posedge clk) if (rst_n) begin
    if (q_out_valid && q_out_ready) begin
      txn_t e;
      got_q++;
      if (exp_q.size() == 0) check(0, "unexpected request");
      else begin
        e = exp_q.pop_front();
        check(64'(q_out_hdr) == e.hdr && q_out_has == e.has && (!e.has || q_out_data == e.data),
              $sformatf("request %0d mismatch", got_q));
      end
    end
    if (r_out_valid && r_out_ready) begin
      txn_t e;
      got_r++;
      if (exp_r.size() == 0) check(0, "unexpected response");
      else begin
        e = exp_r.pop_front();
        check(64'(r_out_hdr) == e.hdr && r_out_has == e.has && (!e.has || r_out_data == e.data),
              $sformatf("response %0d mismatch", got_r));
      end
    end
    free_q  += q_crd_free;
    crd_sum += q_crd_rcvd;
  end

  // flits are driven just after a clock edge so that back-to-back flits and
  // idle clocks never race with the edge
  task automatic send_q(input logic [FLIT_W-1:0] f);
    #0.1 q_in_flit = f; q_in_valid = 1'b1;
    @(posedge clk);
    #0.1 q_in_valid = 1'b0;
  endtask

  task automatic send_r(input logic [FLIT_W-1:0] f);
    #0.1 r_in_flit = f; r_in_valid = 1'b1;
    @(posedge clk);
    #0.1 r_in_valid = 1'b0;
  endtask

  initial begin
    q_in_valid = 0; q_in_flit = '0; q_out_ready = 1;
    r_in_valid = 0; r_in_flit = '0; r_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // latency: a single read in a flit is offered one clock after the flit
    begin
      txn_t t;
      t = rnd_req(1'b0);
      pend.push_back(t); exp_q.push_back(t);
      send_q(build(REQ_W, 1, 16, 16'd5));
      check(q_out_valid, "request offered one clock after its flit");
      check(q_crd_rcvd == 16'd5, "Credit field passed on");
      @(posedge clk);
    end

    // random request traffic with line data crossing flit boundaries and a
    // slow consumer; the sender never has more than 16 entries outstanding
    fork
      begin
        for (int f = 0; f < 60; f++) begin
          int n;
          n = 1 + $urandom % 4;
          for (int i = 0; i < n; i++) pend.push_back(rnd_req(1'($urandom % 2)));
          // reserve entries: wait until the queue has room for all pending
          while (exp_q.size() + pend.size() > 16) @(posedge clk);
          foreach (pend[i]) exp_q.push_back(pend[i]);
          send_q(build(REQ_W, 1, 16, 16'(f % 3)));
          // flush owed data with further flits before new headers
          while (owed.size() > 0) begin
            send_q(build(REQ_W, 1, 0, 16'd0));
          end
          repeat ($urandom % 3) @(posedge clk);
        end
      end
      begin
        repeat (400) begin @(posedge clk); q_out_ready <= ($urandom % 3) != 0; end
        q_out_ready <= 1'b1;
      end
    join
    repeat (40) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d requests not delivered", exp_q.size()));
    check(free_q == got_q, $sformatf("credit_free pulses %0d vs pops %0d", free_q, got_q));

    // responses: four headers per slot, then data; some Cmp after data headers
    for (int f = 0; f < 40; f++) begin
      int n;
      n = 1 + $urandom % 6;
      for (int i = 0; i < n; i++) pend.push_back(rnd_rsp(($urandom % 2) == 0));
      while (exp_r.size() + pend.size() > 16) @(posedge clk);
      foreach (pend[i]) exp_r.push_back(pend[i]);
      send_r(build(RSP_W, 4, 16, 16'd0));
      while (owed.size() > 0) begin
        send_r(build(RSP_W, 4, 0, 16'd0));
      end
    end
    repeat (40) @(posedge clk);
    check(exp_r.size() == 0, $sformatf("%0d responses not delivered", exp_r.size()));
    $display("requests %0d, responses %0d", got_q, got_r);
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
