// tb_ucie_mem_top -- end-to-end test of the UCIe-Memory link at its default
// size (64 lanes, 16 UI per logic clock).
//
// The SoC side issues MemWr and MemRd requests; a behavioural memory
// controller on the logic-die side stores lines, returns MemData for reads
// and Cmp for writes after a random delay, with random back-pressure. The
// two main-band directions are wired through a channel model that can flip
// one bit in one unit interval, which must be caught by the CRC and repaired
// by replay. A scoreboard checks every response (tag, command, data) against
// what was written. The test counts how often each mechanism happened and
// fails if one never did: CRC errors and replays in both directions, header
// credit exhaustion, NOP flits, headers in the HS-slot, data continuing into
// the next flit, idle lanes. A last phase sends bursts with a bit error at
// their start and no back-pressure, so that the replay makes transactions
// queue up and fill whole flits. The count of HS-slots carrying more than
// two responses is only reported here: the response stream, throttled by
// credits, seldom backs up that far, and that packing case is checked
// directly in the flit packer's own test.
`timescale 1ps/1ps
module tb_ucie_mem_top;
  import ucie_mem_pkg::*;

  localparam int N     = 64;
  localparam int UI    = 16;
  localparam int T_UI  = 32;           // 32 GT/s
  localparam int T_CLK = T_UI * UI;    // 2 GHz

  int checks = 0, failures = 0;

  logic rst_n = 1'b0;
  logic clk_soc = 1'b0, clk_mem = 1'b0, clk_ui_soc = 1'b0, clk_ui_mem = 1'b0;
  always #(T_UI/2)  clk_ui_soc = ~clk_ui_soc;
  always #(T_CLK/2) clk_soc    = ~clk_soc;
  initial begin
    #100;                               // memory die runs at a phase offset
    fork
      forever #(T_UI/2)  clk_ui_mem = ~clk_ui_mem;
      forever #(T_CLK/2) clk_mem    = ~clk_mem;
    join
  end

  // ---------------- DUT ----------------
  logic              soc_req_valid, soc_req_ready;
  req_hdr_t          soc_req_hdr;
  logic [LINE_W-1:0] soc_req_data;
  logic              soc_rsp_valid, soc_rsp_ready;
  rsp_hdr_t          soc_rsp_hdr;
  logic [LINE_W-1:0] soc_rsp_data;
  logic [N-1:0]      soc_tx_data, soc_rx_data, mem_tx_data, mem_rx_data;
  logic              soc_tx_valid, soc_tx_clk, soc_rx_valid, soc_rx_clk;
  logic              mem_tx_valid, mem_tx_clk, mem_rx_valid, mem_rx_clk;
  logic              mc_req_valid, mc_req_ready;
  req_hdr_t          mc_req_hdr;
  logic [LINE_W-1:0] mc_req_data;
  logic              mc_rsp_valid, mc_rsp_ready;
  rsp_hdr_t          mc_rsp_hdr;
  logic [LINE_W-1:0] mc_rsp_data;
  logic [31:0]       soc_crc_errors, mem_crc_errors, soc_nop_flits, mem_nop_flits;
  logic              soc_replaying, mem_replaying, lane_overflow;
  logic [31:0]       soc_dropped, mem_dropped;
  logic              soc_rsp_has_data, mc_req_has_data;
  logic [15:0]       soc_tx_credits, mem_tx_credits;

  ucie_mem_top dut (.*);

  // ---------------- channel with bit-error injection ----------------
  logic [N-1:0] err_s2m = '0, err_m2s = '0;
  logic         inj_s2m = 1'b0, inj_m2s = 1'b0;
  bit           mc_fast = 1'b0;    // phase 5: no back-pressure, short memory delay
  assign mem_rx_data  = soc_tx_data ^ err_s2m;
  assign mem_rx_valid = soc_tx_valid;
  assign mem_rx_clk   = soc_tx_clk;
  assign soc_rx_data  = mem_tx_data ^ err_m2s;
  assign soc_rx_valid = mem_tx_valid;
  assign soc_rx_clk   = mem_tx_clk;

  always @(posedge clk_ui_soc) begin
    err_s2m <= '0;
    if (inj_s2m && soc_tx_valid) begin
      err_s2m[($urandom % N)] <= 1'b1;
      inj_s2m <= 1'b0;
    end
  end
  always @(posedge clk_ui_mem) begin
    err_m2s <= '0;
    if (inj_m2s && mem_tx_valid) begin
      err_m2s[($urandom % N)] <= 1'b1;
      inj_m2s <= 1'b0;
    end
  end

  // ---------------- reference data ----------------
  function automatic logic [LINE_W-1:0] line_pattern(input logic [45:0] a, input int salt);
    logic [LINE_W-1:0] d;
    for (int i = 0; i < LINE_W/32; i++) d[i*32 +: 32] = {a[15:0], 16'(i)} ^ 32'(salt * 32'h9E3779B1);
    return d;
  endfunction

  // ---------------- behavioural memory controller + DRAM ----------------
  logic [LINE_W-1:0] dram [logic [45:0]];
  typedef struct { rsp_hdr_t h; logic [LINE_W-1:0] d; int ready_at; } pend_t;
  pend_t mc_q[$];
  int    cyc_mem = 0;

  always @(posedge clk_mem) begin
    cyc_mem <= cyc_mem + 1;
    mc_req_ready <= mc_fast || (($urandom % 8) != 0);
    if (rst_n && mc_req_valid && mc_req_ready) begin
      pend_t p;
      p.h.meta = mc_req_hdr.meta; p.h.tag = mc_req_hdr.tag; p.h.poison = 1'b0;
      p.ready_at = cyc_mem + (mc_fast ? 1 : 2 + ($urandom % 20));
      if (mc_req_hdr.cmd == REQ_MEMWR) begin
        dram[mc_req_hdr.addr] = mc_req_data;
        p.h.cmd = RSP_CMP; p.d = '0;
      end else begin
        p.h.cmd = RSP_MEMDATA;
        p.d = dram.exists(mc_req_hdr.addr) ? dram[mc_req_hdr.addr] : '0;
      end
      mc_q.push_back(p);
    end
    if (rst_n && mc_rsp_valid && mc_rsp_ready) void'(mc_q.pop_front());
  end
  always @* begin
    mc_rsp_valid = (mc_q.size() > 0) && (mc_q[0].ready_at <= cyc_mem);
    mc_rsp_hdr   = (mc_q.size() > 0) ? mc_q[0].h : '0;
    mc_rsp_data  = (mc_q.size() > 0) ? mc_q[0].d : '0;
  end

  // ---------------- SoC side: request issue and scoreboard ----------------
  typedef struct { logic is_wr; logic [45:0] addr; logic [LINE_W-1:0] exp; } out_t;
  out_t        outst [logic [7:0]];
  logic [7:0]  next_tag = 0;
  int          issued = 0, completed = 0;
  int          cyc = 0;
  int          credit_stalls = 0, hs_headers = 0, multi_rsp_slots = 0;
  int          line_splits = 0, idle_gaps = 0;
  int          replays_s2m = 0, replays_m2s = 0;

  task automatic send_req(input logic is_wr, input logic [45:0] addr, input logic [LINE_W-1:0] d);
    while (outst.exists(next_tag)) next_tag++;
    soc_req_hdr.cmd    <= is_wr ? REQ_MEMWR : REQ_MEMRD;
    soc_req_hdr.meta   <= 4'(addr);
    soc_req_hdr.tag    <= next_tag;
    soc_req_hdr.addr   <= addr;
    soc_req_hdr.poison <= 1'b0;
    soc_req_data       <= is_wr ? d : '0;
    soc_req_valid      <= 1'b1;
    begin
      out_t o;
      o.is_wr = is_wr; o.addr = addr;
      o.exp = is_wr ? '0 : d;
      outst[next_tag] = o;
    end
    next_tag++;
    @(posedge clk_soc);
    while (!soc_req_ready) @(posedge clk_soc);
    issued++;
  endtask

  always @(posedge clk_soc) begin
    cyc <= cyc + 1;
    soc_rsp_ready <= mc_fast || (($urandom % 4) != 0);
    if (rst_n && soc_tx_credits == 0) credit_stalls++;
    if (rst_n && soc_rsp_valid && soc_rsp_ready) begin
      checks++;
      if (!outst.exists(soc_rsp_hdr.tag)) begin
        failures++;
        $display("FAIL: response with unknown tag %0d", soc_rsp_hdr.tag);
      end else begin
        out_t o;
        o = outst[soc_rsp_hdr.tag];
        if (o.is_wr && soc_rsp_hdr.cmd != RSP_CMP) begin
          failures++; $display("FAIL: tag %0d write answered with cmd %0d", soc_rsp_hdr.tag, soc_rsp_hdr.cmd);
        end
        if (!o.is_wr && (soc_rsp_hdr.cmd != RSP_MEMDATA || soc_rsp_data != o.exp)) begin
          failures++; $display("FAIL: tag %0d read of %h returned wrong data/cmd", soc_rsp_hdr.tag, o.addr);
        end
        if (soc_rsp_hdr.meta != 4'(o.addr)) begin
          failures++; $display("FAIL: tag %0d meta mismatch", soc_rsp_hdr.tag);
        end
        outst.delete(soc_rsp_hdr.tag);
        completed++;
      end
    end
  end

  // mechanism monitors on the packers' flit outputs
  always @(posedge clk_soc) begin
    if (rst_n && dut.u_soc.u_pack.out_valid && dut.u_soc.u_pack.out_ready) begin
      logic [FLIT_W-1:0] f;
      f = dut.u_soc.u_pack.out_flit;
      if (f[HS_OFF*8]) hs_headers++;
    end
    // a line whose chunks straddle two flits
    if (rst_n && dut.u_soc.u_pack.load && (dut.u_soc.u_pack.ch_n != 0 || dut.u_soc.u_pack.dp_n != dut.u_soc.u_pack.hp_n)) line_splits++;
  end
  always @(posedge clk_mem) begin
    if (rst_n && dut.u_mem.u_pack.out_valid && dut.u_mem.u_pack.out_ready) begin
      logic [FLIT_W-1:0] f;
      f = dut.u_mem.u_pack.out_flit;
      if ($countones(f[HS_OFF*8 +: 4]) > 2) multi_rsp_slots++;
    end
  end
  logic was_valid = 0;
  always @(posedge clk_ui_soc) begin
    was_valid <= soc_tx_valid;
    if (was_valid && !soc_tx_valid) idle_gaps++;
  end

  // ---------------- stimulus ----------------
  localparam int NLINES = 48;
  logic [45:0]       addrs [NLINES];
  logic [LINE_W-1:0] wdata [NLINES];

  task automatic wait_drain(input int limit);
    int t = 0;
    soc_req_valid <= 1'b0;
    while (outst.size() != 0 && t < limit) begin @(posedge clk_soc); t++; end
    checks++;
    if (outst.size() != 0) begin
      failures++; $display("FAIL: %0d requests never completed", outst.size());
    end
  endtask

  initial begin
    soc_req_valid = 0; soc_req_hdr = '0; soc_req_data = '0; soc_rsp_ready = 1;
    mc_req_ready = 1;
    repeat (4) @(posedge clk_soc);
    rst_n = 1'b1;
    repeat (4) @(posedge clk_soc);

    for (int i = 0; i < NLINES; i++) begin
      addrs[i] = 46'h1000 + 46'(i * 7);
      wdata[i] = line_pattern(addrs[i], i + 1);
    end

    // phase 1: single read of an unwritten line, measure round trip
    begin
      int t0;
      t0 = cyc;
      send_req(1'b0, 46'h3FFF_0000, '0);
      wait_drain(2000);
      $display("round trip of one read (SoC clocks incl. memory model delay): %0d", cyc - t0);
    end

    // phase 2: back-to-back writes, with a bit error in each direction
    fork
      for (int i = 0; i < NLINES; i++) begin
        send_req(1'b1, addrs[i], wdata[i]);
        if (i == 10) inj_s2m <= 1'b1;
        if (i == 20) inj_m2s <= 1'b1;
      end
    join
    wait_drain(20000);

    // phase 3: back-to-back reads of everything written, mixed with errors
    for (int i = 0; i < NLINES; i++) begin
      send_req(1'b0, addrs[i], wdata[i]);
      if (i == 5)  inj_m2s <= 1'b1;
      if (i == 30) inj_s2m <= 1'b1;
    end
    wait_drain(20000);

    // phase 4: mixed traffic 2R1W over the same lines with new data. The
    // random back-pressure decides when the HS-slot and split lines occur, so
    // the phase repeats (at most 8 rounds) until each has been seen.
    for (int r = 0; r < 8; r++) begin
      for (int i = 0; i < NLINES; i++) begin
        if (i % 3 == 2) begin
          wdata[i] = line_pattern(addrs[i], 1000 + 100 * r + i);
          send_req(1'b1, addrs[i], wdata[i]);
        end else begin
          send_req(1'b0, addrs[i], wdata[i]);
        end
      end
      wait_drain(20000);
      if (hs_headers > 0 && line_splits > 0) break;
    end

    // phase 5: bursts with a bit error at their start, no back-pressure. The
    // replay holds the packer, so transactions queue up and then leave several
    // to a flit, filling the G-slots and spilling headers into the HS-slot.
    mc_fast = 1'b1;
    for (int r = 0; r < 2; r++) begin
      fork
        begin  // hit the responses once read data has started to flow
          @(posedge clk_mem iff (mc_rsp_valid && mc_rsp_hdr.cmd == RSP_MEMDATA));
          repeat (3) @(posedge clk_mem);
          inj_m2s <= 1'b1;
        end
      join_none
      for (int i = 0; i < 16; i++) send_req(1'b0, addrs[i], wdata[i]);
      inj_s2m <= 1'b1;
      for (int i = 16; i < 32; i++) begin
        wdata[i] = line_pattern(addrs[i], 5000 + 100 * r + i);
        send_req(1'b1, addrs[i], wdata[i]);
      end
      wait_drain(20000);
    end
    mc_fast = 1'b0;

    repeat (50) @(posedge clk_soc);
    $display("issued=%0d completed=%0d", issued, completed);
    $display("crc errors: s2m %0d m2s %0d; NOP flits seen: soc %0d mem %0d",
             mem_crc_errors, soc_crc_errors, mem_nop_flits, soc_nop_flits);
    $display("credit stalls=%0d hs_headers=%0d multi_rsp_slots=%0d line_splits=%0d idle_gaps=%0d",
             credit_stalls, hs_headers, multi_rsp_slots, line_splits, idle_gaps);

    checks++; if (issued != completed) begin failures++; $display("FAIL: issued != completed"); end
    checks++; if (mem_crc_errors == 0) begin failures++; $display("FAIL: no S2M CRC error seen"); end
    checks++; if (soc_crc_errors == 0) begin failures++; $display("FAIL: no M2S CRC error seen"); end
    checks++; if (replays_s2m == 0)    begin failures++; $display("FAIL: no S2M replay"); end
    checks++; if (replays_m2s == 0)    begin failures++; $display("FAIL: no M2S replay"); end
    checks++; if (mem_nop_flits == 0 || soc_nop_flits == 0) begin failures++; $display("FAIL: no NOP flits"); end
    checks++; if (credit_stalls == 0)  begin failures++; $display("FAIL: credits never ran out"); end
    checks++; if (hs_headers == 0)     begin failures++; $display("FAIL: HS-slot never carried a request"); end
    checks++; if (line_splits == 0)    begin failures++; $display("FAIL: a line never continued into the next flit"); end
    checks++; if (idle_gaps == 0)      begin failures++; $display("FAIL: lanes never went idle"); end
    checks++; if (lane_overflow)       begin failures++; $display("FAIL: lane FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic soc_rp_d = 0, mem_rp_d = 0;
  always @(posedge clk_soc) begin soc_rp_d <= soc_replaying; if (rst_n && soc_replaying && !soc_rp_d) replays_s2m++; end
  always @(posedge clk_mem) begin mem_rp_d <= mem_replaying; if (rst_n && mem_replaying && !mem_rp_d) replays_m2s++; end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk_soc);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
