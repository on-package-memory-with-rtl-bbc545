// tb_ucie_mem_workloads -- sustained throughput of the link, at its default
// size, for read/write traffic mixes "xRyW" (x reads for every y writes):
// 1R0W, 2R1W, 1R1W and 0R1W.
//
// The SoC issues 192 transactions of each mix as fast as the link accepts
// them. The memory controller model is always ready and answers after a
// fixed delay, and the SoC always takes responses, so only the link limits
// the rate. No bit errors are injected. For each mix the test measures the
// clocks from the first request to the last response and reports the data
// slots moved per available slot over both directions (4 slots per line,
// 16 slots per flit, one flit per 2 clocks per direction). It compares this
// with the flit format's own limit for the mix, worked out here from the slot
// counts: S2M = 16/15*4y + max(x+y - 4y/15, 0) and
// M2S = 16/15*4x + max((x+y)/4 - 4x/15, 0) slots per x+y transactions, and
// efficiency = 4(x+y) / (2*max(S2M, M2S)).
// Checks: every response is correct; the measured efficiency never exceeds
// the format's limit; and at least one transaction is carried every two
// clocks. This design reaches well under the format's limit: its 16 request
// credits cover about 29 clocks of credit loop, so it sustains some 0.55
// transactions per clock whatever the mix (see the timing notes in the
// documentation). The floor guards that figure, not the format's limit.
// The mixes and the slot-count formulas follow the published analysis of
// optimized CXL.Mem over UCIe; the transaction count, the memory delay and
// the floor are this test's own choices.
`timescale 1ps/1ps
module tb_ucie_mem_workloads;
  import ucie_mem_pkg::*;

  localparam int N     = 64;
  localparam int UI    = 16;
  localparam int T_UI  = 32;           // 32 GT/s
  localparam int T_CLK = T_UI * UI;    // 2 GHz

  int checks = 0, failures = 0;
  localparam int MC_DELAY = 4;

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
    mc_req_ready <= 1'b1;
    if (rst_n && mc_req_valid && mc_req_ready) begin
      pend_t p;
      p.h.meta = mc_req_hdr.meta; p.h.tag = mc_req_hdr.tag; p.h.poison = 1'b0;
      p.ready_at = cyc_mem + MC_DELAY;
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
    soc_rsp_ready <= 1'b1;
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
  task automatic wait_drain(input int limit);
    int t;
    t = 0;
    soc_req_valid <= 1'b0;
    while (outst.size() != 0 && t < limit) begin @(posedge clk_soc); t++; end
    checks++;
    if (outst.size() != 0) begin
      failures++; $display("FAIL: %0d requests never completed", outst.size());
    end
  endtask

  task automatic run_mix(input int x, input int y);
    localparam int NT = 192;
    int t0, t1, nr, nw;
    real s2m, m2s, lim, eff;
    nr = 0; nw = 0;
    t0 = cyc;
    for (int i = 0; i < NT; i++) begin
      logic [45:0] a;
      a = 46'h2_0000 + 46'(i);
      if ((i % (x + y)) < x) begin
        send_req(1'b0, a, dram.exists(a) ? dram[a] : '0);
        nr++;
      end else begin
        send_req(1'b1, a, line_pattern(a, x * 16 + y + i));
        nw++;
      end
    end
    wait_drain(20000);
    t1 = cyc;
    s2m = 16.0/15.0*4*y + ((x + y) - 4.0*y/15.0 > 0 ? (x + y) - 4.0*y/15.0 : 0);
    m2s = 16.0/15.0*4*x + ((x + y)/4.0 - 4.0*x/15.0 > 0 ? (x + y)/4.0 - 4.0*x/15.0 : 0);
    lim = 4.0*(x + y) / (2.0 * (s2m > m2s ? s2m : m2s));
    // slots available over both directions: 2 directions * 16 slots per 2 clocks
    eff = 4.0*(nr + nw) / (16.0 * (t1 - t0));
    $display("%0dR%0dW: %0d transactions in %0d clocks, efficiency %0.3f of slots, format limit %0.3f (%0.0f%%)",
             x, y, nr + nw, t1 - t0, eff, lim, 100.0 * eff / lim);
    checks++;
    if (eff > lim * 1.001) begin failures++; $display("FAIL: faster than the format allows"); end
    checks++;
    if (2 * (nr + nw) < t1 - t0) begin failures++; $display("FAIL: below one transaction per two clocks"); end
  endtask

  initial begin
    soc_req_valid = 0; soc_req_hdr = '0; soc_req_data = '0; soc_rsp_ready = 1;
    mc_req_ready = 1;
    repeat (4) @(posedge clk_soc);
    rst_n = 1'b1;
    repeat (4) @(posedge clk_soc);
    run_mix(1, 0);
    run_mix(2, 1);
    run_mix(1, 1);
    run_mix(0, 1);
    checks++; if (issued != completed) begin failures++; $display("FAIL: issued != completed"); end
    checks++; if (mem_crc_errors != 0 || soc_crc_errors != 0) begin failures++; $display("FAIL: CRC errors on a clean channel"); end
    checks++; if (lane_overflow) begin failures++; $display("FAIL: lane FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk_soc);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
