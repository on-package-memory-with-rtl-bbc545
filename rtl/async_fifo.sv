// async_fifo -- dual-clock FIFO with Gray-coded pointers.
//
// Writes in the wclk domain, reads in the rclk domain. Each side sees the
// other's pointer through a two-flop synchronizer, so full and empty are
// conservative: a word written becomes readable three to four read clocks
// later. DEPTH must be a power of two. rdata shows the word at the head while
// rempty is low (first-word fall-through); rinc pops it.
module async_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 8
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             winc,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rinc,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);
  localparam int A = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [A:0] wbin, wgray, rbin, rgray;
  logic [A:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [A:0] b2g(input logic [A:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [A:0] wbin_n;
  assign wbin_n = wbin + (A+1)'(winc && !wfull);
  assign wfull  = (wgray == {~rgray_w2[A:A-1], rgray_w2[A-2:0]});

  always_ff @(posedge wclk) begin
    if (winc && !wfull) mem[wbin[A-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= b2g(wbin_n);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // read side
  logic [A:0] rbin_n;
  assign rbin_n = rbin + (A+1)'(rinc && !rempty);
  assign rempty = (rgray == wgray_r2);
  assign rdata  = mem[rbin[A-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_n;
      rgray    <= b2g(rbin_n);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule
