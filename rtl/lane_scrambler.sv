// lane_scrambler -- scrambler / descrambler of one data lane.
//
// Each lane word (UI_PER_CLK bits, bit u sent in unit interval u) is XORed
// with the next UI_PER_CLK bits of a 23-bit Fibonacci LFSR,
// x^23 + x^21 + x^16 + x^8 + x^5 + x^2 + 1, seeded per lane with SEED. The
// key word for the next clock is precomputed into a register in the clock
// before it is used, so the datapath itself is a single XOR per bit. The
// same block descrambles: both ends start from the same seed after reset and
// advance only on words that are actually sent (adv), so they stay in step.
//
// Interface: din/dout combinational through one XOR level; adv advances the
// key at the next clock edge.
//
// The single XOR level with a precomputed key is the paper's; the polynomial
// (the one PCIe and UCIe use) and the per-lane seeds are this design's
// choice.
module lane_scrambler #(
  parameter int          UI_PER_CLK = 16,
  parameter logic [22:0] SEED       = 23'h1DBFBC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  adv,
  input  logic [UI_PER_CLK-1:0] din,
  output logic [UI_PER_CLK-1:0] dout
);
  typedef struct packed {
    logic [22:0]           state;
    logic [UI_PER_CLK-1:0] key;
  } step_t;

  function automatic step_t run(input logic [22:0] s_in);
    step_t r;
    logic [22:0] s;
    logic fb;
    s = s_in;
    for (int u = 0; u < UI_PER_CLK; u++) begin
      r.key[u] = s[22];
      fb = s[22] ^ s[20] ^ s[15] ^ s[7] ^ s[4] ^ s[1];
      s  = {s[21:0], fb};
    end
    r.state = s;
    return r;
  endfunction

  step_t cur, nxt;
  assign nxt  = run(cur.state);
  assign dout = din ^ cur.key;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   cur <= run(SEED);
    else if (adv) cur <= nxt;
  end

endmodule
