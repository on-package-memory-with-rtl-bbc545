// logphy_tx -- transmit half of the logical PHY.
//
// Takes one beat of 2*N_LANES bytes per clock from the die-to-die adapter and
// spreads it over N_LANES lanes of UI_PER_CLK (= 16) unit intervals: lane l
// carries beat byte l in unit intervals 0..7 and beat byte N_LANES+l in unit
// intervals 8..15, each byte least-significant bit first. Each lane word is
// then scrambled (one XOR against a key precomputed in the previous clock)
// and registered, so the lanes get the beat one clock later.
//
// The (2N)-byte datapath at a 16:1 ratio and the one-level XOR scrambling are
// the paper's; the byte-to-lane order and the per-lane seeds are this
// design's choices. Lane reversal, width degrade and the link training
// patterns that the paper places in this block are not implemented.
module logphy_tx #(
  parameter int N_LANES    = 64,
  parameter int UI_PER_CLK = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  beat_valid,
  input  logic [N_LANES*UI_PER_CLK-1:0] beat_data,
  output logic                  lane_valid,
  output logic [UI_PER_CLK-1:0] lane_word [N_LANES]
);
  localparam int BYTES_PER_LANE = UI_PER_CLK / 8;

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    logic [UI_PER_CLK-1:0] plain, scr;
    always_comb
      for (int k = 0; k < BYTES_PER_LANE; k++)
        plain[k*8 +: 8] = beat_data[(k*N_LANES + l)*8 +: 8];
    lane_scrambler #(
      .UI_PER_CLK(UI_PER_CLK),
      .SEED(23'h1DBFBC ^ 23'(l * 32'h0002F1A3) | 23'h1)
    ) u_scr (
      .clk, .rst_n, .adv(beat_valid), .din(plain), .dout(scr)
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          lane_word[l] <= '0;
      else if (beat_valid) lane_word[l] <= scr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lane_valid <= 1'b0;
    else        lane_valid <= beat_valid;
  end

endmodule
