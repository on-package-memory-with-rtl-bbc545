// logphy_rx -- receive half of the logical PHY.
//
// Pops one word from every lane's receive FIFO in the same clock, once all
// of them hold a word, descrambles each (one XOR against the precomputed key
// of that lane) and reassembles the 2*N_LANES-byte beat in the byte order of
// logphy_tx. The beat is registered: beat_valid follows the pop by one clock.
//
// Descrambling with a single XOR level is the paper's; byte order and seeds
// match logphy_tx and are this design's choices. Lane reversal and repair
// are not implemented.
module logphy_rx #(
  parameter int N_LANES    = 64,
  parameter int UI_PER_CLK = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  lane_valid [N_LANES],
  input  logic [UI_PER_CLK-1:0] lane_word  [N_LANES],
  output logic                  lane_pop,
  output logic                  beat_valid,
  output logic [N_LANES*UI_PER_CLK-1:0] beat_data
);
  localparam int BYTES_PER_LANE = UI_PER_CLK / 8;

  always_comb begin
    lane_pop = 1'b1;
    for (int l = 0; l < N_LANES; l++) lane_pop &= lane_valid[l];
  end

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    logic [UI_PER_CLK-1:0] plain;
    lane_scrambler #(
      .UI_PER_CLK(UI_PER_CLK),
      .SEED(23'h1DBFBC ^ 23'(l * 32'h0002F1A3) | 23'h1)
    ) u_dscr (
      .clk, .rst_n, .adv(lane_pop), .din(lane_word[l]), .dout(plain)
    );
    for (genvar k = 0; k < BYTES_PER_LANE; k++) begin : g_byte
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)        beat_data[(k*N_LANES + l)*8 +: 8] <= '0;
        else if (lane_pop) beat_data[(k*N_LANES + l)*8 +: 8] <= plain[k*8 +: 8];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) beat_valid <= 1'b0;
    else        beat_valid <= lane_pop;
  end

endmodule
