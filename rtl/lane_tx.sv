// lane_tx -- transmit side of one main-band data lane.
//
// A word of UI_PER_CLK bits is written per logic clock (clk) into a small
// dual-clock FIFO, which absorbs the phase difference and drift between the
// logic clock and the bit clock (clk_ui, one edge per unit interval, the
// clock that is also forwarded to the receiver). On the bit clock a
// UI_PER_CLK:1 multiplexer walks through the word, bit u in unit interval u.
// Word slots are UI_PER_CLK bit clocks long; at the end of each slot the next
// word is taken from the FIFO if there is one. ser_valid is high for every
// unit interval that carries a word, so when the FIFO is empty the lane and
// its valid drop to 0 (the lane idles). All lanes of a module run in step;
// the valid of lane 0 serves as the module's valid lane.
//
// Timing: a word appears on ser_data 4 to 6 word slots after it is written
// (FIFO synchronizers plus slot alignment).
//
// The FIFO into the bit-clock domain and the multiplexer serializer follow
// the paper's PHY description; FIFO depth, single-edge bit clock (the real
// forwarded clock is half rate, both edges) and the valid framing are this
// design's choices. The output driver is analog and not modelled.
module lane_tx #(
  parameter int UI_PER_CLK = 16,
  parameter int FIFO_DEPTH = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  word_valid,
  input  logic [UI_PER_CLK-1:0] word,
  output logic                  fifo_full,
  input  logic                  clk_ui,
  output logic                  ser_data,
  output logic                  ser_valid
);
  localparam int UA = $clog2(UI_PER_CLK);

  logic                  f_empty, f_pop;
  logic [UI_PER_CLK-1:0] f_word, w_reg;
  logic [UA-1:0]         pos;
  logic                  act;

  async_fifo #(.WIDTH(UI_PER_CLK), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wclk(clk), .wrst_n(rst_n), .winc(word_valid), .wdata(word), .wfull(fifo_full),
    .rclk(clk_ui), .rrst_n(rst_n), .rinc(f_pop), .rdata(f_word), .rempty(f_empty)
  );

  assign f_pop = (pos == UA'(UI_PER_CLK-1)) && !f_empty;

  always_ff @(posedge clk_ui or negedge rst_n) begin
    if (!rst_n) begin
      pos   <= UA'(UI_PER_CLK-1);
      act   <= 1'b0;
      w_reg <= '0;
    end else begin
      pos <= pos + 1'b1;
      if (pos == UA'(UI_PER_CLK-1)) begin
        act   <= !f_empty;
        w_reg <= f_empty ? '0 : f_word;
      end
    end
  end

  assign ser_data  = act & w_reg[pos];
  assign ser_valid = act;

endmodule
