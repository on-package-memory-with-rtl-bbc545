// lane_rx -- receive side of one main-band data lane.
//
// The lane is sampled on the forwarded clock (clk_fwd, one edge per unit
// interval). The module's valid lane frames the words: the first unit
// interval with valid high starts a word, and every UI_PER_CLK valid bits
// form one word (bit u from unit interval u), which is pushed into a
// dual-clock FIFO. The receiver's logic clock (clk) reads the FIFO: word is
// the head word while word_valid is high and word_pop removes it. The FIFO
// takes up drift between the forwarded clock and the receiver's logic clock.
//
// Timing: a word is readable 3 to 4 logic clocks after its last bit arrives.
//
// Deserialization through a FIFO is the paper's; the valid-framed word
// alignment and the FIFO depth are this design's choices. The receive
// amplifier and clock tracking are analog and not modelled.
module lane_rx #(
  parameter int UI_PER_CLK = 16,
  parameter int FIFO_DEPTH = 8
) (
  input  logic                  clk_fwd,
  input  logic                  rst_n,
  input  logic                  ser_data,
  input  logic                  ser_valid,
  input  logic                  clk,
  output logic                  word_valid,
  output logic [UI_PER_CLK-1:0] word,
  input  logic                  word_pop,
  output logic                  overflow
);
  localparam int UA = $clog2(UI_PER_CLK);

  logic [UA-1:0]         cnt;
  logic [UI_PER_CLK-1:0] sh, full_word;
  logic                  push, f_full, f_empty;

  always_comb begin
    full_word = sh;
    full_word[UI_PER_CLK-1] = ser_data;
  end
  assign push = ser_valid && (cnt == UA'(UI_PER_CLK-1));

  always_ff @(posedge clk_fwd or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      sh       <= '0;
      overflow <= 1'b0;
    end else if (ser_valid) begin
      sh[cnt] <= ser_data;
      cnt     <= cnt + 1'b1;
      if (push && f_full) overflow <= 1'b1;
    end else begin
      cnt <= '0;
    end
  end

  async_fifo #(.WIDTH(UI_PER_CLK), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wclk(clk_fwd), .wrst_n(rst_n), .winc(push), .wdata(full_word), .wfull(f_full),
    .rclk(clk), .rrst_n(rst_n), .rinc(word_pop), .rdata(word), .rempty(f_empty)
  );

  assign word_valid = !f_empty;

endmodule
