// polyphase_filter -- one two-tap polyphase branch of the 80-tap correction FIR.
//
// The 80-tap filter of a channel, run on a stream up-sampled by 40, touches only two
// input samples per output sample: tap r acts on the current channel sample x[k] and
// tap r+40 on the previous one x[k-1]. This module computes that pair,
//     y[k] = c0 * x0 + c1 * x1,  c0 = C_r, c1 = C_(r+40), x0 = x[k], x1 = x[k-1],
// in full precision (no rounding).
//
// Interface: signed samples x0, x1 and signed coefficients c0, c1; signed y.
// Timing: two register stages (products, then their sum); y follows x0/x1 by two
// clocks. One result per clock.
//
// The pairing of C_r with C_(r+40) follows the paper's parallel structure; the
// two-stage pipeline is this design's own choice.
module polyphase_filter #(
  parameter int X_W = tiadc_pkg::SAMP_W + 1,
  parameter int C_W = tiadc_pkg::COEF_W,
  parameter int Y_W = X_W + C_W + 1
) (
  input  logic                  clk,
  input  logic signed [X_W-1:0] x0,
  input  logic signed [X_W-1:0] x1,
  input  logic signed [C_W-1:0] c0,
  input  logic signed [C_W-1:0] c1,
  output logic signed [Y_W-1:0] y
);

  logic signed [X_W+C_W-1:0] p0, p1;

  always_ff @(posedge clk) begin
    p0 <= x0 * c0;
    p1 <= x1 * c1;
    y  <= Y_W'(p0) + Y_W'(p1);
  end

endmodule
