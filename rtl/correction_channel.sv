// correction_channel -- one of the 40 parallel channels of the mismatch corrector.
//
// Channel CH carries every 40th sample of the 8 GS/s stream, x_CH[k] = x[40k + CH].
// In the reference structure this channel is offset-corrected, up-sampled by 40,
// filtered by the 80-tap FIR of its ADC (coefficient set C for even channels, D for
// odd ones) and delayed by CH output samples before all channels are summed.
// Here that is done at the channel rate: after the offset is subtracted, the sample
// is fanned out to 5 branches; branch b holds the 8 polyphase filters of phases
// r = b, b+5, ..., b+35, each a two-tap filter C_r * x[k] + C_(r+40) * x[k-1].
// Phase r contributes to output sample 40k + CH + r. When CH + r >= 40 that sample
// belongs to the next output block, so its result is delayed by one clock (the z^-1
// of the wrapped phases) to line up with the other phases of that block.
//
// Interface: x is the raw channel sample, offset and coef[] are the values of this
// channel's ADC. contrib[p] is this channel's contribution to output phase p.
// Timing: contrib[] for output block k is valid 4 clocks after x_CH[k] is presented
// (offset register, fan-out register, two filter stages); one block per clock.
//
// Follows the paper: offset subtraction before filtering, 5-way fan-out with 8
// polyphase filters each, pairing of taps r and r+40, z^-1 on wrapped phases.
// Own choices: the register stages and that all 40 contributions leave the channel
// already aligned to one output block, which makes a further delay unnecessary.
module correction_channel #(
  parameter int CH     = 0,
  parameter int N_CH   = tiadc_pkg::N_CH,
  parameter int N_FAN  = tiadc_pkg::N_FAN,
  parameter int N_TAPS = tiadc_pkg::N_TAPS,
  parameter int SW     = tiadc_pkg::SAMP_W,
  parameter int OFF_W  = tiadc_pkg::OFF_W,
  parameter int C_W    = tiadc_pkg::COEF_W,
  parameter int X_W    = (SW > OFF_W ? SW : OFF_W) + 1,
  parameter int Y_W    = X_W + C_W + 1
) (
  input  logic                    clk,
  input  logic signed [SW-1:0]    x,
  input  logic signed [OFF_W-1:0] offset,
  input  logic signed [C_W-1:0]   coef    [N_TAPS],
  output logic signed [Y_W-1:0]   contrib [N_CH]
);

  localparam int PER_FAN = N_CH / N_FAN;

  // offset correction
  logic signed [X_W-1:0] xo;
  always_ff @(posedge clk) xo <= X_W'(x) - X_W'(offset);

  // fan-out: every branch gets its own copy of x[k] and x[k-1]
  logic signed [X_W-1:0] xf   [N_FAN];
  logic signed [X_W-1:0] xf_d [N_FAN];
  always_ff @(posedge clk) begin
    for (int b = 0; b < N_FAN; b++) begin
      xf[b]   <= xo;
      xf_d[b] <= xf[b];
    end
  end

  // polyphase filters, indexed by phase r
  logic signed [Y_W-1:0] pf_out [N_CH];

  for (genvar b = 0; b < N_FAN; b++) begin : g_fan
    for (genvar j = 0; j < PER_FAN; j++) begin : g_pf
      localparam int R = b + N_FAN * j;
      polyphase_filter #(.X_W(X_W), .C_W(C_W), .Y_W(Y_W)) u_pf (
        .clk (clk),
        .x0  (xf[b]),
        .x1  (xf_d[b]),
        .c0  (coef[R]),
        .c1  (coef[R + N_CH]),
        .y   (pf_out[R])
      );
    end
  end

  // z^-1 for the phases that wrap into the next output block
  logic signed [Y_W-1:0] pf_late [N_CH];
  always_ff @(posedge clk) pf_late <= pf_out;

  always_comb begin
    for (int r = 0; r < N_CH; r++) begin
      if (CH + r >= N_CH) contrib[CH + r - N_CH] = pf_late[r];
      else                contrib[CH + r]        = pf_out[r];
    end
  end

endmodule
