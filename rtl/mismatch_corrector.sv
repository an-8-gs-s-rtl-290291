// mismatch_corrector -- real-time broadband correction of offset, gain and time-skew
// mismatch between the interleaved ADCs.
//
// The 8 GS/s stream arrives as N_CH = 40 channels at 200 MS/s, x[c] = sample 40k + c
// of block k. Mathematically every channel is offset-corrected, up-sampled by 40,
// filtered by the 80-tap FIR of its ADC and delayed by c samples, and the channels
// are summed:  y[m] = sum_t h_a(m-t)[t] * (x[m-t] - off_a(m-t)),  a(j) = j mod 2,
// i.e. an 80-tap filter whose coefficient set alternates with the ADC that took each
// sample. One coefficient set, computed off line for the whole band, corrects gain
// and skew mismatch that vary with frequency.
// Each correction_channel produces its contribution to all 40 output phases of a
// block; one adder_tree per output phase sums the 40 channel contributions. The sum
// is rounded (COEF_FRAC fractional bits dropped, round half up) and saturated to
// OUT_W bits. With corr_en low the raw, uncorrected samples are output instead,
// delayed by the same latency, so the two can be compared.
//
// Interface: in_valid/x[] one block of 40 samples per clock; coef[a][t] and offset[a]
// from the coefficient registers; out_valid/y[] one corrected block per clock.
// Timing: LATENCY = 12 link clocks from a block's input to its output; throughput is
// one 40-sample block per clock, i.e. 8 GS/s at a 200 MHz link clock.
//
// Follows the paper: the 40-channel split, offset before up-sampling, 80-tap filters
// with one set per ADC, the fan-out/polyphase channel structure and the final sum.
// Own choices: the pipeline, the word widths, rounding, saturation and the bypass.
module mismatch_corrector #(
  parameter int N_CH    = tiadc_pkg::N_CH,
  parameter int N_ADC   = tiadc_pkg::N_ADC,
  parameter int N_TAPS  = tiadc_pkg::N_TAPS,
  parameter int N_FAN   = tiadc_pkg::N_FAN,
  parameter int SW      = tiadc_pkg::SAMP_W,
  parameter int OFF_W   = tiadc_pkg::OFF_W,
  parameter int C_W     = tiadc_pkg::COEF_W,
  parameter int C_FRAC  = tiadc_pkg::COEF_FRAC,
  parameter int OUT_W   = tiadc_pkg::OUT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    corr_en,
  input  logic                    in_valid,
  input  logic signed [SW-1:0]    x      [N_CH],
  input  logic signed [C_W-1:0]   coef   [N_ADC][N_TAPS],
  input  logic signed [OFF_W-1:0] offset [N_ADC],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y      [N_CH]
);

  localparam int X_W     = (SW > OFF_W ? SW : OFF_W) + 1;
  localparam int Y_W     = X_W + C_W + 1;
  localparam int S_W     = Y_W + $clog2(N_CH);
  localparam int CH_LAT  = 4;
  localparam int TREE_LAT = $clog2(N_CH) + 1;
  localparam int LATENCY = CH_LAT + TREE_LAT + 1;

  // channel contributions, [channel][output phase], and the same transposed
  logic signed [Y_W-1:0] contrib [N_CH][N_CH];
  logic signed [Y_W-1:0] by_phase [N_CH][N_CH];
  logic signed [S_W-1:0] sum [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    correction_channel #(
      .CH(c), .N_CH(N_CH), .N_FAN(N_FAN), .N_TAPS(N_TAPS), .SW(SW),
      .OFF_W(OFF_W), .C_W(C_W), .X_W(X_W), .Y_W(Y_W)
    ) u_ch (
      .clk     (clk),
      .x       (x[c]),
      .offset  (offset[c % N_ADC]),
      .coef    (coef[c % N_ADC]),
      .contrib (contrib[c])
    );
  end

  for (genvar p = 0; p < N_CH; p++) begin : g_tr
    for (genvar c = 0; c < N_CH; c++) begin : g_c
      assign by_phase[p][c] = contrib[c][p];
    end
  end

  for (genvar p = 0; p < N_CH; p++) begin : g_sum
    adder_tree #(.N(N_CH), .IN_W(Y_W), .OUT_W(S_W)) u_tree (
      .clk (clk),
      .in  (by_phase[p]),
      .sum (sum[p])
    );
  end

  // raw samples and control, delayed to match the corrected path
  logic [N_CH-1:0][SW-1:0] raw_in;
  logic [N_CH-1:0][SW-1:0] raw_pipe [LATENCY-1];
  logic [LATENCY-1:0]      valid_pipe;
  logic [LATENCY-2:0]      en_pipe;

  for (genvar c = 0; c < N_CH; c++) begin : g_raw
    assign raw_in[c] = x[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_pipe <= '0;
    else        valid_pipe <= {valid_pipe[LATENCY-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    raw_pipe[0] <= raw_in;
    en_pipe     <= {en_pipe[LATENCY-3:0], corr_en};
    for (int s = 1; s < LATENCY - 1; s++) raw_pipe[s] <= raw_pipe[s-1];
  end

  // rounding, saturation and output selection
  function automatic logic signed [OUT_W-1:0] round_sat(logic signed [S_W-1:0] s);
    logic signed [S_W:0] r;
    r = (S_W+1)'(s) + (S_W+1)'(1 << (C_FRAC - 1));
    r = r >>> C_FRAC;
    if (r > (S_W+1)'((1 << (OUT_W - 1)) - 1))       return {1'b0, {(OUT_W-1){1'b1}}};
    else if (r < -(S_W+1)'(1 << (OUT_W - 1)))       return {1'b1, {(OUT_W-1){1'b0}}};
    else                                            return r[OUT_W-1:0];
  endfunction

  for (genvar p = 0; p < N_CH; p++) begin : g_out
    always_ff @(posedge clk)
      y[p] <= en_pipe[LATENCY-2] ? round_sat(sum[p])
                                 : OUT_W'(signed'(raw_pipe[LATENCY-2][p]));
  end

  assign out_valid = valid_pipe[LATENCY-1];

endmodule
