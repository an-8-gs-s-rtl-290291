// tb_mismatch_corrector -- the full 40-channel corrector against a direct-form
// reference computed at the 8 GS/s sample rate:
//   y[m] = sum_{t=0}^{79} h_(m-t mod 2)[t] * (x[m-t] - off_(m-t mod 2)),
// rounded and saturated to 12 bits. Random coefficient sets, offsets and samples; a
// stretch of blocks with corr_en low must give the raw samples (bypass); full-scale
// input drives the output into saturation. Also checks the 12-clock latency and one
// output block per clock.
module tb_mismatch_corrector;
  import tiadc_pkg::*;
  import tb_tiadc_pkg::*;

  localparam int LAT = 12, NBLK = 90, NS = NBLK * N_CH;

  logic clk = 0, rst_n = 0;
  logic corr_en = 1, in_valid = 0;
  logic signed [SAMP_W-1:0] x [N_CH];
  logic signed [COEF_W-1:0] coef [N_ADC][N_TAPS];
  logic signed [OFF_W-1:0]  offset [N_ADC];
  logic out_valid;
  logic signed [OUT_W-1:0] y [N_CH];

  mismatch_corrector dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int xs [NS];
  bit en_blk [NBLK];
  int h [N_ADC][N_TAPS];
  int off [N_ADC];
  int cycle = 0, first_in = -1, first_out = -1, nout = 0, nsat = 0, nbyp = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int ref_y(int m);
    longint acc = 0;
    for (int t = 0; t < N_TAPS; t++) begin
      int a = (m - t) % N_ADC;
      acc += longint'(h[a][t]) * longint'(xs[m - t] - off[a]);
    end
    return round_sat_ref(acc, COEF_FRAC, OUT_W);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      automatic int k = nout;
      if (first_out < 0) first_out = cycle;
      if (k >= 2 && k < NBLK) begin
        for (int p = 0; p < N_CH; p++) begin
          automatic int m = N_CH * k + p;
          automatic int e = en_blk[k] ? ref_y(m) : xs[m];
          if (en_blk[k] && (e == 2047 || e == -2048)) nsat++;
          checks++;
          if (int'(y[p]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL block %0d phase %0d: %0d expected %0d", k, p, y[p], e);
          end
        end
        if (!en_blk[k]) nbyp++;
      end
      nout++;
    end
  end

  initial begin
    for (int a = 0; a < N_ADC; a++) begin
      off[a] = int'($urandom_range(0, 200)) - 100;
      offset[a] = OFF_W'(off[a]);
      for (int t = 0; t < N_TAPS; t++) begin
        h[a][t] = int'($urandom_range(0, 1 << 14)) - (1 << 13);
        if (t == RESET_TAP) h[a][t] += 1 << COEF_FRAC;
        coef[a][t] = COEF_W'(h[a][t]);
      end
    end
    for (int m = 0; m < NS; m++)
      xs[m] = (m / N_CH >= 60 && m / N_CH < 70) ? ((m % 2 == 1) ? 2047 : -2048)
                                                : int'($urandom_range(0, 4095)) - 2048;
    for (int k = 0; k < NBLK; k++) en_blk[k] = !(k >= 30 && k < 40);
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < NBLK; k++) begin
      in_valid = 1;
      corr_en  = en_blk[k];
      for (int c = 0; c < N_CH; c++) x[c] = SAMP_W'(xs[N_CH * k + c]);
      if (first_in < 0) first_in = cycle;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk); #3;
    checks++;
    if (first_out - first_in != LAT) begin
      failures++; $display("FAIL latency %0d expected %0d", first_out - first_in, LAT);
    end
    checks++;
    if (nout != NBLK) begin failures++; $display("FAIL %0d blocks out", nout); end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never happened"); end
    checks++;
    if (nbyp == 0) begin failures++; $display("FAIL bypass never happened"); end
    $display("saturated samples %0d, bypassed blocks %0d", nsat, nbyp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
