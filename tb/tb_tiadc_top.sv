// tb_tiadc_top -- end-to-end test of the digitizer logic at its default sizes.
//
// A sine wave with per-ADC gain, skew and offset errors is sampled by two model ADCs
// and packed into JESD204B frames (tb_tiadc_pkg::pack_frame). The test
//   * brings the links up: SYNC_N must stay low until both cores release it;
//   * loads both 80-tap coefficient sets and the offsets over the register bus;
//   * streams 16,500 frames per ADC and checks every corrected output sample against
//     the 8 GS/s direct-form reference, y[m] = sum_t h_(m-t mod 2)[t]*(x[m-t]-off),
//     and the 14-clock latency from a frame's first half to its first output block;
//   * switches the correction off for a stretch (raw bypass) and back on;
//   * drives a full-scale stretch so the output saturates;
//   * records one full 32768-block capture and reads words of it back;
//   * sends a frame with a bad tail (frame_err) and skews one link (align_err).
// Each of these mechanisms is counted and must have happened at least once.
module tb_tiadc_top;
  import tiadc_pkg::*;
  import tb_tiadc_pkg::*;

  localparam int CAP    = 32768;
  localparam int NF     = CAP / 2 + 116;      // frames per ADC
  localparam int NB     = 2 * NF;             // 40-sample blocks
  localparam int NS     = NB * N_CH;
  localparam int TOP_LAT = 14;
  localparam int TRIG_BLK = 100;

  logic clk = 0, rst_n = 0;
  logic [N_ADC-1:0] rx_valid = '0, rx_sof = '0, core_sync_n = '0;
  rx_half_t rx_data [N_ADC];
  logic sync_n, link_up;
  logic cfg_we = 0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_DATA_W-1:0] cfg_wdata = '0, cfg_rdata;
  logic corr_en = 1;
  logic out_valid;
  logic signed [OUT_W-1:0] out_y [N_CH];
  logic cap_arm = 0, cap_trig = 0, cap_busy, cap_done;
  logic [$clog2(CAP)-1:0] cap_rd_addr = '0;
  logic [N_CH*OUT_W-1:0] cap_rd_data;
  logic frame_err, align_err;

  tiadc_top dut (.*);

  always #2.5 clk = ~clk;   // 200 MHz link clock

  int checks = 0, failures = 0;
  int xs [NS];
  int h [N_ADC][N_TAPS];
  int off [N_ADC];
  bit mode_q [$];
  int cycle = 0, first_in = -1, first_out = -1, nout = 0;
  int n_sat = 0, n_byp = 0, n_corr = 0, n_ferr = 0, n_aerr = 0, n_cap = 0, n_sync = 0;
  bit checking = 1;
  logic [OUT_W-1:0] kept [TRIG_BLK + 64][N_CH];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  function automatic int ref_y(int m);
    longint acc = 0;
    for (int t = 0; t < N_TAPS; t++) begin
      int a = (m - t) % N_ADC;
      acc += longint'(h[a][t]) * longint'(xs[m - t] - off[a]);
    end
    return round_sat_ref(acc, COEF_FRAC, OUT_W);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mode of every block as it enters the corrector
  always @(posedge clk) if (rst_n && dut.ch_valid) mode_q.push_back(corr_en);

  // output checker and capture trigger
  always @(posedge clk) begin
    #1;
    cap_trig = 0;
    if (rst_n && frame_err) n_ferr++;
    if (rst_n && align_err) n_aerr++;
    if (rst_n && out_valid) begin
      automatic int k = nout;
      automatic bit md = mode_q.pop_front();
      if (first_out < 0) first_out = cycle;
      if (checking && k >= 2) begin
        if (md) n_corr++; else n_byp++;
        for (int p = 0; p < N_CH; p++) begin
          automatic int m = N_CH * k + p;
          automatic int e = md ? ref_y(m) : xs[m];
          if (md && (e == 2047 || e == -2048)) n_sat++;
          check(int'(out_y[p]) == e, $sformatf("block %0d sample %0d: %0d expected %0d",
                                               k, p, out_y[p], e));
        end
      end
      if (k >= TRIG_BLK && k < TRIG_BLK + 64)
        for (int p = 0; p < N_CH; p++) kept[k][p] = out_y[p];
      if (k == TRIG_BLK) cap_trig = 1;   // the block now on out_y is record word 0
      nout++;
    end
  end

  task automatic send_frame(int f, logic [3:0] tail, bit skew);
    int s [N_ADC][SAMPLES_PER_FRAME];
    rx_half_t h1 [N_ADC], h2 [N_ADC];
    for (int a = 0; a < N_ADC; a++) begin
      for (int i = 0; i < SAMPLES_PER_FRAME; i++)
        s[a][i] = xs[(f * SAMPLES_PER_FRAME + i) * N_ADC + a];
      pack_frame(s[a], tail, h1[a], h2[a]);
    end
    if (!skew) begin
      rx_valid = '1; rx_sof = '1; rx_data[0] = h1[0]; rx_data[1] = h1[1];
      @(posedge clk); #0.5;
      rx_sof = '0; rx_data[0] = h2[0]; rx_data[1] = h2[1];
      @(posedge clk); #0.5;
    end else begin
      rx_valid = 2'b01; rx_sof = 2'b01; rx_data[0] = h1[0];
      @(posedge clk); #0.5;
      rx_valid = 2'b11; rx_sof = 2'b10; rx_data[0] = h2[0]; rx_data[1] = h1[1];
      @(posedge clk); #0.5;
      rx_valid = 2'b10; rx_sof = 2'b00; rx_data[1] = h2[1];
      @(posedge clk); #0.5;
    end
    rx_valid = '0;
  endtask

  initial begin
    // --- input waveform: 648 MHz sine, ADC2 with gain, skew and offset errors ---
    for (int m = 0; m < NS; m++) begin
      automatic int a = m % 2;
      automatic real g  = a ? 0.97 : 1.0;
      automatic real dt = a ? 0.03 : 0.0;     // skew, in 8 GS/s samples
      automatic int  o  = a ? 25 : -10;
      automatic int  k  = m / N_CH;
      automatic real v  = 1400.0 * g * $sin(2.0 * 3.14159265358979 * 0.081 * (real'(m) + dt)) + o;
      if (k >= 400 && k < 420) v = a ? 2047.0 : -2048.0;   // full-scale stretch
      if (v > 2047.0) v = 2047.0;
      if (v < -2048.0) v = -2048.0;
      xs[m] = int'(v);
    end
    // --- coefficients: identity at tap 40 plus a random correction part ---
    for (int a = 0; a < N_ADC; a++) begin
      off[a] = a ? 25 : -10;
      for (int t = 0; t < N_TAPS; t++) begin
        h[a][t] = int'($urandom_range(0, 1 << 12)) - (1 << 11);
        if (t == RESET_TAP) h[a][t] += (1 << COEF_FRAC) + (a ? 2000 : 0);
      end
    end

    repeat (4) @(posedge clk); #0.5 rst_n = 1;

    // --- link start-up ---
    repeat (5) @(posedge clk); #0.5;
    check(sync_n == 0, "SYNC_N low while the cores request sync");
    core_sync_n = 2'b01;
    repeat (3) @(posedge clk); #0.5;
    check(sync_n == 0, "SYNC_N low while one core requests sync");
    core_sync_n = 2'b11;
    repeat (10) @(posedge clk); #0.5;
    check(sync_n == 1 && link_up == 1, "links up");
    if (sync_n && link_up) n_sync++;

    // --- register bus ---
    for (int a = 0; a < N_ADC; a++) begin
      for (int t = 0; t < N_TAPS; t++) begin
        cfg_we = 1; cfg_addr = CFG_ADDR_W'(a * 128 + t); cfg_wdata = CFG_DATA_W'(h[a][t]);
        @(posedge clk); #0.5;
      end
      cfg_addr = CFG_ADDR_W'(256 + a); cfg_wdata = CFG_DATA_W'(off[a]);
      @(posedge clk); #0.5;
    end
    cfg_we = 0; cfg_addr = CFG_ADDR_W'(128 + 40);
    @(posedge clk); #0.5;
    check(int'(cfg_rdata) == h[1][40], "coefficient read-back");
    cap_arm = 1; @(posedge clk); #0.5; cap_arm = 0;

    // --- stream ---
    for (int f = 0; f < NF; f++) begin
      corr_en = !(f >= 200 && f < 210);
      if (first_in < 0) first_in = cycle;
      send_frame(f, 4'h0, 0);
    end
    repeat (TOP_LAT + 4) @(posedge clk); #0.5;
    check(first_out - first_in == TOP_LAT, $sformatf("latency %0d expected %0d",
                                                     first_out - first_in, TOP_LAT));
    check(nout == NB, $sformatf("%0d blocks out of %0d", nout, NB));
    check(cap_done, "capture record complete");

    // --- read back part of the record ---
    for (int w = 0; w < 64; w++) begin
      cap_rd_addr = $clog2(CAP)'(w);
      @(posedge clk); #0.5;
      for (int p = 0; p < N_CH; p++)
        check(cap_rd_data[p*OUT_W +: OUT_W] == kept[TRIG_BLK + w][p],
              $sformatf("record word %0d sample %0d", w, p));
      n_cap++;
    end

    // --- error flags: bad tail, then a skewed link ---
    checking = 0;
    send_frame(0, 4'h3, 0);
    send_frame(1, 4'h0, 1);
    repeat (6) @(posedge clk); #0.5;

    $display("mechanisms: sync %0d corrected-blocks %0d bypassed-blocks %0d saturated %0d",
             n_sync, n_corr, n_byp, n_sat);
    $display("            record-words-read %0d frame_err %0d align_err %0d",
             n_cap, n_ferr, n_aerr);
    check(n_sync > 0, "link start-up happened");
    check(n_corr > 0, "correction happened");
    check(n_byp > 0,  "bypass happened");
    check(n_sat > 0,  "saturation happened");
    check(n_cap > 0,  "capture read-back happened");
    check(n_ferr > 0, "frame error flagged");
    check(n_aerr > 0, "link misalignment flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
