// tb_frame_repack -- streams random JESD204B frames (packed as the ADC would send
// them) into the repackager and checks every 20-sample output word against the
// samples that were packed, the two-clock latency and the continuous output rate,
// and the error flag for a non-zero tail nibble and for a second half without a first.
module tb_frame_repack;
  import tiadc_pkg::*;
  import tb_tiadc_pkg::*;

  localparam int NF = 60;

  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_sof = 0;
  rx_half_t rx_data;
  logic out_valid, frame_err;
  half_e half;
  logic signed [SAMP_W-1:0] samples [SAMPLES_PER_CLK];

  frame_repack dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  int expq [$];          // expected samples, 20 per word
  int exp_cycle [$];     // cycle at which each word should appear
  int words = 0, errs_seen = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      int ec, e;
      ec = exp_cycle.pop_front();
      check(cycle == ec, $sformatf("word %0d timing: at %0d expected %0d", words, cycle, ec));
      check(half == ((words % 2 == 1) ? HALF_SECOND : HALF_FIRST), "half marker");
      for (int k = 0; k < SAMPLES_PER_CLK; k++) begin
        e = expq.pop_front();
        check(int'(samples[k]) == e, $sformatf("word %0d sample %0d: %0d expected %0d",
                                              words, k, samples[k], e));
      end
      words++;
    end
    if (rst_n && frame_err) errs_seen++;
  end

  initial begin
    int s [SAMPLES_PER_FRAME];
    rx_half_t h1, h2;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < SAMPLES_PER_FRAME; i++) begin
        s[i] = int'($urandom_range(0, 4095)) - 2048;
        if (f == 0) s[i] = (i % 2) ? 2047 : -2048;
        expq.push_back(s[i]);
      end
      pack_frame(s, 4'h0, h1, h2);
      rx_valid = 1; rx_sof = 1; rx_data = h1;
      exp_cycle.push_back(cycle + 2);
      exp_cycle.push_back(cycle + 3);
      @(posedge clk); #1;
      rx_sof = 0; rx_data = h2;
      @(posedge clk); #1;
    end
    rx_valid = 0;
    repeat (5) @(posedge clk); #1;
    check(words == 2 * NF, $sformatf("%0d words out of %0d", words, 2 * NF));
    check(errs_seen == 0, "no error on good frames");
    // frame with a non-zero tail nibble: data still delivered, error flagged
    for (int i = 0; i < SAMPLES_PER_FRAME; i++) begin
      s[i] = i; expq.push_back(i);
    end
    pack_frame(s, 4'h5, h1, h2);
    rx_valid = 1; rx_sof = 1; rx_data = h1;
    exp_cycle.push_back(cycle + 2); exp_cycle.push_back(cycle + 3);
    @(posedge clk); #1; rx_sof = 0; rx_data = h2;
    @(posedge clk); #1; rx_valid = 0;
    repeat (4) @(posedge clk); #1;
    check(errs_seen == 1, "tail error flagged once");
    // a second half without a first half: no output, error flagged
    rx_valid = 1; rx_sof = 0; rx_data = h2;
    @(posedge clk); #1; rx_valid = 0;
    repeat (4) @(posedge clk); #1;
    check(errs_seen == 2, "orphan second half flagged");
    check(words == 2 * NF + 2, "no output for an orphan half");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
