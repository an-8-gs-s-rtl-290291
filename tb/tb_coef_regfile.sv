// tb_coef_regfile -- checks the reset values (1.0 at tap RESET_TAP, 0 elsewhere,
// zero offsets), random writes to both coefficient sets and both offsets seen on the
// outputs and through the read-back port (one clock), and that writes to unused
// addresses change nothing.
module tb_coef_regfile;
  import tiadc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_DATA_W-1:0] cfg_wdata = '0;
  logic [CFG_DATA_W-1:0] cfg_rdata;
  logic signed [COEF_W-1:0] coef [N_ADC][N_TAPS];
  logic signed [OFF_W-1:0]  offset [N_ADC];

  coef_regfile dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int mc [N_ADC][N_TAPS];
  int mo [N_ADC];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(int a, int d);
    cfg_we = 1; cfg_addr = CFG_ADDR_W'(a); cfg_wdata = CFG_DATA_W'(d);
    @(posedge clk); #1; cfg_we = 0;
  endtask

  task automatic rd(int a, output int d);
    cfg_addr = CFG_ADDR_W'(a);
    @(posedge clk); #1; d = int'(cfg_rdata);
  endtask

  task automatic check_all(string when);
    int d;
    for (int s = 0; s < N_ADC; s++) begin
      check(int'(offset[s]) == mo[s], $sformatf("%s offset %0d", when, s));
      rd(256 + s, d);
      check(d == mo[s], $sformatf("%s offset %0d read-back", when, s));
      for (int t = 0; t < N_TAPS; t++) begin
        check(int'(coef[s][t]) == mc[s][t], $sformatf("%s coef %0d/%0d", when, s, t));
        rd(s * 128 + t, d);
        check(d == mc[s][t], $sformatf("%s coef %0d/%0d read-back", when, s, t));
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < N_ADC; s++) begin
      mo[s] = 0;
      for (int t = 0; t < N_TAPS; t++) mc[s][t] = (t == RESET_TAP) ? (1 << COEF_FRAC) : 0;
    end
    check_all("reset");
    for (int n = 0; n < 400; n++) begin
      automatic int s = $urandom_range(0, N_ADC - 1);
      if (n % 10 == 0) begin
        automatic int v = int'($urandom_range(0, 4095)) - 2048;
        wr(256 + s, v); mo[s] = v;
      end else begin
        automatic int t = $urandom_range(0, N_TAPS - 1);
        automatic int v = int'($urandom_range(0, (1 << COEF_W) - 1)) - (1 << (COEF_W - 1));
        wr(s * 128 + t, v); mc[s][t] = v;
      end
    end
    // unused addresses: taps 80..127 and offsets 258..511
    wr(100, 12345); wr(128 + 127, 777); wr(300, 55);
    check_all("after writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
