// tb_correction_channel -- one channel with a random coefficient set and offset.
// For every output phase p the expected contribution is worked out from the channel
// sample history: phase r = (p - CH) mod 40 acts on x[k] (p >= CH) or on x[k-1]
// (p < CH, the wrapped phases), together with tap r+40 on the sample before.
// Checked for CH = 0 (no wrap) and CH = 37 (37 wrapped phases), four clocks of latency.
module tb_correction_channel;
  localparam int NCH = 40, NT = 80, SW = 12, OW = 12, CW = 18;
  localparam int XW = 13, YW = XW + CW + 1, LAT = 4;
  localparam int NBLK = 120;

  logic clk = 0;
  logic signed [SW-1:0] x [2];
  logic signed [OW-1:0] offset;
  logic signed [CW-1:0] coef [NT];
  logic signed [YW-1:0] contrib0 [NCH];
  logic signed [YW-1:0] contrib1 [NCH];

  correction_channel #(.CH(0))  dut0 (.clk(clk), .x(x[0]), .offset(offset), .coef(coef), .contrib(contrib0));
  correction_channel #(.CH(37)) dut1 (.clk(clk), .x(x[1]), .offset(offset), .coef(coef), .contrib(contrib1));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hx [2][NBLK];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_c(int ch, int k, int p);
    int r = (p - ch + NCH) % NCH;
    int d = (p < ch) ? 1 : 0;
    int i = (ch == 0) ? 0 : 1;
    return longint'(coef[r]) * (hx[i][k-d] - offset) + longint'(coef[r+NCH]) * (hx[i][k-d-1] - offset);
  endfunction

  initial begin
    offset = OW'($urandom_range(0, 200)) - 12'sd100;
    for (int t = 0; t < NT; t++) coef[t] = CW'($urandom);
    for (int k = 0; k < NBLK; k++) begin
      for (int i = 0; i < 2; i++) begin
        hx[i][k] = (k < 3) ? ((k % 2 == 1) ? 2047 : -2048) : int'($urandom_range(0, 4095)) - 2048;
        x[i] = SW'(hx[i][k]);
      end
      @(posedge clk); #1;
      // contributions for block kk = k - (LAT - 1) are now at the outputs
      if (k - (LAT - 1) >= 2) begin
        automatic int kk = k - (LAT - 1);
        for (int p = 0; p < NCH; p++) begin
          checks += 2;
          if (longint'(contrib0[p]) != expect_c(0, kk, p)) begin
            failures++; $display("FAIL CH0 block %0d phase %0d", kk, p);
          end
          if (longint'(contrib1[p]) != expect_c(37, kk, p)) begin
            failures++; $display("FAIL CH37 block %0d phase %0d", kk, p);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
