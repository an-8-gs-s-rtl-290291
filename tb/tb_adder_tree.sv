// tb_adder_tree -- 40 random signed inputs per clock (and full-scale corners); checks
// the sum after LATENCY = ceil(log2 40) + 1 = 7 clocks, every clock.
module tb_adder_tree;
  localparam int N = 40, IW = 32, OW = IW + 6, LAT = 7;
  logic clk = 0;
  logic signed [IW-1:0] in [N];
  logic signed [OW-1:0] sum;
  longint hist [$];
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IN_W(IW), .OUT_W(OW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      automatic longint s = 0;
      for (int k = 0; k < N; k++) begin
        if (i == 0)      in[k] = (1 <<< (IW-1)) - 1;
        else if (i == 1) in[k] = -(1 <<< (IW-1));
        else             in[k] = IW'($urandom);
        s += in[k];
      end
      hist.push_back(s);
      @(posedge clk); #1;
      if (hist.size() == LAT) begin
        automatic longint e = hist.pop_front();
        checks++;
        if (longint'(sum) != e) begin
          failures++;
          $display("FAIL i=%0d sum=%0d expected %0d", i, sum, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
