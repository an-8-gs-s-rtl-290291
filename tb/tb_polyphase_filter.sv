// tb_polyphase_filter -- random samples and coefficients, checks y = c0*x0 + c1*x1
// two clocks after the operands, including full-scale corners.
module tb_polyphase_filter;
  localparam int XW = 13, CW = 18, YW = XW + CW + 1;
  logic clk = 0;
  logic signed [XW-1:0] x0, x1;
  logic signed [CW-1:0] c0, c1;
  logic signed [YW-1:0] y;
  longint expq [$];
  int checks = 0, failures = 0;

  polyphase_filter #(.X_W(XW), .C_W(CW), .Y_W(YW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      if (i < 4) begin
        x0 = (i[0]) ? -(1 <<< (XW-1)) : (1 <<< (XW-1)) - 1;
        x1 = -(1 <<< (XW-1));
        c0 = (i[1]) ? -(1 <<< (CW-1)) : (1 <<< (CW-1)) - 1;
        c1 = -(1 <<< (CW-1));
      end else begin
        x0 = XW'($urandom); x1 = XW'($urandom);
        c0 = CW'($urandom); c1 = CW'($urandom);
      end
      expq.push_back(longint'(x0) * c0 + longint'(x1) * c1);
      @(posedge clk); #1;
      if (expq.size() == 2) begin
        // y now holds the result of the operands applied on the previous clock
        automatic longint e = expq.pop_front();
        checks++;
        if (longint'(y) != e) begin
          failures++;
          $display("FAIL i=%0d y=%0d expected %0d", i, y, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
