// tb_sync_n_gen -- checks that SYNC_N is low in reset, follows the AND of the cores'
// requests one clock later, and that link_up rises only after LOCK_CYCLES clocks of
// SYNC_N high and drops with SYNC_N.
module tb_sync_n_gen;
  localparam int LOCK = 4;
  logic clk = 0, rst_n = 0;
  logic [1:0] core_sync_n;
  logic sync_n, link_up;
  int checks = 0, failures = 0;

  sync_n_gen #(.N_LINKS(2), .LOCK_CYCLES(LOCK)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_sync_n = 2'b11;
    repeat (3) @(posedge clk);
    #1 check(sync_n == 0, "sync_n low in reset");
    rst_n = 1;
    // all combinations, expected = AND, one clock later
    for (int i = 0; i < 4; i++) begin
      core_sync_n = 2'(i);
      @(posedge clk); #1;
      check(sync_n == (i == 3), $sformatf("sync_n for requests %b", 2'(i)));
    end
    // link_up: count clocks with sync_n high
    core_sync_n = 2'b00; @(posedge clk); @(posedge clk); #1;
    check(link_up == 0, "link_up low while syncing");
    core_sync_n = 2'b11;
    @(posedge clk); #1;   // sync_n rises here
    check(sync_n == 1, "sync_n high");
    for (int n = 1; n <= LOCK + 1; n++) begin
      @(posedge clk); #1;
      check(link_up == (n >= LOCK), $sformatf("link_up after %0d clocks", n));
    end
    // one core drops sync: both go down
    core_sync_n = 2'b01;
    @(posedge clk); #1; check(sync_n == 0, "resync pulls sync_n low");
    @(posedge clk); #1; check(link_up == 0, "link_up drops");
    // random
    for (int i = 0; i < 50; i++) begin
      automatic logic [1:0] r = 2'($urandom);
      core_sync_n = r;
      @(posedge clk); #1;
      check(sync_n == &r, "random request pattern");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
