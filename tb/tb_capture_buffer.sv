// tb_capture_buffer -- a 16-word record memory: nothing is written before arm and
// trigger, exactly DEPTH valid blocks are written from the trigger on (gaps in
// in_valid skipped), done rises after the last one, later blocks are not written,
// and a second record after re-arming overwrites the first. Read data follow the
// address by one clock.
module tb_capture_buffer;
  localparam int N = 4, SW = 12, DEPTH = 16, AW = 4;
  logic clk = 0, rst_n = 0;
  logic arm = 0, trig = 0, in_valid = 0;
  logic signed [SW-1:0] in_data [N];
  logic busy, done;
  logic [AW-1:0] rd_addr = '0;
  logic [N*SW-1:0] rd_data;

  capture_buffer #(.N_CH(N), .SW(SW), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int seq = 0;              // running block number written into the data
  int rec [DEPTH];          // block numbers expected in the record

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // one clock of input; block number b in every sample (sample p = b*4 + p)
  task automatic drive(bit v);
    in_valid = v;
    for (int p = 0; p < N; p++) in_data[p] = SW'(seq * N + p);
    @(posedge clk); #1;
    if (v) seq++;
  endtask

  task automatic check_record(string what);
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int p = 0; p < N; p++)
        check(rd_data[p*SW +: SW] == SW'(rec[a] * N + p), $sformatf("%s word %0d sample %0d", what, a, p));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // trigger without arm: ignored
    trig = 1; repeat (5) drive(1); trig = 0;
    check(!busy && !done, "no record without arm");
    arm = 1; drive(1); arm = 0;
    repeat (3) drive(1);
    check(!busy && !done, "armed, waiting for trigger");
    trig = 1;
    for (int a = 0; a < DEPTH; a++) begin
      rec[a] = seq;
      drive(1);
      trig = 0;
      if (a % 5 == 2) drive(0);      // a gap in the stream
      if (a < DEPTH - 1) check(busy, "busy while writing");
    end
    check(done && !busy, "done after DEPTH blocks");
    repeat (4) drive(1);
    check_record("first record");
    // second record
    arm = 1; drive(1); arm = 0;
    check(!done, "re-arm clears done");
    trig = 1;
    for (int a = 0; a < DEPTH; a++) begin
      rec[a] = seq; drive(1); trig = 0;
    end
    check(done, "second record done");
    check_record("second record");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
