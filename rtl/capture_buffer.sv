// capture_buffer -- record memory for the corrected waveform.
//
// The corrected 8 GS/s stream (one block of N_CH samples per link clock) is far
// faster than the host link, so a record is first written into on-chip memory and
// read out afterwards. Arming the buffer (arm) and then a trigger (trig) starts a
// record: the next DEPTH valid blocks are written at addresses 0..DEPTH-1, then the
// buffer stops and raises done. A new arm clears done and allows the next record.
// Words read through rd_addr/rd_data hold one block, sample p in bits
// [p*SW +: SW] (p = 0 is the earliest sample of the block).
//
// Interface: in_valid/in_data[] from the corrector; arm, trig (level, sampled while
// armed); busy while writing; done when a record is complete.
// Timing: the block present on the clock where trig is seen while armed is the first
// one written; rd_data follows rd_addr by one clock.
//
// The paper names a data receiver and buffer between the correction and the host
// interface but does not describe it; this simple post-trigger record memory and its
// depth are this design's own.
module capture_buffer #(
  parameter int N_CH  = tiadc_pkg::N_CH,
  parameter int SW    = tiadc_pkg::OUT_W,
  parameter int DEPTH = 32768,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 arm,
  input  logic                 trig,
  input  logic                 in_valid,
  input  logic signed [SW-1:0] in_data [N_CH],
  output logic                 busy,
  output logic                 done,
  input  logic [AW-1:0]        rd_addr,
  output logic [N_CH*SW-1:0]   rd_data
);

  typedef enum logic [1:0] {IDLE, ARMED, WRITING, DONE} state_e;

  state_e              state;
  logic [AW-1:0]       wr_addr;
  logic [N_CH*SW-1:0]  mem [DEPTH];
  logic [N_CH*SW-1:0]  word;
  logic                wr_en;

  always_comb begin
    for (int p = 0; p < N_CH; p++) word[p*SW +: SW] = in_data[p];
  end

  assign wr_en = in_valid && ((state == WRITING) || (state == ARMED && trig));
  assign busy  = (state == WRITING);
  assign done  = (state == DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      wr_addr <= '0;
    end else begin
      case (state)
        IDLE:    if (arm) state <= ARMED;
        ARMED:   if (trig && in_valid) begin
                   wr_addr <= AW'(1);
                   state   <= (DEPTH == 1) ? DONE : WRITING;
                 end
        WRITING: if (in_valid) begin
                   wr_addr <= wr_addr + 1'b1;
                   if (wr_addr == AW'(DEPTH - 1)) state <= DONE;
                 end
        DONE:    if (arm) state <= ARMED;
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[(state == ARMED) ? '0 : wr_addr] <= word;
    rd_data <= mem[rd_addr];
  end

endmodule
