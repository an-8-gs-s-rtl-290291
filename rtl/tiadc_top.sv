// tiadc_top -- FPGA logic of the 8 GS/s 12-bit two-ADC time-interleaved digitizer.
//
// Two 4 GS/s ADCs sample the same input with clocks 180 degrees apart. Each sends
// its samples over an 8-lane JESD204B link to a receiver core (PHY and MAC, outside
// this design), which delivers half a frame per 200 MHz link clock. This top holds:
//   * sync_n_gen         one SYNC_N for both ADCs from the two cores' sync requests;
//   * frame_repack (x2)  frame disassembly, 20 samples per ADC per link clock;
//   * channel interleave ADC1 sample k -> channel 2k, ADC2 sample k -> channel 2k+1,
//                        giving 40 channels at 200 MS/s = the 8 GS/s stream;
//   * coef_regfile       host-loaded coefficient sets and offsets;
//   * mismatch_corrector the 40-channel polyphase correction filter (or raw bypass);
//   * capture_buffer     record memory for the corrected waveform, read by the host.
// The corrected stream is also output directly (out_valid/out_y).
//
// Interface: clk is the link clock. Per ADC i: rx_valid[i], rx_sof[i] (first half of a
// frame), rx_data[i], core_sync_n[i] from receiver core i. sync_n goes to both ADCs
// and both cores. cfg_* is the host register bus (see coef_regfile), cap_* the record
// memory. align_err flags clocks on which the two links do not deliver the same half
// frame; frame_err a malformed frame on either link.
// Timing: a frame entering at clock t (first half) leaves the repackagers at t+2 and
// t+3 and the corrector 12 clocks later: out_y of its first half appears at t+14.
//
// The split into these blocks and the data path follow the paper; the receiver-core
// handshake (rx_valid/rx_sof), the register bus, the alignment check and the record
// memory's control are this design's own.
module tiadc_top
  import tiadc_pkg::*;
#(
  parameter int CAP_DEPTH = 32768,
  parameter int CAP_AW    = $clog2(CAP_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // receiver cores, one per ADC
  input  logic [N_ADC-1:0]       rx_valid,
  input  logic [N_ADC-1:0]       rx_sof,
  input  rx_half_t               rx_data [N_ADC],
  input  logic [N_ADC-1:0]       core_sync_n,
  output logic                   sync_n,
  output logic                   link_up,
  // host register bus
  input  logic                   cfg_we,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [CFG_DATA_W-1:0]  cfg_wdata,
  output logic [CFG_DATA_W-1:0]  cfg_rdata,
  input  logic                   corr_en,
  // corrected 8 GS/s stream, one block of 40 samples per clock
  output logic                   out_valid,
  output logic signed [OUT_W-1:0] out_y [N_CH],
  // record memory
  input  logic                   cap_arm,
  input  logic                   cap_trig,
  output logic                   cap_busy,
  output logic                   cap_done,
  input  logic [CAP_AW-1:0]      cap_rd_addr,
  output logic [N_CH*OUT_W-1:0]  cap_rd_data,
  // status
  output logic                   frame_err,
  output logic                   align_err
);

  sync_n_gen #(.N_LINKS(N_ADC)) u_sync (
    .clk         (clk),
    .rst_n       (rst_n),
    .core_sync_n (core_sync_n),
    .sync_n      (sync_n),
    .link_up     (link_up)
  );

  logic                 rp_valid [N_ADC];
  half_e                rp_half  [N_ADC];
  logic                 rp_err   [N_ADC];
  logic signed [SAMP_W-1:0] rp_s [N_ADC][SAMPLES_PER_CLK];

  for (genvar a = 0; a < N_ADC; a++) begin : g_link
    frame_repack u_repack (
      .clk       (clk),
      .rst_n     (rst_n),
      .rx_valid  (rx_valid[a]),
      .rx_sof    (rx_sof[a]),
      .rx_data   (rx_data[a]),
      .out_valid (rp_valid[a]),
      .half      (rp_half[a]),
      .samples   (rp_s[a]),
      .frame_err (rp_err[a])
    );
  end

  // interleave: ADC a, sample k of the word -> channel N_ADC*k + a
  logic signed [SAMP_W-1:0] ch_x [N_CH];
  logic                     ch_valid;

  always_comb begin
    for (int k = 0; k < SAMPLES_PER_CLK; k++)
      for (int a = 0; a < N_ADC; a++)
        ch_x[N_ADC*k + a] = rp_s[a][k];
    ch_valid  = 1'b1;
    align_err = 1'b0;
    frame_err = 1'b0;
    for (int a = 0; a < N_ADC; a++) begin
      ch_valid  = ch_valid & rp_valid[a];
      frame_err = frame_err | rp_err[a];
      if (rp_valid[a] != rp_valid[0] || (rp_valid[a] && rp_half[a] != rp_half[0]))
        align_err = 1'b1;
    end
  end

  logic signed [COEF_W-1:0] coef   [N_ADC][N_TAPS];
  logic signed [OFF_W-1:0]  offset [N_ADC];

  coef_regfile u_regs (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_we),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .cfg_rdata (cfg_rdata),
    .coef      (coef),
    .offset    (offset)
  );

  mismatch_corrector u_corr (
    .clk       (clk),
    .rst_n     (rst_n),
    .corr_en   (corr_en),
    .in_valid  (ch_valid),
    .x         (ch_x),
    .coef      (coef),
    .offset    (offset),
    .out_valid (out_valid),
    .y         (out_y)
  );

  capture_buffer #(.N_CH(N_CH), .SW(OUT_W), .DEPTH(CAP_DEPTH), .AW(CAP_AW)) u_cap (
    .clk      (clk),
    .rst_n    (rst_n),
    .arm      (cap_arm),
    .trig     (cap_trig),
    .in_valid (out_valid),
    .in_data  (out_y),
    .busy     (cap_busy),
    .done     (cap_done),
    .rd_addr  (cap_rd_addr),
    .rd_data  (cap_rd_data)
  );

endmodule
