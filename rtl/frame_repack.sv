// frame_repack -- transport layer of one ADC link: frame disassembly and repackaging.
//
// A JESD204B frame of this ADC spans 8 lanes x 8 octets (B0..B7). Lane l carries the
// samples S(l), S(l+8), S(l+16), S(l+24), S(l+32) back to back, most significant bit
// first, starting at bit 0 of octet B0; bits 60..63 (the low nibble of B7) are tail
// bits fixed to zero. The receiver core delivers the frame in two link-clock periods:
// octets B0..B3 of all lanes (rx_sof high), then octets B4..B7. Sample S16..S23
// straddle the two periods, so the first half of the frame is held in a register
// until the second half arrives. The full frame is then cut into its 40 samples and
// sent out as two words of 20 samples: S0..S19 first, S20..S39 on the next clock.
//
// Interface: rx_data[j][l] is octet j of the current half frame on lane l.
// samples[k] is sample k of the word (S(k) or S(k+20)), half tells which.
// Timing: a frame whose first half enters at clock t leaves as S0..S19 at t+2 and
// S20..S39 at t+3 (registered), so a continuous input gives a continuous output of
// one 20-sample word per link clock (4 GS/s at 200 MHz).
// frame_err flags a non-zero tail nibble or a second half without a first half.
//
// Follows the paper: the lane/octet/sample layout, the two-period delivery and the
// 20-sample output words. Own choices: samples are taken as two's complement, the
// first-half marker rx_sof and the error flag.
module frame_repack
  import tiadc_pkg::*;
#(
  parameter int LANES   = N_LANES,
  parameter int OCTETS  = OCTETS_PER_FRAME,
  parameter int SPL     = SAMPLES_PER_LANE,
  parameter int SW      = SAMP_W
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    rx_valid,
  input  logic                                    rx_sof,      // first half of a frame
  input  logic [OCTETS/2-1:0][LANES-1:0][7:0]     rx_data,
  output logic                                    out_valid,
  output half_e                                   half,
  output logic signed [SW-1:0]                    samples [LANES*SPL/2],
  output logic                                    frame_err
);

  localparam int HALF_OCT  = OCTETS / 2;
  localparam int LANE_BITS = OCTETS * 8;
  localparam int NS        = LANES * SPL;   // samples per frame
  localparam int NH        = NS / 2;        // samples per output word
  localparam int TAIL_W    = LANE_BITS - SPL * SW;

  logic [HALF_OCT-1:0][LANES-1:0][7:0] first_half;
  logic                                have_first;

  // full frame and its samples (combinational, valid when the second half arrives)
  logic [LANE_BITS-1:0]  lane_bits [LANES];
  logic signed [SW-1:0]  frame_s   [NS];
  logic                  tail_bad;

  always_comb begin
    tail_bad = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      for (int j = 0; j < OCTETS; j++) begin
        // octet B0 is the most significant, i.e. frame bit 0 is lane_bits[MSB]
        lane_bits[l][LANE_BITS-1-8*j -: 8] = (j < HALF_OCT) ? first_half[j][l]
                                                            : rx_data[j-HALF_OCT][l];
      end
      for (int m = 0; m < SPL; m++)
        frame_s[m*LANES + l] = lane_bits[l][LANE_BITS-1-SW*m -: SW];
      if (lane_bits[l][TAIL_W-1:0] != '0) tail_bad = 1'b1;
    end
  end

  logic signed [SW-1:0] second_word [NH];
  logic                 second_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_first     <= 1'b0;
      second_pending <= 1'b0;
      out_valid      <= 1'b0;
      half           <= HALF_FIRST;
      frame_err      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      frame_err <= 1'b0;
      if (second_pending) begin
        out_valid      <= 1'b1;
        half           <= HALF_SECOND;
        second_pending <= 1'b0;
      end
      if (rx_valid && rx_sof) begin
        have_first <= 1'b1;
      end else if (rx_valid) begin
        have_first <= 1'b0;
        if (have_first) begin
          out_valid      <= 1'b1;
          half           <= HALF_FIRST;
          second_pending <= 1'b1;
          frame_err      <= tail_bad;
        end else begin
          frame_err      <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rx_valid && rx_sof) first_half <= rx_data;
    if (second_pending) begin
      samples <= second_word;
    end
    if (rx_valid && !rx_sof && have_first) begin
      for (int k = 0; k < NH; k++) begin
        samples[k]     <= frame_s[k];
        second_word[k] <= frame_s[k + NH];
      end
    end
  end

endmodule
