// tiadc_pkg -- constants and types shared by the TIADC receive and correction logic.
//
// Two 12-bit 4 GS/s ADCs are clocked 180 degrees apart to form one 8 GS/s stream.
// Each ADC sends its data over an 8-lane JESD204B link; a frame is 8 octets per lane
// and carries 40 samples (five 12-bit samples and four zero tail bits per lane).
// The receiver core hands over half a frame (4 octets of every lane) per 200 MHz link
// clock. After repackaging, the 8 GS/s stream is carried as 40 parallel channels at
// 200 MS/s: channel 2k holds ADC1 samples, channel 2k+1 ADC2 samples.
// The correction filter has 80 taps per ADC (two coefficient sets, C for ADC1 and D
// for ADC2), decomposed into 40 two-tap polyphase branches per channel.
// The frame layout, the lane/octet counts, the 40-channel split, the 80-tap order and
// the 5-way fan-out follow the paper; the widths of coefficients, offsets and the
// corrected output, and the configuration address map, are this design's own choices.
package tiadc_pkg;

  // converter organisation
  localparam int N_ADC             = 2;   // interleaved ADC chips
  localparam int SAMP_W            = 12;  // ADC resolution
  localparam int N_CH              = 40;  // parallel channels after repackaging

  // JESD204B link and frame
  localparam int N_LANES           = 8;   // lanes per ADC
  localparam int OCTETS_PER_FRAME  = 8;   // octets per lane per frame
  localparam int OCTETS_PER_CLK    = 4;   // octets per lane per link clock (half a frame)
  localparam int SAMPLES_PER_LANE  = 5;   // 12-bit samples per lane per frame
  localparam int SAMPLES_PER_FRAME = N_LANES * SAMPLES_PER_LANE;  // 40 per ADC
  localparam int SAMPLES_PER_CLK   = SAMPLES_PER_FRAME / 2;       // 20 per ADC per link clock

  // correction filter
  localparam int N_TAPS            = 80;  // FIR order per ADC coefficient set
  localparam int N_FAN             = 5;   // fan-out of every channel
  localparam int PF_PER_FAN        = N_CH / N_FAN;  // 8 polyphase filters per fan-out branch
  localparam int COEF_W            = 18;  // coefficient width (paper: more than 16 bits)
  localparam int COEF_FRAC         = 16;  // fractional bits of a coefficient
  localparam int OFF_W             = 12;  // offset register width
  localparam int OUT_W             = 12;  // corrected sample width
  localparam int RESET_TAP         = 40;  // tap set to 1.0 at reset (transparent filter)

  // host configuration bus
  localparam int CFG_ADDR_W        = 9;
  localparam int CFG_DATA_W        = 32;

  // one link clock of receiver-core output: octet j of the current half frame, lane l
  typedef logic [OCTETS_PER_CLK-1:0][N_LANES-1:0][7:0] rx_half_t;

  typedef logic signed [SAMP_W-1:0] sample_t;

  // which half of a frame a repackaged word holds
  typedef enum logic {
    HALF_FIRST  = 1'b0,   // samples S0..S19
    HALF_SECOND = 1'b1    // samples S20..S39
  } half_e;

endpackage
