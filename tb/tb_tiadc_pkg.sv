// tb_tiadc_pkg -- helpers shared by the testbenches: a model of what the ADC and the
// JESD204B receiver core deliver (frame packing), and the reference correction
// computed directly at the 8 GS/s sample rate, independent of the polyphase RTL.
//
// Frame packing: lane l carries S(l), S(l+8), ..., S(l+32), 12 bits each, MSB first,
// followed by four zero tail bits; octets B0..B3 of all lanes form the first half,
// B4..B7 the second.
// Reference correction (computed in each testbench): y[m] = sum_{t=0}^{79} h_(m-t mod 2)[t] * (x[m-t] - off_(m-t mod 2)),
// rounded (2^(COEF_FRAC-1) added, COEF_FRAC bits dropped) and saturated to OUT_W
// bits; round_sat_ref does the last step.
package tb_tiadc_pkg;
  import tiadc_pkg::*;

  function automatic void pack_frame(input int s [SAMPLES_PER_FRAME],
                                     input logic [3:0] tail,
                                     output rx_half_t h1, output rx_half_t h2);
    logic [63:0] lane;
    for (int l = 0; l < N_LANES; l++) begin
      lane = '0;
      for (int m = 0; m < SAMPLES_PER_LANE; m++)
        lane[63 - 12*m -: 12] = 12'(s[8*m + l]);
      lane[3:0] = tail;
      for (int j = 0; j < OCTETS_PER_FRAME; j++) begin
        if (j < OCTETS_PER_CLK) h1[j][l] = lane[63 - 8*j -: 8];
        else                    h2[j - OCTETS_PER_CLK][l] = lane[63 - 8*j -: 8];
      end
    end
  endfunction

  function automatic int round_sat_ref(longint acc, int frac, int out_w);
    longint r;
    r = (acc + (longint'(1) <<< (frac - 1))) >>> frac;
    if (r > (longint'(1) <<< (out_w - 1)) - 1) r = (longint'(1) <<< (out_w - 1)) - 1;
    if (r < -(longint'(1) <<< (out_w - 1)))    r = -(longint'(1) <<< (out_w - 1));
    return int'(r);
  endfunction

endpackage
