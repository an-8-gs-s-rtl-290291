// coef_regfile -- correction coefficients and offsets, written by the host.
//
// The corrector uses one fixed set of coefficients over the whole input band: an
// 80-tap FIR per ADC (set 0 = C for ADC1, set 1 = D for ADC2) and one offset per ADC.
// They are computed off line from calibration data and loaded through a simple
// register bus. After reset every set is the identity filter delayed by RESET_TAP
// taps (coefficient 1.0 there, 0 elsewhere) and the offsets are 0, so that the
// corrector is transparent until calibrated values are loaded.
//
// Address map (CFG_ADDR_W = 9):  addr[8] = 0 : coefficient, addr[7] = set,
//                                              addr[6:0] = tap (0..79)
//                                addr[8] = 1 : offset, addr[0] = set,
//                                              addr[7:1] = 0
// Data are the low COEF_W (or OFF_W) bits of cfg_wdata, two's complement,
// coefficients with COEF_FRAC fractional bits. Writes to unused addresses are ignored.
// Timing: a write takes effect on the next clock; cfg_rdata returns the word at
// cfg_addr one clock after it is presented (unused addresses read 0).
//
// The two coefficient sets and per-ADC offsets follow the paper; the bus, address
// map, reset values and read-back are this design's own choices.
module coef_regfile #(
  parameter int N_SET     = tiadc_pkg::N_ADC,
  parameter int N_TAPS    = tiadc_pkg::N_TAPS,
  parameter int C_W       = tiadc_pkg::COEF_W,
  parameter int C_FRAC    = tiadc_pkg::COEF_FRAC,
  parameter int OFF_W     = tiadc_pkg::OFF_W,
  parameter int RST_TAP   = tiadc_pkg::RESET_TAP,
  parameter int ADDR_W    = tiadc_pkg::CFG_ADDR_W,
  parameter int DATA_W    = tiadc_pkg::CFG_DATA_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [ADDR_W-1:0]       cfg_addr,
  input  logic [DATA_W-1:0]       cfg_wdata,
  output logic [DATA_W-1:0]       cfg_rdata,
  output logic signed [C_W-1:0]   coef   [N_SET][N_TAPS],
  output logic signed [OFF_W-1:0] offset [N_SET]
);

  localparam int TAP_AW = $clog2(N_TAPS);
  localparam int SET_AW = (N_SET > 1) ? $clog2(N_SET) : 1;

  logic              is_off;
  logic [SET_AW-1:0] set_a;
  logic [TAP_AW-1:0] tap_a;

  logic              hit;

  assign is_off = cfg_addr[ADDR_W-1];
  // an offset address must have all bits between the flag and the set index clear
  assign hit    = (int'(set_a) < N_SET) &&
                  (!is_off || (cfg_addr[ADDR_W-2:0] >> SET_AW) == '0);
  assign set_a  = is_off ? cfg_addr[SET_AW-1:0] : cfg_addr[TAP_AW +: SET_AW];
  assign tap_a  = cfg_addr[TAP_AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_SET; s++) begin
        offset[s] <= '0;
        for (int t = 0; t < N_TAPS; t++)
          coef[s][t] <= (t == RST_TAP) ? C_W'(1 << C_FRAC) : '0;
      end
    end else if (cfg_we && hit) begin
      if (is_off)                      offset[set_a]       <= cfg_wdata[OFF_W-1:0];
      else if (int'(tap_a) < N_TAPS)   coef[set_a][tap_a]  <= cfg_wdata[C_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_rdata <= '0;
    end else begin
      cfg_rdata <= '0;
      if (hit) begin
        if (is_off)                    cfg_rdata <= DATA_W'(offset[set_a]);
        else if (int'(tap_a) < N_TAPS) cfg_rdata <= DATA_W'(coef[set_a][tap_a]);
      end
    end
  end

endmodule
