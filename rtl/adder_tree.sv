// adder_tree -- pipelined sum of N signed values.
//
// Adds the N inputs pairwise in ceil(log2 N) register levels; an odd value at the end
// of a level is passed on unchanged. The inputs are registered first.
// In the corrector, one tree per output phase sums the 40 channel contributions to
// that output sample (the final summation of the parallel correction structure).
//
// Interface: in[N] signed, IN_W bits; sum signed, OUT_W = IN_W + ceil(log2 N) bits,
// wide enough that it cannot overflow.
// Timing: LATENCY = ceil(log2 N) + 1 clocks, one sum per clock.
//
// The paper gives the summation; the tree shape and its pipeline are this design's own.
module adder_tree #(
  parameter int N     = tiadc_pkg::N_CH,
  parameter int IN_W  = 32,
  parameter int OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;

  // number of live values at level l
  function automatic int live(int l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  logic signed [OUT_W-1:0] lvl [LEVELS+1][N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      lvl[0][i] <= OUT_W'(in[i]);
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < N; i++) begin
        if (i < live(l + 1)) begin
          if (2 * i + 1 < live(l)) lvl[l+1][i] <= lvl[l][2*i] + lvl[l][2*i+1];
          else                     lvl[l+1][i] <= lvl[l][2*i];
        end else begin
          lvl[l+1][i] <= '0;
        end
      end
    end
  end

  assign sum = lvl[LEVELS][0];

endmodule
