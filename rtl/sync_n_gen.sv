// sync_n_gen -- one SYNC_N for both ADC links.
//
// Each JESD204B receiver core drives an active-low sync request: low while it is
// still looking for code-group synchronisation, high once its link is locked. Both
// ADCs share one SYNC_N line, so that they leave code-group synchronisation and start
// their frames on the same SYSREF-aligned boundary and the two data streams stay
// aligned. SYNC_N is therefore high only when every core has released its request;
// a request from any core pulls it low again (re-synchronisation of both links).
// During reset SYNC_N is held low.
//
// Interface: core_sync_n[i] from receiver core i, sync_n to both ADCs, link_up high
// once SYNC_N has been high for LOCK_CYCLES consecutive link clocks.
// Timing: sync_n is registered, one link clock after its inputs.
//
// The paper says the two cores' flags are combined into one SYNC_N; the active-low
// convention is JESD204B's; the registered output and the link_up qualifier are this
// design's own.
module sync_n_gen #(
  parameter int N_LINKS     = tiadc_pkg::N_ADC,
  parameter int LOCK_CYCLES = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_LINKS-1:0] core_sync_n,
  output logic               sync_n,
  output logic               link_up
);

  localparam int CNT_W = $clog2(LOCK_CYCLES + 1);

  logic [CNT_W-1:0] lock_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_n   <= 1'b0;
      lock_cnt <= '0;
      link_up  <= 1'b0;
    end else begin
      sync_n <= &core_sync_n;
      if (!sync_n) begin
        lock_cnt <= '0;
        link_up  <= 1'b0;
      end else if (lock_cnt == CNT_W'(LOCK_CYCLES - 1)) begin
        link_up  <= 1'b1;
      end else begin
        lock_cnt <= lock_cnt + 1'b1;
      end
    end
  end

endmodule
