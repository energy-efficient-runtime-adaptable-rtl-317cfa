// monitor_tick_gen: monitor clock of one STT-RAM unit.
//
// Produces a one-cycle pulse every PERIOD cache-clock cycles. The paper sets
// the monitor clock period to the unit's retention time divided by N; at the
// 2 GHz cache clock and N = 10 that is 20,000 cycles for the 100us unit and
// 20,000,000 for the 100ms unit. The free-running prescaler is this design's
// own realisation of that clock.
//
// Timing: the first pulse comes PERIOD cycles after reset is released, then
// every PERIOD cycles.
module monitor_tick_gen #(
  parameter int unsigned PERIOD = lars_pkg::TICK_100US,
  localparam int unsigned W = (PERIOD > 1) ? $clog2(PERIOD) : 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);

  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt == W'(PERIOD - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end

endmodule
