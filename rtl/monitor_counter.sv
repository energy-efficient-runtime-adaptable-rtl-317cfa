// monitor_counter: retention monitor of one cache block.
//
// An N-state counter S0..S(N-1). Each monitor-clock pulse (tick) moves it one
// state forward; a write to, or invalidation of, the block (wr_inv) returns it
// to S0. In S(N-1) the block has reached its retention limit and `expired`
// (E) is raised so the cache controller writes the block back if dirty and
// invalidates it. The state sequence, the reset on write/invalidate and E at
// S(N-1) follow the paper's monitor-counter state machine.
// Choices of this design: the monitor clock is a one-cycle enable pulse in
// the cache clock domain; wr_inv wins over a tick in the same cycle; the
// counter holds S(N-1) until the controller's invalidate returns it to S0.
//
// Timing: state and expired are registered; expired rises in the cycle after
// the (N-1)th tick that follows the last write.
module monitor_counter #(
  parameter int unsigned N = lars_pkg::MON_N,
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tick,     // T: monitor clock pulse
  input  logic         wr_inv,   // W: block written or invalidated
  output logic [W-1:0] state,
  output logic         expired   // E
);

  localparam logic [W-1:0] LAST = W'(N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      state <= '0;
    else if (wr_inv)                 state <= '0;
    else if (tick && state != LAST)  state <= state + 1'b1;
  end

  assign expired = (state == LAST);

endmodule
