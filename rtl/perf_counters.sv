// perf_counters: cache statistics read by the LARS tuner.
//
// Counts the seven quantities the energy datapath consumes: read requests,
// write-backs, write requests, misses, and the cycles the CPU spent waiting
// on hits, on misses (victim write-back) and on refills. The paper takes these
// from the processor's hardware performance counters; here they are counted
// from one-cycle event pulses of the cache controller.
//
// Interface: `ev` carries the event pulses of the current cycle. `snap` copies
// the live counters, including this cycle's events, into the `stats` registers
// and restarts the live counters from zero, so one tuning interval ends and the
// next begins without losing an event. `clr` zeroes both sets.
// Timing: stats change at the clock edge where snap is high.
module perf_counters
  import lars_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        snap,
  input  perf_ev_t    ev,
  output perf_stats_t live,
  output perf_stats_t stats
);

  perf_stats_t nxt;

  always_comb begin
    nxt = live;
    nxt.read_requests  = live.read_requests  + CNT_W'(ev.rd_req);
    nxt.writebacks     = live.writebacks     + CNT_W'(ev.wb);
    nxt.write_requests = live.write_requests + CNT_W'(ev.wr_req);
    nxt.miss_count     = live.miss_count     + CNT_W'(ev.miss);
    nxt.miss_latency   = live.miss_latency   + CNT_W'(ev.miss_cyc);
    nxt.hit_latency    = live.hit_latency    + CNT_W'(ev.hit_cyc);
    nxt.refill_latency = live.refill_latency + CNT_W'(ev.refill_cyc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live  <= '0;
      stats <= '0;
    end else if (clr) begin
      live  <= '0;
      stats <= '0;
    end else if (snap) begin
      stats <= nxt;
      live  <= '0;
    end else begin
      live  <= nxt;
    end
  end

endmodule
