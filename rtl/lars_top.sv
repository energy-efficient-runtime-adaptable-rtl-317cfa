// lars_top: LARS adaptable-retention STT-RAM L1 data cache with its tuner.
//
// The cache (lars_dcache) holds four STT-RAM units of 100us, 1ms, 10ms and
// 100ms retention time and uses one at a time. Its controller counts hits,
// misses, write-backs and latency cycles into the performance counters
// (perf_counters). The tuner (lars_tuner, with its energy datapath and
// retention history) watches retired instructions, evaluates each unit for a
// tuning interval, picks the unit with the chosen algorithm and asks the
// cache to migrate to it; it then keeps checking and re-tunes on a >5% drift.
// Main memory and the processor are outside: their ports are brought out.
//
// Ports: a 32-bit word CPU port (see lars_dcache), a 512-bit line memory port
// held until mem_ack, and the tuner's control: algo (tuning algorithm),
// app_start/app_id (taken while tuner_ready), and inst_retired (one pulse per
// retired instruction). All parameters default to the paper's sizes: the
// monitor clock periods for a 2 GHz clock and N = 10, and a 100-million-
// instruction tuning interval. EDP_EN = 0 gives the reduced LARS-Miss tuner
// without the energy datapath (see lars_tuner).
module lars_top
  import lars_pkg::*;
#(
  parameter int unsigned TICK0    = lars_pkg::TICK_100US,
  parameter int unsigned TICK1    = lars_pkg::TICK_1MS,
  parameter int unsigned TICK2    = lars_pkg::TICK_10MS,
  parameter int unsigned TICK3    = lars_pkg::TICK_100MS,
  parameter int unsigned INTERVAL = 100_000_000,
  parameter int unsigned APP_W    = 3,
  parameter bit          EDP_EN   = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // CPU data port
  input  logic                    cpu_req,
  input  logic                    cpu_we,
  input  logic [ADDR_W-1:0]       cpu_addr,
  input  logic [WORD_W-1:0]       cpu_wdata,
  output logic                    cpu_ready,
  output logic                    cpu_resp,
  output logic [WORD_W-1:0]       cpu_rdata,
  // main memory port
  output logic                    mem_req,
  output logic                    mem_we,
  output logic [ADDR_W-OFF_W-1:0] mem_addr,
  output logic [LINE_BITS-1:0]    mem_wdata,
  input  logic                    mem_ack,
  input  logic [LINE_BITS-1:0]    mem_rdata,
  // tuner control
  input  algo_e                   algo,
  input  logic                    app_start,
  input  logic [APP_W-1:0]        app_id,
  input  logic                    inst_retired,
  output logic                    tuner_ready,
  // status
  output logic [UNIT_W-1:0]       active_unit,
  output logic                    tuning,
  output logic                    tune_done,
  output logic                    retune,
  output logic [UNIT_W-1:0]       best_unit,
  output logic [METRIC_W-1:0]     base_metric,
  output logic                    expire_evt,
  output logic                    migrating,
  output perf_stats_t             interval_stats
);

  logic              switch_req, switch_done;
  logic [UNIT_W-1:0] switch_unit;
  perf_ev_t          perf_ev;
  logic              stats_snap, stats_clr;
  perf_stats_t       live_stats;

  lars_dcache #(
    .TICK0(TICK0), .TICK1(TICK1), .TICK2(TICK2), .TICK3(TICK3)
  ) u_cache (
    .clk, .rst_n,
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_ready, .cpu_resp, .cpu_rdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .switch_req, .switch_unit, .switch_done, .active_unit,
    .perf_ev, .expire_evt, .migrating
  );

  perf_counters u_perf (
    .clk, .rst_n,
    .clr  (stats_clr),
    .snap (stats_snap),
    .ev   (perf_ev),
    .live (live_stats),
    .stats(interval_stats)
  );

  lars_tuner #(.INTERVAL(INTERVAL), .APP_W(APP_W), .EDP_EN(EDP_EN)) u_tuner (
    .clk, .rst_n,
    .algo, .app_start, .app_id, .inst_retired,
    .ready(tuner_ready),
    .stats(interval_stats),
    .stats_snap, .stats_clr,
    .active_unit, .switch_req, .switch_unit, .switch_done,
    .tuning, .tune_done, .retune, .best_unit, .base_metric
  );

endmodule
