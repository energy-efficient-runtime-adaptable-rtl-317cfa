// lars_tuner: runtime selection of the STT-RAM retention unit.
//
// When an application starts, the tuner looks it up in the retention history.
// An unknown application is tuned: it runs for one tuning interval (INTERVAL
// retired instructions) on each unit, starting at the longest retention time
// (100ms) and stepping down, and a metric is taken after each interval:
//  * ALG_OPTIMAL  (LARS-Optimal): EDP from the energy datapath. A unit is kept
//    while its EDP is <= the best so far (which becomes the new base); the
//    first worse unit ends tuning.
//  * ALG_MISS     (LARS-Miss): miss count. The 100ms interval sets a fixed
//    base; a unit is kept while its misses stay below base x 1.05.
//  * ALG_MISS_LB  (LARS-Miss-LB): as LARS-Miss, but a unit is also kept when
//    its miss rate is below 0.05% (misses x 2000 < accesses).
//  * ALG_SAMPLING: every unit is sampled and the lowest EDP wins.
// The result (unit and base) is stored in the history and the cache is
// switched to the chosen unit. After that the checking process evaluates the
// same metric every interval and starts a new tuning round when it exceeds
// base x 1.05. A known application goes straight to checking on its stored unit.
// The algorithms, the 5% and 0.05% thresholds, the descending order and the
// 100-million-instruction interval are the paper's. The direct-indexed history,
// the per-interval checking rate and the handshakes are this design's.
// The ">= / <" of LARS-Optimal follows the paper's algorithm listing
// ("CurEDP =< BaseEDP"); its datapath figure prints "<".
//
// EDP_EN = 0 builds the reduced LARS-Miss tuner: the energy datapath is left
// out (the paper marks it as the hardware LARS-Miss eliminates), only the miss
// comparisons remain, and ALG_OPTIMAL / ALG_SAMPLING then act as ALG_MISS.
//
// Interfaces: app_start/app_id are taken when `ready` is high. inst_retired
// pulses once per retired instruction. stats_snap pulses at the end of each
// interval (the counters deliver the interval's totals on `stats` from the
// next cycle); stats_clr pulses at the start of an interval. switch_req is
// held with switch_unit until the cache answers with switch_done.
module lars_tuner
  import lars_pkg::*;
#(
  parameter int unsigned INTERVAL = 100_000_000,
  parameter int unsigned APP_W    = 3,
  parameter bit          EDP_EN   = 1'b1,
  localparam int unsigned IC_W = (INTERVAL > 1) ? $clog2(INTERVAL) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  algo_e             algo,
  input  logic              app_start,
  input  logic [APP_W-1:0]  app_id,
  input  logic              inst_retired,
  output logic              ready,
  // statistics
  input  perf_stats_t       stats,
  output logic              stats_snap,
  output logic              stats_clr,
  // unit switching
  input  logic [UNIT_W-1:0] active_unit,
  output logic              switch_req,
  output logic [UNIT_W-1:0] switch_unit,
  input  logic              switch_done,
  // status
  output logic              tuning,
  output logic              tune_done,   // pulse: a tuning round finished
  output logic              retune,      // pulse: checking process asked for re-tuning
  output logic [UNIT_W-1:0] best_unit,
  output logic [METRIC_W-1:0] base_metric
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_SWITCH, S_START, S_RUN, S_EVAL, S_WAIT_DP, S_DECIDE, S_FINISH
  } state_e;

  state_e              state;
  logic [APP_W-1:0]    app_q;
  logic [UNIT_W-1:0]   r_q;        // unit under evaluation
  logic [UNIT_W-1:0]   target_q;
  logic [IC_W-1:0]     icnt;
  logic [METRIC_W-1:0] metric_q;
  logic                first_q;    // evaluating the 100ms interval

  // ---------------------------------------------------------- submodules
  logic                dp_start, dp_busy, dp_done;
  logic [ENERGY_W-1:0] dp_energy;
  logic [EDP_W-1:0]    dp_edp;

  // Effective algorithm: without the datapath only the miss-based ones exist.
  algo_e alg;
  assign alg = (EDP_EN || algo == ALG_MISS_LB) ? algo : ALG_MISS;

  if (EDP_EN) begin : g_dp
    edp_datapath u_dp (
      .clk, .rst_n,
      .start  (dp_start),
      .unit   (active_unit),
      .stats  (stats),
      .busy   (dp_busy),
      .done   (dp_done),
      .energy (dp_energy),
      .cur_edp(dp_edp)
    );
  end else begin : g_no_dp
    // never started: uses_edp is false for every effective algorithm
    assign dp_busy   = 1'b0;
    assign dp_done   = 1'b0;
    assign dp_energy = '0;
    assign dp_edp    = '0;
  end

  logic                h_hit, h_wr;
  logic [UNIT_W-1:0]   h_unit;
  logic [METRIC_W-1:0] h_base;

  retention_history #(.APP_W(APP_W)) u_hist (
    .clk, .rst_n,
    .rd_app (app_q),
    .rd_hit (h_hit),
    .rd_unit(h_unit),
    .rd_base(h_base),
    .wr     (h_wr),
    .inv    (1'b0),
    .wr_app (app_q),
    .wr_unit(best_unit),
    .wr_base(base_metric)
  );

  // ---------------------------------------------------------- comparisons
  localparam int unsigned CW = METRIC_W + 12;
  logic uses_edp;
  logic le_base, lt_base, lt_base_105, gt_base_105, lb_ok;
  logic [CW-1:0] accesses;

  assign uses_edp    = (alg == ALG_OPTIMAL) || (alg == ALG_SAMPLING);
  assign accesses    = CW'(stats.read_requests) + CW'(stats.write_requests);
  assign le_base     = metric_q <= base_metric;
  assign lt_base     = metric_q <  base_metric;
  assign lt_base_105 = CW'(metric_q) * CW'(20) <  CW'(base_metric) * CW'(21);
  assign gt_base_105 = CW'(metric_q) * CW'(20) >  CW'(base_metric) * CW'(21);
  assign lb_ok       = (alg == ALG_MISS_LB) && (CW'(metric_q) * CW'(2000) < accesses);

  // Keep the unit under evaluation?
  logic keep;
  always_comb begin
    unique case (alg)
      ALG_OPTIMAL:  keep = le_base;
      ALG_SAMPLING: keep = lt_base;
      default:      keep = lb_ok || lt_base_105;
    endcase
  end

  assign ready      = (state == S_IDLE) || (state == S_RUN);
  assign switch_req = (state == S_SWITCH);
  assign switch_unit = target_q;
  assign stats_clr  = (state == S_START);
  assign stats_snap = (state == S_RUN) && inst_retired && (icnt == IC_W'(INTERVAL - 1));
  assign dp_start   = (state == S_EVAL) && uses_edp;
  assign h_wr       = (state == S_FINISH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      app_q       <= '0;
      r_q         <= U_100MS;
      target_q    <= U_100MS;
      icnt        <= '0;
      metric_q    <= '0;
      first_q     <= 1'b0;
      tuning      <= 1'b0;
      tune_done   <= 1'b0;
      retune      <= 1'b0;
      best_unit   <= U_100MS;
      base_metric <= '0;
    end else begin
      tune_done <= 1'b0;
      retune    <= 1'b0;
      unique case (state)
        S_IDLE, S_RUN: begin
          if (app_start) begin
            app_q <= app_id;
            state <= S_LOOKUP;
          end else if (state == S_RUN && inst_retired) begin
            if (icnt == IC_W'(INTERVAL - 1)) begin
              icnt  <= '0;
              state <= S_EVAL;
            end else begin
              icnt <= icnt + 1'b1;
            end
          end
        end
        S_LOOKUP: begin
          if (h_hit) begin                 // known application: check only
            tuning      <= 1'b0;
            best_unit   <= h_unit;
            base_metric <= h_base;
            target_q    <= h_unit;
          end else begin                   // first execution: tune
            tuning   <= 1'b1;
            first_q  <= 1'b1;
            r_q      <= U_100MS;
            target_q <= U_100MS;
          end
          state <= S_SWITCH;
        end
        S_SWITCH: if (switch_done) state <= S_START;
        S_START: begin
          icnt  <= '0;
          state <= S_RUN;
        end
        S_EVAL: begin
          if (uses_edp) state <= S_WAIT_DP;
          else begin
            metric_q <= METRIC_W'(stats.miss_count);
            state    <= S_DECIDE;
          end
        end
        S_WAIT_DP: if (dp_done) begin
          metric_q <= dp_edp;
          state    <= S_DECIDE;
        end
        S_DECIDE: begin
          if (!tuning) begin
            // checking process
            if (gt_base_105) begin
              retune   <= 1'b1;
              tuning   <= 1'b1;
              first_q  <= 1'b1;
              r_q      <= U_100MS;
              target_q <= U_100MS;
              state    <= S_SWITCH;
            end else begin
              state <= S_START;
            end
          end else if (first_q) begin
            first_q     <= 1'b0;
            base_metric <= metric_q;
            best_unit   <= r_q;
            r_q         <= r_q - 1'b1;
            target_q    <= r_q - 1'b1;
            state       <= S_SWITCH;
          end else begin
            if (keep) begin
              best_unit <= r_q;
              if (alg == ALG_OPTIMAL || alg == ALG_SAMPLING) base_metric <= metric_q;
            end
            if ((keep || alg == ALG_SAMPLING) && r_q != U_100US) begin
              r_q      <= r_q - 1'b1;
              target_q <= r_q - 1'b1;
              state    <= S_SWITCH;
            end else begin
              state <= S_FINISH;
            end
          end
        end
        S_FINISH: begin
          tuning    <= 1'b0;
          tune_done <= 1'b1;
          target_q  <= best_unit;
          state     <= S_SWITCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
