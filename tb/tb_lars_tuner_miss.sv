// tb_lars_tuner_miss: the reduced LARS-Miss tuner (EDP_EN = 0, no energy
// datapath), driven exactly as tb_lars_tuner drives the full one. Without the
// datapath a request for LARS-Optimal or sampling must behave as LARS-Miss, so
// the reference model maps those two onto LARS-Miss; LARS-Miss-LB keeps its
// low-miss-rate test.
//
// As in tb_lars_tuner: the tuner with a short tuning interval (40 instructions)
// against a testbench cache that answers switch requests and, at each
// interval end, presents statistics chosen per STT-RAM unit. For random
// scenarios under all four algorithms the expected chosen unit, base value and
// number of tuning intervals are computed here from the algorithms as the
// paper lists them (EDP from the paper's energy table). Then the checking
// process is tested: an unchanged interval must not re-tune, a >5% worse one
// must; a restarted, already tuned application must reuse its stored unit.
module tb_lars_tuner_miss;
  import lars_pkg::*;
  localparam int INTERVAL = 40;
  logic clk = 0, rst_n = 0;
  algo_e algo;
  logic app_start = 0, inst_retired = 0, ready;
  logic [2:0] app_id = 0;
  perf_stats_t stats;
  logic stats_snap, stats_clr, switch_req, switch_done = 0;
  logic [1:0] active = U_100MS, switch_unit, best_unit;
  logic tuning, tune_done, retune;
  logic [METRIC_W-1:0] base_metric;
  int checks = 0, failures = 0;
  int n_intervals = 0, n_retune = 0, n_tuned = 0;

  perf_stats_t sc [4];     // statistics per unit for the current scenario
  bit          worsen = 0; // checking test: report worse statistics

  lars_tuner #(.INTERVAL(INTERVAL), .EDP_EN(1'b0)) dut (
    .clk, .rst_n, .algo, .app_start, .app_id, .inst_retired, .ready,
    .stats, .stats_snap, .stats_clr, .active_unit(active), .switch_req, .switch_unit,
    .switch_done, .tuning, .tune_done, .retune, .best_unit, .base_metric);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cache stand-in: migrate after a short random delay
  initial begin
    forever begin
      @(negedge clk);
      switch_done = 0;
      if (switch_req) begin
        repeat ($urandom % 5) @(negedge clk);
        switch_done = 1;
        @(posedge clk);
        active = switch_unit;
      end
    end
  end

  // an instruction retires in most cycles
  always @(negedge clk) inst_retired = ($urandom % 4) != 0;

  // statistics presented at interval end
  always @(posedge clk) if (rst_n && stats_snap) begin
    n_intervals++;
    stats <= sc[active];
    if (worsen) begin
      stats.miss_count     <= sc[active].miss_count * 2 + 10;
      stats.refill_latency <= sc[active].refill_latency * 2 + 1000;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (retune) n_retune++;
    if (tune_done) n_tuned++;
  end

  function automatic logic [127:0] edp_of(input int u, input perf_stats_t s);
    longint unsigned rde [4] = '{12000, 12000, 11000, 11000};
    longint unsigned wre [4] = '{40000, 56000, 76000, 101000};
    logic [127:0] e, lat;
    lat = 128'(s.miss_latency) + 128'(s.hit_latency) + 128'(s.refill_latency);
    e = 128'(rde[u]) * (128'(s.read_requests) + 128'(s.writebacks))
      + 128'(wre[u]) * (128'(s.write_requests) + 128'(s.miss_count)) + 128'(877) * lat;
    return e * lat;
  endfunction

  function automatic logic [127:0] metric_of(input algo_e a, input int u);
    if (a == ALG_OPTIMAL || a == ALG_SAMPLING) return edp_of(u, sc[u]);
    return 128'(sc[u].miss_count);
  endfunction

  // expected result of a tuning round
  task automatic model(input algo_e a_req, output int best, output logic [127:0] base, output int n_eval);
    logic [127:0] m;
    algo_e a;
    a = (a_req == ALG_MISS_LB) ? ALG_MISS_LB : ALG_MISS;
    best = 3; base = metric_of(a, 3); n_eval = 1;
    for (int u = 2; u >= 0; u--) begin
      bit keep;
      m = metric_of(a, u);
      n_eval++;
      case (a)
        ALG_SAMPLING: keep = m < base;
        ALG_OPTIMAL:  keep = m <= base;
        default: keep = (a == ALG_MISS_LB &&
                         m * 2000 < 128'(sc[u].read_requests) + 128'(sc[u].write_requests))
                        || (m * 20 < base * 21);
      endcase
      if (keep) begin
        best = u;
        if (a == ALG_SAMPLING || a == ALG_OPTIMAL) base = m;
      end else if (a != ALG_SAMPLING) break;
    end
  endtask

  function automatic perf_stats_t rand_stats(input algo_e a, input int u, input int kind);
    perf_stats_t s;
    s.read_requests  = 1000 + $urandom % 1000;
    s.write_requests = 500 + $urandom % 500;
    s.writebacks     = $urandom % 200;
    s.hit_latency    = 3000 + $urandom % 500;
    s.refill_latency = $urandom % 2000;
    s.miss_latency   = $urandom % 500;
    case (kind)
      0: s.miss_count = 100 + $urandom % 12;        // around the 5% band
      1: s.miss_count = 100 + (3 - u) * ($urandom % 8);
      default: s.miss_count = $urandom % 3;         // very low miss rate (LARS-Miss-LB)
    endcase
    return s;
  endfunction

  task automatic wait_tune_done();
    while (!tune_done) @(posedge clk);
    // wait for the final switch to land
    repeat (2) @(posedge clk);
    while (switch_req) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic start_app(input logic [2:0] id);
    @(negedge clk);
    while (!ready) @(negedge clk);
    app_start = 1; app_id = id;
    @(negedge clk);
    app_start = 0;
  endtask

  initial begin
    int best, n_eval, n0, k;
    logic [127:0] base;
    stats = '0;
    algo = ALG_OPTIMAL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sn = 0; sn < 32; sn++) begin
      algo = algo_e'(sn % 4);
      for (int u = 0; u < 4; u++) sc[u] = rand_stats(algo, u, (sn / 4) % 3);
      model(algo, best, base, n_eval);
      worsen = 0;
      n0 = n_intervals;
      start_app(3'(sn % 8));
      wait_tune_done();
      checks++;
      if (best_unit != 2'(best) || active != 2'(best)) begin
        failures++; $display("scenario %0d algo %0d: chose %0d (active %0d), expected %0d",
                             sn, algo, best_unit, active, best);
      end
      checks++;
      if (128'(base_metric) != base) begin
        failures++; $display("scenario %0d: base %0d expected %0d", sn, base_metric, base);
      end
      checks++;
      if (n_intervals - n0 != n_eval) begin
        failures++; $display("scenario %0d: %0d intervals, expected %0d", sn, n_intervals - n0, n_eval);
      end
      // checking process: two unchanged intervals, no re-tune
      n0 = n_retune;
      begin
        k = n_intervals;
        while (n_intervals < k + 2) @(posedge clk);
        repeat (20) @(posedge clk);
      end
      checks++;
      if (n_retune != n0 || tuning) begin failures++; $display("scenario %0d: spurious re-tune", sn); end
      // worse statistics: re-tune expected
      if (sn % 4 == 1 || sn % 4 == 2) begin
        worsen = 1;
        begin
          k = n_intervals;
          while (n_intervals < k + 1) @(posedge clk);
          repeat (20) @(posedge clk);
        end
        checks++;
        if (n_retune != n0 + 1 || !tuning) begin failures++; $display("scenario %0d: no re-tune", sn); end
        worsen = 0;
        wait_tune_done();
        checks++;
        if (best_unit != 2'(best)) begin failures++; $display("scenario %0d: re-tune chose %0d", sn, best_unit); end
      end
      // restart the same application: stored unit, no tuning
      n0 = n_tuned;
      start_app(3'(sn % 8));
      repeat (3) @(posedge clk);
      while (switch_req) @(posedge clk);
      begin
        k = n_intervals;
        while (n_intervals < k + 1) @(posedge clk);
        repeat (20) @(posedge clk);
      end
      checks++;
      if (tuning || n_tuned != n0 || active != 2'(best)) begin
        failures++; $display("scenario %0d: history not reused (tuning %0b active %0d)", sn, tuning, active);
      end
      // next scenario must tune a fresh application: use a new id space
      if (sn % 8 == 7) begin
        rst_n = 0; @(posedge clk); rst_n = 1; active = U_100MS;
      end
    end
    $display("intervals %0d tunings %0d re-tunes %0d", n_intervals, n_tuned, n_retune);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
