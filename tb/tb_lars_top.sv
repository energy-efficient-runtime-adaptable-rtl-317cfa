// tb_lars_top: end-to-end run of the LARS data cache with its tuner, at
// reduced sizes (monitor clocks of 60..480 cycles, 3000-instruction tuning
// interval) so that all retention units expire blocks within the run.
// A simple processor model retires one instruction per cycle and issues a
// load or store every few instructions, stalling while the cache is busy; a
// main memory model answers refills and write-backs.
// Checked: every load against a golden memory; for each tuning round, the
// unit chosen by the tuner against the choice worked out here from the
// interval statistics the hardware reported (own EDP model, the paper's
// algorithms); the active unit after tuning; re-tuning after a workload phase
// change; reuse of the stored unit when an application restarts. Each
// mechanism (hit, miss, write-back, expiry, migration, tuning with each
// algorithm, re-tune, history reuse) is counted and must occur.
module tb_lars_top;
  import lars_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req = 0, cpu_we = 0, cpu_ready, cpu_resp;
  logic [31:0] cpu_addr = 0, cpu_wdata = 0, cpu_rdata;
  logic mem_req, mem_we, mem_ack;
  logic [25:0] mem_addr;
  logic [511:0] mem_wdata, mem_rdata;
  int unsigned n_mrd, n_mwr;
  algo_e algo = ALG_OPTIMAL;
  logic app_start = 0, inst_retired = 0, tuner_ready;
  logic [2:0] app_id = 0;
  logic [1:0] active_unit, best_unit;
  logic tuning, tune_done, retune, expire_evt, migrating;
  logic [METRIC_W-1:0] base_metric;
  perf_stats_t istats;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_exp = 0, n_mig = 0, n_tuned = 0, n_retune = 0, n_reuse = 0;
  int n_algo [4] = '{0, 0, 0, 0};
  logic [31:0] golden [logic [29:0]];
  int ws_sets = 4, ws_tags = 4;   // working set of the current phase

  lars_top #(.TICK0(60), .TICK1(120), .TICK2(240), .TICK3(480), .INTERVAL(3000)) dut (
    .clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_ready, .cpu_resp, .cpu_rdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .algo, .app_start, .app_id, .inst_retired, .tuner_ready,
    .active_unit, .tuning, .tune_done, .retune, .best_unit, .base_metric,
    .expire_evt, .migrating, .interval_stats(istats));

  lars_mem_model mem (.clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
                      .ack(mem_ack), .rdata(mem_rdata), .n_reads(n_mrd), .n_writes(n_mwr));

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ event counting
  logic mig_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.perf_ev.wb)   n_wb++;
    if (dut.perf_ev.miss) n_miss++;
    if (expire_evt)       n_exp++;
    if (migrating && !mig_q) n_mig++;
    mig_q <= migrating;
    if (retune) n_retune++;
  end

  // ------------------------------------------------ tuning-round model
  // Interval statistics as reported, recorded per evaluated unit.
  perf_stats_t rec_stats [8];
  int          rec_unit  [8];
  int          n_rec = 0;
  logic        snap_d = 0;

  always @(posedge clk) if (rst_n) begin
    snap_d <= dut.stats_snap;
    if (snap_d && tuning && n_rec < 8) begin
      rec_stats[n_rec] = istats;
      rec_unit[n_rec]  = active_unit;
      n_rec++;
    end
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

  task automatic check_round(input algo_e a);
    logic [127:0] base, m;
    int best, expect_n;
    bit stop;
    best = 3; stop = 0; expect_n = 1;
    checks++;
    if (n_rec < 1 || rec_unit[0] != 3) begin
      failures++; $display("tuning did not start on the 100ms unit"); return;
    end
    base = (a == ALG_OPTIMAL || a == ALG_SAMPLING) ? edp_of(3, rec_stats[0]) : 128'(rec_stats[0].miss_count);
    for (int i = 1; i < 4 && !stop; i++) begin
      bit keep;
      int u = 3 - i;
      expect_n++;
      checks++;
      if (i >= n_rec || rec_unit[i] != u) begin
        failures++; $display("interval %0d evaluated unit %0d, expected %0d", i, rec_unit[i], u); return;
      end
      m = (a == ALG_OPTIMAL || a == ALG_SAMPLING) ? edp_of(u, rec_stats[i]) : 128'(rec_stats[i].miss_count);
      case (a)
        ALG_SAMPLING: keep = m < base;
        ALG_OPTIMAL:  keep = m <= base;
        default: keep = (a == ALG_MISS_LB && m * 2000 <
                         128'(rec_stats[i].read_requests) + 128'(rec_stats[i].write_requests))
                        || (m * 20 < base * 21);
      endcase
      if (keep) begin
        best = u;
        if (a == ALG_OPTIMAL || a == ALG_SAMPLING) base = m;
      end else if (a != ALG_SAMPLING) stop = 1;
    end
    checks++;
    if (n_rec != expect_n) begin failures++; $display("%0d intervals evaluated, expected %0d", n_rec, expect_n); end
    checks++;
    if (best_unit != 2'(best)) begin
      failures++; $display("algo %0d chose unit %0d, expected %0d", a, best_unit, best);
    end
    $display("algo %0d: %0d intervals, chose unit %0d", a, n_rec, best_unit);
  endtask

  // ------------------------------------------------ processor model
  function automatic logic [31:0] gold(input logic [31:0] a);
    if (golden.exists(a[31:2])) return golden[a[31:2]];
    return {2'b0, a[31:6], a[5:2]};
  endfunction

  bit run_cpu = 0;

  task automatic cpu_access(input bit we, input logic [31:0] a, input logic [31:0] d);
    bit missed = 0;
    @(negedge clk);
    inst_retired = 0;
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = d;
    while (!cpu_ready) @(negedge clk);
    @(posedge clk);
    #1 cpu_req = 0;
    forever begin
      @(negedge clk);
      if (dut.perf_ev.miss) missed = 1;
      if (cpu_resp) break;
    end
    if (!we) begin
      checks++;
      if (cpu_rdata != gold(a)) begin
        failures++; $display("load %h = %h, expected %h", a, cpu_rdata, gold(a));
      end
    end else golden[a[31:2]] = d;
    if (!missed) n_hit++;
    inst_retired = 1;     // the memory instruction retires
    @(negedge clk);
    inst_retired = 0;
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (run_cpu) begin
        repeat (1 + $urandom % 4) begin
          inst_retired = 1;
          @(negedge clk);
        end
        inst_retired = 0;
        begin
          logic [31:0] a;
          a = (32'($urandom % ws_tags) << 13) | (32'($urandom % ws_sets) << 6) | (32'($urandom % 16) << 2);
          cpu_access(($urandom % 4) == 0, a, $urandom);
        end
      end else inst_retired = 0;
    end
  end

  task automatic start_app(input logic [2:0] id, input algo_e a);
    @(negedge clk);
    while (!tuner_ready) @(negedge clk);
    algo = a; app_start = 1; app_id = id;
    @(negedge clk);
    app_start = 0;
  endtask

  task automatic tune_app(input logic [2:0] id, input algo_e a);
    n_rec = 0;
    start_app(id, a);
    @(posedge clk);
    while (!tune_done) @(posedge clk);
    check_round(a);
    n_tuned++;
    n_algo[a]++;
    // the switch to the chosen unit
    repeat (2) @(posedge clk);
    while (dut.switch_req) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (active_unit != best_unit) begin failures++; $display("active %0d, best %0d", active_unit, best_unit); end
  endtask

  initial begin
    int r0;
    logic [1:0] stored;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_cpu = 1;
    // application 0: small working set, LARS-Optimal
    ws_sets = 8; ws_tags = 3;
    tune_app(0, ALG_OPTIMAL);
    stored = best_unit;
    // phase change: much larger working set -> the checking process re-tunes
    r0 = n_retune;
    ws_sets = 128; ws_tags = 40;
    while (n_retune == r0 && n_tuned < 10) @(posedge clk);
    n_rec = 0;
    // finish the re-tuning round (it started on the 100ms unit)
    while (!tune_done) @(posedge clk);
    n_tuned++;
    // applications 1..3 with the other algorithms
    ws_sets = 16; ws_tags = 5;
    tune_app(1, ALG_MISS);
    ws_sets = 4;  ws_tags = 2;
    tune_app(2, ALG_MISS_LB);
    ws_sets = 32; ws_tags = 6;
    tune_app(3, ALG_SAMPLING);
    // application 1 again: its stored unit is reused without tuning
    stored = best_unit;
    ws_sets = 16; ws_tags = 5;
    start_app(1, ALG_MISS);
    repeat (5) @(posedge clk);
    while (dut.switch_req) @(posedge clk);
    repeat (5000) @(posedge clk);
    checks++;
    if (tuning) begin failures++; $display("restarted application was tuned again"); end
    else n_reuse++;
    run_cpu = 0;
    repeat (200) @(posedge clk);
    $display("hits %0d misses %0d write-backs %0d expiries %0d migrations %0d tunings %0d re-tunes %0d reuse %0d",
             n_hit, n_miss, n_wb, n_exp, n_mig, n_tuned, n_retune, n_reuse);
    $display("algorithms: sampling %0d optimal %0d miss %0d miss-lb %0d", n_algo[0], n_algo[1], n_algo[2], n_algo[3]);
    checks++; if (n_hit == 0)    begin failures++; $display("no hit"); end
    checks++; if (n_miss == 0)   begin failures++; $display("no miss"); end
    checks++; if (n_wb == 0)     begin failures++; $display("no write-back"); end
    checks++; if (n_exp == 0)    begin failures++; $display("no expiry"); end
    checks++; if (n_mig == 0)    begin failures++; $display("no migration"); end
    checks++; if (n_retune == 0) begin failures++; $display("no re-tune"); end
    checks++; if (n_reuse == 0)  begin failures++; $display("no history reuse"); end
    for (int a = 0; a < 4; a++) begin
      checks++;
      if (n_algo[a] == 0) begin failures++; $display("algorithm %0d never ran", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
