// tb_lars_top_full: the LARS data cache and tuner with every parameter at its
// default (2 GHz monitor clocks, 100-million-instruction tuning interval).
// An application is started, which makes the tuner open its first tuning
// interval on the 100ms unit, and a processor model runs 3000 loads and
// stores over a working set larger than the cache's associativity covers, so
// that hits, misses, dirty evictions and refills all occur at full size.
// Checked: each load against a golden memory; load-hit latency 2 cycles and
// store-hit latency 2 + 7 cycles on the 100ms unit; the hardware's live
// performance counters against counts kept here; that no tuning decision is
// taken before the interval's 100 million instructions have retired.
module tb_lars_top_full;
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
  int n_rd = 0, n_wr = 0, n_miss = 0, n_hit = 0, n_sthit = 0, n_wb = 0;
  logic [31:0] golden [logic [29:0]];

  lars_top dut (
    .clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_ready, .cpu_resp, .cpu_rdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .algo, .app_start, .app_id, .inst_retired, .tuner_ready,
    .active_unit, .tuning, .tune_done, .retune, .best_unit, .base_metric,
    .expire_evt, .migrating, .interval_stats(istats));

  lars_mem_model mem (.clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
                      .ack(mem_ack), .rdata(mem_rdata), .n_reads(n_mrd), .n_writes(n_mwr));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.perf_ev.wb) n_wb++;
    checks++;
    if (tune_done || retune || dut.stats_snap) begin
      failures++; $display("tuning decision before the interval ended");
    end
  end

  function automatic logic [31:0] gold(input logic [31:0] a);
    if (golden.exists(a[31:2])) return golden[a[31:2]];
    return {2'b0, a[31:6], a[5:2]};
  endfunction

  task automatic cpu_access(input bit we, input logic [31:0] a, input logic [31:0] d);
    int lat = 0;
    bit missed = 0;
    @(negedge clk);
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = d;
    while (!cpu_ready) @(negedge clk);
    @(posedge clk);
    #1 cpu_req = 0;
    forever begin
      @(negedge clk);
      lat++;
      if (dut.perf_ev.miss) missed = 1;
      if (cpu_resp) break;
    end
    if (we) n_wr++; else n_rd++;
    if (!we) begin
      checks++;
      if (cpu_rdata != gold(a)) begin
        failures++; $display("load %h = %h, expected %h", a, cpu_rdata, gold(a));
      end
    end else golden[a[31:2]] = d;
    if (missed) n_miss++;
    else begin
      checks++;
      if (lat != (we ? 9 : 2)) begin failures++; $display("hit latency %0d (store %0b)", lat, we); end
      if (we) n_sthit++; else n_hit++;
    end
    inst_retired = 1;
    @(negedge clk);
    inst_retired = 0;
  endtask

  initial begin
    logic [31:0] a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    app_start = 1; app_id = 0;
    @(negedge clk);
    app_start = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (!tuning || active_unit != U_100MS) begin
      failures++; $display("tuning did not start on the 100ms unit");
    end
    for (int i = 0; i < 3000; i++) begin
      repeat ($urandom % 4) begin inst_retired = 1; @(negedge clk); end
      inst_retired = 0;
      // 6 tags x 64 sets: up to 6 lines compete for the 4 ways of a set
      a = (32'($urandom % 6) << 13) | (32'($urandom % 64) << 6) | (32'($urandom % 16) << 2);
      cpu_access(($urandom % 3) == 0, a, $urandom);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (dut.u_perf.live.read_requests != 32'(n_rd) || dut.u_perf.live.write_requests != 32'(n_wr) ||
        dut.u_perf.live.miss_count != 32'(n_miss) || dut.u_perf.live.writebacks != 32'(n_wb)) begin
      failures++;
      $display("counters rd %0d/%0d wr %0d/%0d miss %0d/%0d wb %0d/%0d",
               dut.u_perf.live.read_requests, n_rd, dut.u_perf.live.write_requests, n_wr,
               dut.u_perf.live.miss_count, n_miss, dut.u_perf.live.writebacks, n_wb);
    end
    checks++;
    if (n_hit == 0 || n_sthit == 0 || n_miss == 0 || n_wb == 0) begin
      failures++; $display("a mechanism did not occur");
    end
    checks++;
    if (!tuning) begin failures++; $display("tuning ended early"); end
    $display("loads %0d stores %0d hits %0d store-hits %0d misses %0d write-backs %0d",
             n_rd, n_wr, n_hit, n_sthit, n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
