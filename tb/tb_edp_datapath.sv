// tb_edp_datapath: random interval statistics for each unit; the expected
// energy is the sum of the five products of the datapath figure, worked out
// here from the paper's table values (read 12/12/11/11 pJ, write
// 40/56/76/101 pJ, leakage 877 fJ per cycle), and EDP = energy x total latency.
// Checks both results and the 8-cycle start-to-done latency.
module tb_edp_datapath;
  import lars_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [1:0] unit;
  perf_stats_t stats;
  logic [63:0] energy;
  logic [97:0] cur_edp;
  int checks = 0, failures = 0;

  edp_datapath dut (.clk, .rst_n, .start, .unit, .stats, .busy, .done, .energy, .cur_edp);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned rde [4] = '{12000, 12000, 11000, 11000};
    longint unsigned wre [4] = '{40000, 56000, 76000, 101000};
    logic [127:0] e, lat, edp;
    int cyc;
    unit = 0; stats = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      unit = 2'($urandom);
      stats.read_requests  = (i % 3 == 0) ? 32'hFFFF_FFFF : $urandom;
      stats.writebacks     = $urandom;
      stats.write_requests = $urandom;
      stats.miss_count     = $urandom;
      stats.miss_latency   = (i % 3 == 0) ? 32'hFFFF_FFFF : $urandom;
      stats.hit_latency    = $urandom;
      stats.refill_latency = $urandom;
      lat = 128'(stats.miss_latency) + 128'(stats.hit_latency) + 128'(stats.refill_latency);
      e = 128'(rde[unit]) * (128'(stats.read_requests) + 128'(stats.writebacks))
        + 128'(wre[unit]) * (128'(stats.write_requests) + 128'(stats.miss_count))
        + 128'(877) * lat;
      edp = e * lat;
      start = 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (cyc != 8) begin failures++; $display("latency %0d", cyc); end
      checks++;
      if (128'(energy) != e || 128'(cur_edp) != edp[97:0]) begin
        failures++; $display("unit %0d energy %0d exp %0d", unit, energy, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
