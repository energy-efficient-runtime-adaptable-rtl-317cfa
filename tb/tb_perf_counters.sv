// tb_perf_counters: drives random event pulses and compares the live counters
// and the snapshot taken by `snap` (which must include that cycle's events and
// restart the live counters) with a model; also checks `clr`.
module tb_perf_counters;
  import lars_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, snap = 0;
  perf_ev_t ev;
  perf_stats_t live, stats;
  int checks = 0, failures = 0;
  int unsigned m [7];
  int unsigned s [7];

  perf_counters dut (.clk, .rst_n, .clr, .snap, .ev, .live, .stats);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void cmp(input string what, input perf_stats_t v, input int unsigned r[7]);
    checks++;
    if (v.read_requests != r[0] || v.writebacks != r[1] || v.write_requests != r[2] ||
        v.miss_count != r[3] || v.miss_latency != r[4] || v.hit_latency != r[5] ||
        v.refill_latency != r[6]) begin
      failures++;
      $display("%s mismatch: rd %0d/%0d wb %0d/%0d wr %0d/%0d miss %0d/%0d", what,
               v.read_requests, r[0], v.writebacks, r[1], v.write_requests, r[2],
               v.miss_count, r[3]);
    end
  endfunction

  initial begin
    ev = '0;
    m = '{default: 0};
    s = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      ev   = perf_ev_t'($urandom);
      snap = ($urandom % 500) == 0;
      clr  = ($urandom % 5000) == 0;
      @(posedge clk);
      #1;
      if (clr) begin
        m = '{default: 0};
        s = '{default: 0};
      end else begin
        m[0] += ev.rd_req;   m[1] += ev.wb;       m[2] += ev.wr_req;  m[3] += ev.miss;
        m[4] += ev.miss_cyc; m[5] += ev.hit_cyc;  m[6] += ev.refill_cyc;
        if (snap) begin
          s = m;
          m = '{default: 0};
        end
      end
      cmp("live", live, m);
      cmp("stats", stats, s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
