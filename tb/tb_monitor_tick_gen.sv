// tb_monitor_tick_gen: checks that the monitor clock of the 100us unit
// (default period, 20,000 cycles = 10 us at 2 GHz) pulses exactly once every
// PERIOD cycles and is one cycle wide; also a short period of 7.
module tb_monitor_tick_gen;
  logic clk = 0, rst_n = 0;
  logic tick_a, tick_b;
  int checks = 0, failures = 0;
  int cyc = 0;
  int last_a = -1, last_b = -1, na = 0, nb = 0;

  monitor_tick_gen dut_a (.clk, .rst_n, .tick(tick_a));
  monitor_tick_gen #(.PERIOD(7)) dut_b (.clk, .rst_n, .tick(tick_b));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (tick_a) begin
      checks++;
      // cyc counts negedges from the one that releases reset, so the edge
      // that produces pulse k is negedge k*PERIOD + 1.
      if (cyc != (na + 1) * 20000 + 1) begin
        failures++; $display("tick_a at cycle %0d, expected %0d", cyc, (na + 1) * 20000 + 1);
      end
      na++;
    end
    if (tick_b) begin
      checks++;
      if (last_b >= 0 && cyc - last_b != 7) begin
        failures++; $display("tick_b spacing %0d", cyc - last_b);
      end
      last_b = cyc;
      nb++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (100005) @(posedge clk);
    checks++;
    if (na != 5) begin failures++; $display("tick_a count %0d, expected 5", na); end
    checks++;
    if (nb != 100005 / 7) begin failures++; $display("tick_b count %0d", nb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
