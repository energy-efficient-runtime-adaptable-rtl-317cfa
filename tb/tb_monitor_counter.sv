// tb_monitor_counter: checks the monitor counter state by state against an
// independent model of the S0..S(N-1) chain (tick advances, write/invalidate
// returns to S0, S(N-1) holds and raises E), and that E appears exactly after
// N-1 ticks following a write.
module tb_monitor_counter;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, tick = 0, wr_inv = 0;
  logic [3:0] state;
  logic expired;
  int checks = 0, failures = 0;
  int ref_s = 0;

  monitor_counter #(.N(N)) dut (.clk, .rst_n, .tick, .wr_inv, .state, .expired);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_now();
    checks++;
    if (int'(state) != ref_s || expired != (ref_s == N - 1)) begin
      failures++;
      $display("mismatch: state=%0d exp=%0b model=%0d", state, expired, ref_s);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_now();
    // directed: write then exactly N-1 ticks to expire
    wr_inv = 1; @(negedge clk); wr_inv = 0; ref_s = 0;
    for (int i = 0; i < N - 1; i++) begin
      checks++;
      if (expired) begin failures++; $display("expired early after %0d ticks", i); end
      tick = 1; @(negedge clk); tick = 0; @(negedge clk);
    end
    checks++;
    if (!expired) begin failures++; $display("not expired after N-1 ticks"); end
    // holds in S(N-1)
    repeat (3) begin tick = 1; @(negedge clk); end
    tick = 0;
    checks++;
    if (!expired || state != 4'(N - 1)) begin failures++; $display("did not hold S(N-1)"); end
    wr_inv = 1; @(negedge clk); wr_inv = 0;
    checks++;
    if (expired || state != 0) begin failures++; $display("invalidate did not return to S0"); end
    ref_s = 0;
    // random
    for (int i = 0; i < 5000; i++) begin
      tick   = ($urandom % 3) == 0;
      wr_inv = ($urandom % 17) == 0;
      @(posedge clk);
      if (wr_inv) ref_s = 0;
      else if (tick && ref_s != N - 1) ref_s++;
      @(negedge clk);
      check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
