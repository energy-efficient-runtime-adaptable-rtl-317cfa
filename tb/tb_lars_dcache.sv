// tb_lars_dcache: the cache with its four full-size units against a main
// memory model and a golden word memory. Random loads and stores to a small
// set of conflicting addresses cause hits, misses, dirty evictions and (with
// short monitor clocks) block expiries; the testbench switches the active
// unit now and then. Every load is compared with the golden memory, so lost
// or stale data after an eviction, expiry or migration is caught. Checks:
// load hit 2 cycles; store hit 2 + write latency of the active unit; a
// migration takes 512 x (2 + write latency of the target) cycles; the active
// unit follows the switch; each mechanism occurs.
module tb_lars_dcache;
  import lars_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req = 0, cpu_we = 0, cpu_ready, cpu_resp;
  logic [31:0] cpu_addr = 0, cpu_wdata = 0, cpu_rdata;
  logic mem_req, mem_we, mem_ack;
  logic [25:0] mem_addr;
  logic [511:0] mem_wdata, mem_rdata;
  logic switch_req = 0, switch_done, expire_evt, migrating;
  logic [1:0] switch_unit = 0, active_unit;
  perf_ev_t perf_ev;
  int unsigned n_rd, n_wr;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_exp = 0, n_mig = 0, n_sthit = 0;
  logic [31:0] golden [logic [29:0]];

  lars_dcache #(.TICK0(60), .TICK1(120), .TICK2(240), .TICK3(480)) dut (
    .clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_ready, .cpu_resp, .cpu_rdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .switch_req, .switch_unit, .switch_done, .active_unit, .perf_ev, .expire_evt, .migrating);

  lars_mem_model mem (.clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
                      .ack(mem_ack), .rdata(mem_rdata), .n_reads(n_rd), .n_writes(n_wr));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (perf_ev.wb) n_wb++;
    if (expire_evt) n_exp++;
  end

  function automatic logic [31:0] gold(input logic [31:0] a);
    if (golden.exists(a[31:2])) return golden[a[31:2]];
    return {2'b0, a[31:6], a[5:2]};
  endfunction

  function automatic int wlat(input logic [1:0] u);
    case (u) 0: return 3; 1: return 4; 2: return 5; default: return 7; endcase
  endfunction

  task automatic cpu_access(input bit we, input logic [31:0] a, input logic [31:0] d);
    int lat;
    bit missed;
    @(negedge clk);
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = d;
    while (!cpu_ready) @(negedge clk);
    @(posedge clk);
    #1 cpu_req = 0;
    lat = 0; missed = 0;
    forever begin
      @(negedge clk);
      lat++;
      if (perf_ev.miss) missed = 1;
      if (cpu_resp) break;
    end
    if (!we) begin
      checks++;
      if (cpu_rdata != gold(a)) begin
        failures++; $display("load %h = %h, expected %h", a, cpu_rdata, gold(a));
      end
    end else golden[a[31:2]] = d;
    if (!missed) begin
      checks++;
      if (lat != (we ? 2 + wlat(active_unit) : 2)) begin
        failures++; $display("%s hit latency %0d on unit %0d", we ? "store" : "load", lat, active_unit);
      end
      if (we) n_sthit++; else n_hit++;
    end else n_miss++;
    @(posedge clk);
  endtask

  task automatic do_switch(input logic [1:0] u);
    int cyc;
    logic [1:0] from;
    @(negedge clk);
    from = active_unit;
    switch_req = 1; switch_unit = u;
    // wait for the edge at which the controller starts (migrating rises)
    cyc = 0;
    forever begin
      @(negedge clk);
      if (switch_done) break;
      if (migrating) cyc++;
    end
    @(posedge clk);
    #1 switch_req = 0;
    if (u != from) begin
      checks++;
      if (cyc + 1 != 512 * (2 + wlat(u))) begin
        failures++; $display("migration %0d->%0d took %0d cycles, expected %0d", from, u, cyc + 1, 512 * (2 + wlat(u)));
      end
      n_mig++;
    end
    checks++;
    if (active_unit != u) begin failures++; $display("active unit %0d, expected %0d", active_unit, u); end
  endtask

  initial begin
    logic [31:0] a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      // 3 sets x 7 tags: more lines than ways, so evictions happen
      a = {13'($urandom % 7), 12'h0, 7'd0} | (32'($urandom % 3) << 6) | (32'($urandom % 16) << 2);
      cpu_access(($urandom % 3) == 0, a, $urandom);
      if (i % 1500 == 1499) do_switch(2'($urandom));
      if (i % 700 == 350) repeat ($urandom % 3000) @(posedge clk);  // idle: let blocks expire
    end
    do_switch(U_100MS);
    do_switch(U_100US);
    // final sweep: every address read back
    for (int t = 0; t < 7; t++)
      for (int s = 0; s < 3; s++)
        for (int w = 0; w < 16; w++)
          cpu_access(0, {13'(t), 12'h0, 7'd0} | (32'(s) << 6) | (32'(w) << 2), 0);
    $display("hits %0d store-hits %0d misses %0d writebacks %0d expiries %0d migrations %0d",
             n_hit, n_sthit, n_miss, n_wb, n_exp, n_mig);
    checks++; if (n_hit == 0)   begin failures++; $display("no load hit"); end
    checks++; if (n_sthit == 0) begin failures++; $display("no store hit"); end
    checks++; if (n_miss == 0)  begin failures++; $display("no miss"); end
    checks++; if (n_wb == 0)    begin failures++; $display("no write-back"); end
    checks++; if (n_exp == 0)   begin failures++; $display("no expiry"); end
    checks++; if (n_mig == 0)   begin failures++; $display("no migration"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
