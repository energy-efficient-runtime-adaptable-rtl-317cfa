// tb_stt_ram_unit: writes random tags and lines into a full-size unit with the
// 100ms write latency (7) and a second unit with the 100us latency (3), reads
// whole sets back and compares with a model. Checks that a read occupies the
// unit 2 cycles and a write 7 (or 3) cycles, counted from the accepting edge
// to the edge that ends the `done` cycle.
module tb_stt_ram_unit;
  localparam int SETS = 128, WAYS = 4, TW = 19, LW = 512;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic req [2], we, busy [2], done [2];
  logic [6:0] set;
  logic [1:0] way;
  logic [TW-1:0] wtag;
  logic [LW-1:0] wline;
  logic [TW-1:0] rtags [2][WAYS];
  logic [LW-1:0] rlines [2][WAYS];
  logic [TW-1:0] mt [2][SETS*WAYS];
  logic [LW-1:0] ml [2][SETS*WAYS];
  bit            mw [2][SETS*WAYS];
  localparam int WLAT [2] = '{7, 3};

  stt_ram_unit dut7 (.clk, .rst_n, .req(req[0]), .we, .set, .way, .wtag, .wline,
                     .busy(busy[0]), .done(done[0]), .rtags(rtags[0]), .rlines(rlines[0]));
  stt_ram_unit #(.WR_LAT_P(3)) dut3 (.clk, .rst_n, .req(req[1]), .we, .set, .way, .wtag, .wline,
                     .busy(busy[1]), .done(done[1]), .rtags(rtags[1]), .rlines(rlines[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LW-1:0] rline();
    logic [LW-1:0] l;
    for (int i = 0; i < LW / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic access(input int u, input bit w, input int s, input int wy);
    int lat;
    @(negedge clk);
    req[u] = 1; we = w; set = 7'(s); way = 2'(wy);
    wtag = TW'($urandom); wline = rline();
    @(posedge clk);
    #1 req[u] = 0;
    // count cycles from the accepting edge to the edge that ends `done`
    lat = 0;
    forever begin
      @(negedge clk);
      lat++;
      if (done[u]) break;
    end
    @(posedge clk);
    checks++;
    if (lat != (w ? WLAT[u] : 2)) begin
      failures++; $display("unit %0d %s latency %0d", u, w ? "write" : "read", lat);
    end
    if (w) begin
      mt[u][s*WAYS+wy] = wtag; ml[u][s*WAYS+wy] = wline; mw[u][s*WAYS+wy] = 1;
    end else begin
      for (int k = 0; k < WAYS; k++) if (mw[u][s*WAYS+k]) begin
        checks++;
        if (rtags[u][k] != mt[u][s*WAYS+k] || rlines[u][k] != ml[u][s*WAYS+k]) begin
          failures++; $display("unit %0d set %0d way %0d data mismatch", u, s, k);
        end
      end
    end
  endtask

  initial begin
    req[0] = 0; req[1] = 0; we = 0; set = 0; way = 0; wtag = 0; wline = 0;
    mw = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++)
      access($urandom % 2, ($urandom % 2) == 0, $urandom % 16, $urandom % 4);
    // all sets touched once
    for (int s = 0; s < SETS; s++) access(0, 1, s, s % 4);
    for (int s = 0; s < SETS; s++) access(0, 0, s, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
