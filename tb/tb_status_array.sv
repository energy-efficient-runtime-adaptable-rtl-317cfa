// tb_status_array: random status updates, monitor ticks and set reads on a
// full-size (128 x 4) status array, compared cycle by cycle with a model that
// keeps its own valid, dirty and counter value per block. Checks the set
// read port and the expiry report (lowest valid expired block, its dirty bit).
module tb_status_array;
  localparam int SETS = 128, WAYS = 4, N = 10, B = SETS * WAYS;
  logic clk = 0, rst_n = 0, tick = 0, clear = 0;
  logic [6:0] rd_set, upd_set, exp_set;
  logic [1:0] upd_way, exp_way;
  logic [3:0] rd_valid, rd_dirty;
  logic upd = 0, upd_valid = 0, upd_dirty = 0, upd_wr = 0;
  logic exp_any, exp_dirty;
  int checks = 0, failures = 0;
  bit mv [B], md [B];
  int mc [B];
  int n_exp = 0;

  status_array dut (.clk, .rst_n, .tick, .clear, .rd_set, .rd_valid, .rd_dirty,
                    .upd, .upd_set, .upd_way, .upd_valid, .upd_dirty, .upd_wr,
                    .exp_any, .exp_set, .exp_way, .exp_dirty);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int first;
    first = -1;
    for (int b = 0; b < B; b++) if (first < 0 && mv[b] && mc[b] == N - 1) first = b;
    checks++;
    for (int w = 0; w < WAYS; w++)
      if (rd_valid[w] != mv[rd_set * WAYS + w] || (mv[rd_set * WAYS + w] && rd_dirty[w] != md[rd_set * WAYS + w])) begin
        failures++;
        $display("set %0d way %0d: v %0b/%0b d %0b/%0b", rd_set, w, rd_valid[w], mv[rd_set*WAYS+w],
                 rd_dirty[w], md[rd_set*WAYS+w]);
      end
    checks++;
    if (exp_any != (first >= 0) ||
        (first >= 0 && (int'(exp_set) * WAYS + int'(exp_way) != first || exp_dirty != md[first]))) begin
      failures++;
      $display("expiry: any %0b blk %0d model %0d", exp_any, int'(exp_set) * WAYS + int'(exp_way), first);
    end
    if (first >= 0) n_exp++;
  endtask

  initial begin
    mv = '{default: 0}; md = '{default: 0}; mc = '{default: 0};
    rd_set = 0; upd_set = 0; upd_way = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      tick      = ($urandom % 40) == 0;
      upd       = ($urandom % 20) == 0;
      upd_set   = 7'($urandom % 8);           // few sets so blocks live long enough to expire
      upd_way   = 2'($urandom);
      upd_valid = ($urandom % 4) != 0;
      upd_dirty = $urandom;
      upd_wr    = ($urandom % 8) != 0;
      rd_set    = 7'($urandom % 9);
      #1 compare();
      @(posedge clk);
      for (int b = 0; b < B; b++) begin
        if (upd && upd_wr && b == int'(upd_set) * WAYS + int'(upd_way)) mc[b] = 0;
        else if (tick && mc[b] != N - 1) mc[b]++;
      end
      if (upd) begin
        mv[int'(upd_set) * WAYS + int'(upd_way)] = upd_valid;
        md[int'(upd_set) * WAYS + int'(upd_way)] = upd_dirty;
      end
    end
    checks++;
    if (n_exp == 0) begin failures++; $display("no expiry was exercised"); end
    $display("expiry cycles seen: %0d", n_exp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
