// tb_retention_history: writes random (unit, base) entries for random
// applications and checks every lookup against a model, including entries
// never written (miss) and invalidation.
module tb_retention_history;
  import lars_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] rd_app, wr_app;
  logic rd_hit, wr = 0, inv = 0;
  logic [UNIT_W-1:0] rd_unit, wr_unit;
  logic [METRIC_W-1:0] rd_base, wr_base;
  int checks = 0, failures = 0;
  bit m_v [8];
  logic [UNIT_W-1:0] m_u [8];
  logic [METRIC_W-1:0] m_b [8];

  retention_history dut (.clk, .rst_n, .rd_app, .rd_hit, .rd_unit, .rd_base,
                         .wr, .inv, .wr_app, .wr_unit, .wr_base);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_v = '{default: 0};
    rd_app = 0; wr_app = 0; wr_unit = 0; wr_base = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      wr      = ($urandom % 3) == 0;
      inv     = !wr && ($urandom % 11) == 0;
      wr_app  = 3'($urandom);
      wr_unit = UNIT_W'($urandom);
      wr_base = {$urandom, $urandom, $urandom, $urandom};
      rd_app  = 3'($urandom);
      #1;
      checks++;
      if (rd_hit != m_v[rd_app] || (m_v[rd_app] && (rd_unit != m_u[rd_app] || rd_base != m_b[rd_app]))) begin
        failures++;
        $display("app %0d: hit %0b/%0b unit %0d/%0d", rd_app, rd_hit, m_v[rd_app], rd_unit, m_u[rd_app]);
      end
      @(posedge clk);
      if (wr) begin m_v[wr_app] = 1; m_u[wr_app] = wr_unit; m_b[wr_app] = wr_base; end
      else if (inv) m_v[wr_app] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
