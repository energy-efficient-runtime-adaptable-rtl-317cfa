// retention_history: per-application record of the tuned retention unit.
//
// After tuning, LARS keeps each application's chosen STT-RAM unit (the 2-bit
// location entry) and the base value the checking process compares against
// (base EDP, or base miss count for LARS-Miss). When the application runs
// again the tuner reuses the entry instead of tuning. The paper asks only for
// a small low-overhead structure; this design indexes it directly by an
// application identifier of APP_W bits.
//
// Interface: rd_app selects an entry, rd_hit/rd_unit/rd_base show it
// combinationally. A write (wr) stores unit and base for wr_app at the clock
// edge; inv clears the entry of wr_app. Reset empties the table.
module retention_history
  import lars_pkg::*;
#(
  parameter int unsigned APP_W = 3,
  localparam int unsigned APPS = 1 << APP_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [APP_W-1:0]    rd_app,
  output logic                rd_hit,
  output logic [UNIT_W-1:0]   rd_unit,
  output logic [METRIC_W-1:0] rd_base,
  input  logic                wr,
  input  logic                inv,
  input  logic [APP_W-1:0]    wr_app,
  input  logic [UNIT_W-1:0]   wr_unit,
  input  logic [METRIC_W-1:0] wr_base
);

  logic [APPS-1:0]     valid_q;
  logic [UNIT_W-1:0]   unit_q [APPS];
  logic [METRIC_W-1:0] base_q [APPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid_q <= '0;
    else if (wr)     valid_q[wr_app] <= 1'b1;
    else if (inv)    valid_q[wr_app] <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (wr) begin
      unit_q[wr_app] <= wr_unit;
      base_q[wr_app] <= wr_base;
    end
  end

  assign rd_hit  = valid_q[rd_app];
  assign rd_unit = unit_q[rd_app];
  assign rd_base = base_q[rd_app];

endmodule
