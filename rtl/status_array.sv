// status_array: per-block valid bit, dirty bit and monitor counter of one
// STT-RAM unit.
//
// The paper gives each unit a status array whose elements hold a valid bit,
// a dirty bit (write-back cache) and the monitor-counter bits; a block whose
// counter reaches S(N-1) is reported as expired so the controller can write
// it back and invalidate it. Here one monitor_counter instance sits beside
// each block's valid and dirty flops. All counters advance on the unit's
// monitor pulse `tick`.
//
// Interface:
//  * rd_set selects a set; rd_valid/rd_dirty give its ways combinationally.
//  * upd writes valid and dirty of (upd_set, upd_way) at the clock edge.
//    upd_wr marks the update as a write or invalidate, which restarts the
//    block's monitor counter (S0). An update that only clears or copies the
//    flags with upd_wr = 0 leaves the counter running.
//  * exp_any/exp_set/exp_way/exp_dirty name the lowest-numbered valid block
//    whose counter is in S(N-1) (combinational from registered state).
//  * clear invalidates every block (used when the unit is left empty).
// Choices of this design: expiry is reported for valid blocks only, and the
// lowest block index wins when several expire together.
module status_array
  import lars_pkg::*;
#(
  parameter int unsigned SETS_P = lars_pkg::SETS,
  parameter int unsigned WAYS_P = lars_pkg::WAYS,
  parameter int unsigned N      = lars_pkg::MON_N,
  localparam int unsigned IW = $clog2(SETS_P),
  localparam int unsigned WW = $clog2(WAYS_P),
  localparam int unsigned BLOCKS = SETS_P * WAYS_P
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  input  logic              clear,
  // read port
  input  logic [IW-1:0]     rd_set,
  output logic [WAYS_P-1:0] rd_valid,
  output logic [WAYS_P-1:0] rd_dirty,
  // update port
  input  logic              upd,
  input  logic [IW-1:0]     upd_set,
  input  logic [WW-1:0]     upd_way,
  input  logic              upd_valid,
  input  logic              upd_dirty,
  input  logic              upd_wr,
  // expiry report
  output logic              exp_any,
  output logic [IW-1:0]     exp_set,
  output logic [WW-1:0]     exp_way,
  output logic              exp_dirty
);

  logic [BLOCKS-1:0] valid_q, dirty_q, expired, restart;

  // Block b = set * WAYS + way.
  function automatic int unsigned blk(input logic [IW-1:0] s, input logic [WW-1:0] w);
    return int'(s) * WAYS_P + int'(w);
  endfunction

  always_comb begin
    restart = '0;
    if (upd && upd_wr) restart[blk(upd_set, upd_way)] = 1'b1;
  end

  for (genvar b = 0; b < BLOCKS; b++) begin : g_blk
    monitor_counter #(.N(N)) u_mon (
      .clk    (clk),
      .rst_n  (rst_n),
      .tick   (tick),
      .wr_inv (restart[b] | clear),
      .state  (),
      .expired(expired[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      dirty_q <= '0;
    end else if (clear) begin
      valid_q <= '0;
      dirty_q <= '0;
    end else if (upd) begin
      valid_q[blk(upd_set, upd_way)] <= upd_valid;
      dirty_q[blk(upd_set, upd_way)] <= upd_dirty;
    end
  end

  always_comb begin
    for (int w = 0; w < WAYS_P; w++) begin
      rd_valid[w] = valid_q[blk(rd_set, WW'(w))];
      rd_dirty[w] = dirty_q[blk(rd_set, WW'(w))];
    end
  end

  // Lowest-index valid expired block.
  logic [BLOCKS-1:0] exp_vec;
  assign exp_vec = expired & valid_q;

  always_comb begin
    exp_any   = 1'b0;
    exp_set   = '0;
    exp_way   = '0;
    exp_dirty = 1'b0;
    for (int b = BLOCKS - 1; b >= 0; b--) begin
      if (exp_vec[b]) begin
        exp_any   = 1'b1;
        exp_set   = IW'(b / WAYS_P);
        exp_way   = WW'(b % WAYS_P);
        exp_dirty = dirty_q[b];
      end
    end
  end

endmodule
