// lars_dcache: the LARS L1 data cache with its cache controller.
//
// Four STT-RAM units (100us, 1ms, 10ms, 100ms retention) each hold a complete
// 32KB, 4-way, 64-byte-line tag and data store (stt_ram_unit) plus a status
// array of valid, dirty and monitor-counter bits (status_array) whose counters
// are clocked by the unit's monitor clock (monitor_tick_gen). Only the unit
// named by the 2-bit location register `active_unit` is used. The controller:
//  * serves CPU word loads and stores as a write-back, write-allocate cache:
//    tag and data of the set are read together (2-cycle hit), a store hit
//    rewrites the line (unit write latency), a miss writes back a dirty victim
//    and refills the line from memory;
//  * services expired blocks reported by the active status array: a dirty
//    block is read and written back to memory, then invalidated; a clean one
//    is invalidated at once;
//  * migrates the cache state when the tuner switches units: every block of
//    every set is read from the old unit and written, with its valid and dirty
//    bits, into the new one, and invalidated in the old. With a 2-cycle read
//    and the target's write latency this costs 512 x (2 + WR) cycles, e.g.
//    4608 cycles into the 100ms unit, the migration cost the paper reports.
// Following the paper: the four units, single active unit, location register,
// expiry handling (dirty -> write back -> invalidate, clean -> invalidate),
// latencies, and state migration on a switch. Choices of this design: the
// replacement policy (first invalid way, else per-set round robin),
// write-allocate, one outstanding CPU access of 32 bits, and the priority
// switch > expiry > CPU request when idle.
//
// CPU port: cpu_req/cpu_we/cpu_addr/cpu_wdata are accepted in a cycle where
// cpu_ready is high. cpu_resp pulses (combinationally, in the cycle the access
// completes) with cpu_rdata for loads. A load hit responds 2 cycles after the
// accepting edge; a store hit after 2 + WR cycles.
// Memory port: mem_req with mem_we/mem_addr (line address)/mem_wdata is held
// until mem_ack; on a read mem_rdata is taken in the ack cycle.
// Switch port: switch_req/switch_unit held until the one-cycle switch_done.
module lars_dcache
  import lars_pkg::*;
#(
  parameter int unsigned TICK0 = lars_pkg::TICK_100US,
  parameter int unsigned TICK1 = lars_pkg::TICK_1MS,
  parameter int unsigned TICK2 = lars_pkg::TICK_10MS,
  parameter int unsigned TICK3 = lars_pkg::TICK_100MS,
  parameter int unsigned MON_N_P = lars_pkg::MON_N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // CPU
  input  logic                    cpu_req,
  input  logic                    cpu_we,
  input  logic [ADDR_W-1:0]       cpu_addr,
  input  logic [WORD_W-1:0]       cpu_wdata,
  output logic                    cpu_ready,
  output logic                    cpu_resp,
  output logic [WORD_W-1:0]       cpu_rdata,
  // main memory
  output logic                    mem_req,
  output logic                    mem_we,
  output logic [ADDR_W-OFF_W-1:0] mem_addr,
  output logic [LINE_BITS-1:0]    mem_wdata,
  input  logic                    mem_ack,
  input  logic [LINE_BITS-1:0]    mem_rdata,
  // unit switching
  input  logic                    switch_req,
  input  logic [UNIT_W-1:0]       switch_unit,
  output logic                    switch_done,
  output logic [UNIT_W-1:0]       active_unit,
  // statistics events
  output perf_ev_t                perf_ev,
  // observation
  output logic                    expire_evt,   // pulse: an expired block was removed
  output logic                    migrating
);

  typedef enum logic [3:0] {
    C_IDLE, C_LOOKUP, C_ST_WR, C_WB, C_REFILL, C_FILL_WR,
    C_EXP_RD, C_EXP_WB, C_EXP_INV, C_MIG_RD, C_MIG_WR
  } cstate_e;

  localparam int unsigned BLOCKS = SETS * WAYS;
  localparam int unsigned BLK_W  = $clog2(BLOCKS);
  localparam int unsigned WSEL_W = $clog2(WORDS);

  cstate_e state;

  // ------------------------------------------------------------ unit buses
  logic [UNITS-1:0]     u_req, u_busy, u_done, t_tick;
  logic                 u_we;
  logic [IDX_W-1:0]     u_set;
  logic [WAY_W-1:0]     u_way;
  logic [TAG_W-1:0]     u_wtag;
  logic [LINE_BITS-1:0] u_wline;
  logic [TAG_W-1:0]     u_rtags  [UNITS][WAYS];
  logic [LINE_BITS-1:0] u_rlines [UNITS][WAYS];

  logic [IDX_W-1:0]     s_rd_set;
  logic [WAYS-1:0]      s_valid [UNITS];
  logic [WAYS-1:0]      s_dirty [UNITS];
  logic [UNITS-1:0]     s_upd, s_upd_valid, s_upd_dirty, s_upd_wr;
  logic [IDX_W-1:0]     s_upd_set [UNITS];
  logic [WAY_W-1:0]     s_upd_way [UNITS];
  logic [UNITS-1:0]     s_exp_any, s_exp_dirty;
  logic [IDX_W-1:0]     s_exp_set [UNITS];
  logic [WAY_W-1:0]     s_exp_way [UNITS];

  localparam int unsigned TICKS [UNITS] = '{TICK0, TICK1, TICK2, TICK3};

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    monitor_tick_gen #(.PERIOD(TICKS[u])) u_tick (
      .clk, .rst_n, .tick(t_tick[u])
    );

    stt_ram_unit #(
      .SETS_P(SETS), .WAYS_P(WAYS), .TAG_BITS(TAG_W), .LINE_W(LINE_BITS),
      .RD_LAT_P(RD_LAT), .WR_LAT_P(wr_lat(u))
    ) u_mem (
      .clk, .rst_n,
      .req   (u_req[u]),
      .we    (u_we),
      .set   (u_set),
      .way   (u_way),
      .wtag  (u_wtag),
      .wline (u_wline),
      .busy  (u_busy[u]),
      .done  (u_done[u]),
      .rtags (u_rtags[u]),
      .rlines(u_rlines[u])
    );

    status_array #(.SETS_P(SETS), .WAYS_P(WAYS), .N(MON_N_P)) u_stat (
      .clk, .rst_n,
      .tick     (t_tick[u]),
      .clear    (1'b0),
      .rd_set   (s_rd_set),
      .rd_valid (s_valid[u]),
      .rd_dirty (s_dirty[u]),
      .upd      (s_upd[u]),
      .upd_set  (s_upd_set[u]),
      .upd_way  (s_upd_way[u]),
      .upd_valid(s_upd_valid[u]),
      .upd_dirty(s_upd_dirty[u]),
      .upd_wr   (s_upd_wr[u]),
      .exp_any  (s_exp_any[u]),
      .exp_set  (s_exp_set[u]),
      .exp_way  (s_exp_way[u]),
      .exp_dirty(s_exp_dirty[u])
    );
  end

  // ------------------------------------------------------------ registers
  logic [UNIT_W-1:0]   act_q, dst_q;
  logic                we_q;
  logic [ADDR_W-1:0]   addr_q;
  logic [WORD_W-1:0]   wdata_q;
  logic [WAY_W-1:0]    vway_q;
  logic [TAG_W-1:0]    vtag_q;
  logic [LINE_BITS-1:0] line_q;
  logic [IDX_W-1:0]    eset_q;
  logic [WAY_W-1:0]    eway_q;
  logic [BLK_W-1:0]    blk_q;
  logic [WAY_W-1:0]    rr_q [SETS];

  logic [TAG_W-1:0]  req_tag;
  logic [IDX_W-1:0]  req_set;
  logic [WSEL_W-1:0] req_word;
  assign req_tag  = addr_q[ADDR_W-1 -: TAG_W];
  assign req_set  = addr_q[OFF_W +: IDX_W];
  assign req_word = addr_q[2 +: WSEL_W];

  logic [IDX_W-1:0] mig_set;
  logic [WAY_W-1:0] mig_way;
  assign mig_set = blk_q[BLK_W-1 -: IDX_W];
  assign mig_way = blk_q[WAY_W-1:0];

  assign active_unit = act_q;
  assign migrating   = (state == C_MIG_RD) || (state == C_MIG_WR);

  // ------------------------------------------------------------ lookup
  logic [WAYS-1:0] hit_vec;
  logic            hit;
  logic [WAY_W-1:0] hit_way;
  logic [WAY_W-1:0] victim;
  logic             any_invalid;

  always_comb begin
    hit_vec = '0;
    for (int w = 0; w < WAYS; w++)
      hit_vec[w] = s_valid[act_q][w] && (u_rtags[act_q][w] == req_tag);
    hit     = |hit_vec;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (hit_vec[w]) hit_way = WAY_W'(w);
    any_invalid = 1'b0;
    victim      = rr_q[req_set];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!s_valid[act_q][w]) begin
        any_invalid = 1'b1;
        victim      = WAY_W'(w);
      end
  end

  function automatic logic [LINE_BITS-1:0] put_word(input logic [LINE_BITS-1:0] line,
                                                    input logic [WSEL_W-1:0] sel,
                                                    input logic [WORD_W-1:0] data);
    logic [LINE_BITS-1:0] l;
    l = line;
    l[int'(sel) * WORD_W +: WORD_W] = data;
    return l;
  endfunction

  logic [LINE_BITS-1:0] hit_line;
  assign hit_line = u_rlines[act_q][hit_way];

  logic act_done, dst_done;
  assign cpu_ready   = (state == C_IDLE) && !switch_req && !s_exp_any[act_q];
  assign act_done    = u_done[act_q];
  assign dst_done    = u_done[dst_q];

  // ------------------------------------------------------------ outputs
  always_comb begin
    u_req    = '0;
    u_we     = 1'b0;
    u_set    = req_set;
    u_way    = '0;
    u_wtag   = req_tag;
    u_wline  = line_q;
    s_rd_set = req_set;
    s_upd       = '0;
    s_upd_valid = '0;
    s_upd_dirty = '0;
    s_upd_wr    = '0;
    for (int u = 0; u < UNITS; u++) begin
      s_upd_set[u] = req_set;
      s_upd_way[u] = vway_q;
    end
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = {req_tag, req_set};
    mem_wdata = line_q;
    cpu_resp  = 1'b0;
    cpu_rdata = '0;
    switch_done = 1'b0;
    expire_evt  = 1'b0;
    perf_ev     = '0;

    unique case (state)
      C_IDLE: begin
        if (switch_req && switch_unit == act_q) begin
          switch_done = 1'b1;
        end else if (switch_req) begin
          // first migration read
          u_req[act_q] = 1'b1;
          u_set        = '0;
        end else if (s_exp_any[act_q]) begin
          s_rd_set = s_exp_set[act_q];
          if (s_exp_dirty[act_q]) begin
            u_req[act_q] = 1'b1;
            u_set        = s_exp_set[act_q];
          end
        end else if (cpu_req) begin
          u_req[act_q]   = 1'b1;
          u_set          = cpu_addr[OFF_W +: IDX_W];
          perf_ev.rd_req = !cpu_we;
          perf_ev.wr_req = cpu_we;
        end
      end
      C_LOOKUP: begin
        perf_ev.hit_cyc = 1'b1;
        if (act_done) begin
          if (hit && !we_q) begin
            cpu_resp  = 1'b1;
            cpu_rdata = hit_line[int'(req_word) * WORD_W +: WORD_W];
          end else if (hit) begin
            u_req[act_q] = 1'b1;
            u_we         = 1'b1;
            u_way        = hit_way;
            u_wline      = put_word(hit_line, req_word, wdata_q);
          end else begin
            perf_ev.miss = 1'b1;
          end
        end
      end
      C_ST_WR: begin
        perf_ev.hit_cyc = 1'b1;
        if (act_done) begin
          s_upd[act_q]       = 1'b1;
          s_upd_valid[act_q] = 1'b1;
          s_upd_dirty[act_q] = 1'b1;
          s_upd_wr[act_q]    = 1'b1;
          cpu_resp           = 1'b1;
        end
      end
      C_WB: begin
        perf_ev.miss_cyc = 1'b1;
        mem_req   = 1'b1;
        mem_we    = 1'b1;
        mem_addr  = {vtag_q, req_set};
        perf_ev.wb = mem_ack;
      end
      C_REFILL: begin
        perf_ev.refill_cyc = 1'b1;
        mem_req = 1'b1;
        if (mem_ack) begin
          u_req[act_q] = 1'b1;
          u_we         = 1'b1;
          u_way        = vway_q;
          u_wline      = we_q ? put_word(mem_rdata, req_word, wdata_q) : mem_rdata;
        end
      end
      C_FILL_WR: begin
        perf_ev.refill_cyc = 1'b1;
        if (act_done) begin
          s_upd[act_q]       = 1'b1;
          s_upd_valid[act_q] = 1'b1;
          s_upd_dirty[act_q] = we_q;
          s_upd_wr[act_q]    = 1'b1;
          cpu_resp           = 1'b1;
          cpu_rdata          = line_q[int'(req_word) * WORD_W +: WORD_W];
        end
      end
      C_EXP_RD: ;
      C_EXP_WB: begin
        mem_req    = 1'b1;
        mem_we     = 1'b1;
        mem_addr   = {vtag_q, eset_q};
        perf_ev.wb = mem_ack;
      end
      C_EXP_INV: begin
        s_upd[act_q]     = 1'b1;
        s_upd_set[act_q] = eset_q;
        s_upd_way[act_q] = eway_q;
        s_upd_wr[act_q]  = 1'b1;
        expire_evt       = 1'b1;
      end
      C_MIG_RD: begin
        s_rd_set = mig_set;
        u_set    = mig_set;
        if (act_done) begin
          u_req[dst_q] = 1'b1;
          u_we         = 1'b1;
          u_way        = mig_way;
          u_wtag       = u_rtags[act_q][mig_way];
          u_wline      = u_rlines[act_q][mig_way];
        end
      end
      C_MIG_WR: begin
        s_rd_set = mig_set;
        u_set    = mig_set;
        if (dst_done) begin
          // copy status into the new unit, invalidate in the old one
          s_upd[dst_q]       = 1'b1;
          s_upd_set[dst_q]   = mig_set;
          s_upd_way[dst_q]   = mig_way;
          s_upd_valid[dst_q] = s_valid[act_q][mig_way];
          s_upd_dirty[dst_q] = s_dirty[act_q][mig_way];
          s_upd_wr[dst_q]    = 1'b1;
          s_upd[act_q]       = 1'b1;
          s_upd_set[act_q]   = mig_set;
          s_upd_way[act_q]   = mig_way;
          s_upd_wr[act_q]    = 1'b1;
          if (blk_q == BLK_W'(BLOCKS - 1)) begin
            switch_done = 1'b1;
          end else begin
            u_req[act_q] = 1'b1;               // next block's read
            u_set        = IDX_W'((int'(blk_q) + 1) / WAYS);
          end
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= C_IDLE;
      act_q   <= U_100MS;     // LARS starts on the longest retention time
      dst_q   <= U_100MS;
      we_q    <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      vway_q  <= '0;
      vtag_q  <= '0;
      eset_q  <= '0;
      eway_q  <= '0;
      blk_q   <= '0;
      line_q  <= '0;
      for (int s = 0; s < SETS; s++) rr_q[s] <= '0;
    end else begin
      unique case (state)
        C_IDLE: begin
          if (switch_req && switch_unit != act_q) begin
            dst_q <= switch_unit;
            blk_q <= '0;
            state <= C_MIG_RD;
          end else if (switch_req) begin
            state <= C_IDLE;
          end else if (s_exp_any[act_q]) begin
            eset_q <= s_exp_set[act_q];
            eway_q <= s_exp_way[act_q];
            state  <= s_exp_dirty[act_q] ? C_EXP_RD : C_EXP_INV;
          end else if (cpu_req) begin
            we_q    <= cpu_we;
            addr_q  <= cpu_addr;
            wdata_q <= cpu_wdata;
            state   <= C_LOOKUP;
          end
        end
        C_LOOKUP: if (act_done) begin
          if (hit && !we_q)  state <= C_IDLE;
          else if (hit) begin
            vway_q <= hit_way;
            state  <= C_ST_WR;
          end else begin
            vway_q <= victim;
            vtag_q <= u_rtags[act_q][victim];
            line_q <= u_rlines[act_q][victim];
            if (!any_invalid) rr_q[req_set] <= rr_q[req_set] + 1'b1;
            state  <= (s_valid[act_q][victim] && s_dirty[act_q][victim]) ? C_WB : C_REFILL;
          end
        end
        C_ST_WR:   if (act_done) state <= C_IDLE;
        C_WB:      if (mem_ack) state <= C_REFILL;
        C_REFILL:  if (mem_ack) begin
          line_q <= we_q ? put_word(mem_rdata, req_word, wdata_q) : mem_rdata;
          state  <= C_FILL_WR;
        end
        C_FILL_WR: if (act_done) state <= C_IDLE;
        C_EXP_RD:  if (act_done) begin
          vtag_q <= u_rtags[act_q][eway_q];
          line_q <= u_rlines[act_q][eway_q];
          state  <= C_EXP_WB;
        end
        C_EXP_WB:  if (mem_ack) state <= C_EXP_INV;
        C_EXP_INV: state <= C_IDLE;
        C_MIG_RD:  if (act_done) state <= C_MIG_WR;
        C_MIG_WR:  if (dst_done) begin
          if (blk_q == BLK_W'(BLOCKS - 1)) begin
            act_q <= dst_q;
            state <= C_IDLE;
          end else begin
            blk_q <= blk_q + 1'b1;
            state <= C_MIG_RD;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // The unit addressed by a request must be free.
  always_ff @(posedge clk) begin
    for (int u = 0; u < UNITS; u++)
      assert (!(rst_n && u_req[u] && u_busy[u]))
        else $error("request to busy STT-RAM unit %0d", u);
  end

endmodule
