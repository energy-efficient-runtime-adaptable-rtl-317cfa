// lars_pkg: types and constants shared by the LARS (logically adaptable
// retention time) STT-RAM L1 data cache.
//
// The cache geometry (32KB, 64-byte lines, 4-way), the four retention units
// (100us, 1ms, 10ms, 100ms) and their per-access energies and latencies follow
// the paper's cache parameter table. The 32-bit address split, the counter
// widths and the femtojoule fixed-point scaling of the energies are choices of
// this implementation.
package lars_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned ADDR_W    = 32;            // physical address (assumed)
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS = LINE_BYTES * 8; // 512
  localparam int unsigned WAYS      = 4;
  localparam int unsigned SETS      = 128;           // 32KB / 64B / 4
  localparam int unsigned OFF_W     = $clog2(LINE_BYTES);   // 6
  localparam int unsigned IDX_W     = $clog2(SETS);         // 7
  localparam int unsigned TAG_W     = ADDR_W - OFF_W - IDX_W; // 19
  localparam int unsigned WAY_W     = $clog2(WAYS);         // 2
  localparam int unsigned WORD_W    = 32;
  localparam int unsigned WORDS     = LINE_BITS / WORD_W;   // 16

  // ------------------------------------------------------- retention units
  localparam int unsigned UNITS  = 4;
  localparam int unsigned UNIT_W = 2;   // the 2-bit location array entry

  // Unit index 0..3 in ascending retention time.
  typedef enum logic [UNIT_W-1:0] {
    U_100US = 2'd0,
    U_1MS   = 2'd1,
    U_10MS  = 2'd2,
    U_100MS = 2'd3
  } unit_e;

  // Monitor counter: N states per retention time (paper: N = 10, n = 4).
  localparam int unsigned MON_N = 10;

  // Cache clock 2 GHz: monitor clock period = retention / N, in cycles.
  localparam int unsigned TICK_100US = 20_000;       // 10 us
  localparam int unsigned TICK_1MS   = 200_000;      // 100 us
  localparam int unsigned TICK_10MS  = 2_000_000;    // 1 ms
  localparam int unsigned TICK_100MS = 20_000_000;   // 10 ms

  // Array latencies in cycles (paper's table: hit 2, write 3/4/5/7).
  localparam int unsigned RD_LAT = 2;
  function automatic int unsigned wr_lat(input int unsigned u);
    case (u)
      0: return 3;
      1: return 4;
      2: return 5;
      default: return 7;
    endcase
  endfunction

  // ------------------------------------------------------- energy model
  // Energies in femtojoules. Leakage 1.753 mW at 0.5 ns per cycle = 876.5 fJ,
  // rounded to 877 fJ per cycle.
  localparam int unsigned E_W = 20;
  function automatic logic [E_W-1:0] rd_energy(input logic [UNIT_W-1:0] u);
    case (u)
      2'd0, 2'd1: return E_W'(12_000);
      default:    return E_W'(11_000);
    endcase
  endfunction
  function automatic logic [E_W-1:0] wr_energy(input logic [UNIT_W-1:0] u);
    case (u)
      2'd0:    return E_W'(40_000);
      2'd1:    return E_W'(56_000);
      2'd2:    return E_W'(76_000);
      default: return E_W'(101_000);
    endcase
  endfunction
  localparam logic [E_W-1:0] LEAK_E = E_W'(877);

  // ------------------------------------------------------- statistics
  localparam int unsigned CNT_W    = 32;
  localparam int unsigned LAT_W    = CNT_W + 2;          // sum of three latencies
  localparam int unsigned ENERGY_W = 64;
  localparam int unsigned EDP_W    = ENERGY_W + LAT_W;   // 98
  localparam int unsigned METRIC_W = EDP_W;

  // One-cycle event pulses from the cache controller.
  typedef struct packed {
    logic rd_req;    // a load was accepted
    logic wr_req;    // a store was accepted
    logic miss;      // a lookup missed
    logic wb;        // a dirty line was written back
    logic hit_cyc;   // this cycle counts as hit latency
    logic miss_cyc;  // this cycle counts as miss latency (victim write-back)
    logic refill_cyc;// this cycle counts as refill latency
  } perf_ev_t;

  typedef struct packed {
    logic [CNT_W-1:0] read_requests;
    logic [CNT_W-1:0] writebacks;
    logic [CNT_W-1:0] write_requests;
    logic [CNT_W-1:0] miss_count;
    logic [CNT_W-1:0] miss_latency;
    logic [CNT_W-1:0] hit_latency;
    logic [CNT_W-1:0] refill_latency;
  } perf_stats_t;

  // Tuning algorithms.
  typedef enum logic [1:0] {
    ALG_SAMPLING = 2'd0,
    ALG_OPTIMAL  = 2'd1,
    ALG_MISS     = 2'd2,
    ALG_MISS_LB  = 2'd3
  } algo_e;

endpackage
