// edp_datapath: energy model of the LARS-Optimal tuner.
//
// A multiply-accumulate unit computes the cache energy of one tuning interval
// and its energy-delay product (EDP). Two operand multiplexers feed a single
// multiplier; the product goes to an intermediate register and is then added
// into the Current EDP register. The operand pairs and their order follow the
// paper's datapath figure:
//   1 ReadEnergyPerAccess  x ReadRequests
//   2 ReadEnergyPerAccess  x Writebacks
//   3 WriteEnergyPerAccess x WriteRequests
//   4 WriteEnergyPerAccess x CacheMissCount
//   5 Leakage (per cycle)  x (CacheMissLatency + CacheHitLatency + CacheRefillLatency)
// The figure stops at the energy sum. To obtain the EDP the paper names, this
// design adds a sixth step that multiplies the accumulated energy by the same
// total latency. Energies are in femtojoules; leakage is 1.753 mW expressed
// as 877 fJ per 0.5 ns cycle. The per-access energies are those of the unit
// given on `unit`.
//
// Timing: `start` for one cycle; the multiplier runs steps 1..5 on the next
// five cycles, the last sum and the EDP product follow, and `done` pulses
// 8 cycles after start with `energy` and `cur_edp` valid until the next start.
module edp_datapath
  import lars_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [UNIT_W-1:0]   unit,
  input  perf_stats_t         stats,
  output logic                busy,
  output logic                done,
  output logic [ENERGY_W-1:0] energy,
  output logic [EDP_W-1:0]    cur_edp
);

  logic [2:0]          step;        // 1..5 multiply, 6 last add, 7 EDP
  logic [ENERGY_W-1:0] inter;       // intermediate register
  logic [ENERGY_W-1:0] mux_a;       // left multiplexer
  logic [LAT_W-1:0]    mux_b;       // right multiplexer
  logic [LAT_W-1:0]    lat_total;

  assign lat_total = LAT_W'(stats.miss_latency) + LAT_W'(stats.hit_latency)
                   + LAT_W'(stats.refill_latency);

  always_comb begin
    mux_a = '0;
    mux_b = '0;
    unique case (step)
      3'd1: begin mux_a = ENERGY_W'(rd_energy(unit)); mux_b = LAT_W'(stats.read_requests);  end
      3'd2: begin mux_a = ENERGY_W'(rd_energy(unit)); mux_b = LAT_W'(stats.writebacks);     end
      3'd3: begin mux_a = ENERGY_W'(wr_energy(unit)); mux_b = LAT_W'(stats.write_requests); end
      3'd4: begin mux_a = ENERGY_W'(wr_energy(unit)); mux_b = LAT_W'(stats.miss_count);     end
      3'd5: begin mux_a = ENERGY_W'(LEAK_E);          mux_b = lat_total;                    end
      3'd7: begin mux_a = energy;                     mux_b = lat_total;                    end
      default: ;
    endcase
  end

  logic [EDP_W-1:0] product;
  assign product = EDP_W'(mux_a) * EDP_W'(mux_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step    <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      inter   <= '0;
      energy  <= '0;
      cur_edp <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          step   <= 3'd1;
          energy <= '0;
        end
      end else begin
        if (step >= 3'd2 && step <= 3'd6)
          energy <= energy + inter;
        if (step <= 3'd5)
          inter <= ENERGY_W'(product);
        if (step == 3'd7) begin
          cur_edp <= product;
          busy    <= 1'b0;
          done    <= 1'b1;
          step    <= '0;
        end else begin
          step <= step + 1'b1;
        end
      end
    end
  end

endmodule
