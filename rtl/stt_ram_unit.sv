// stt_ram_unit: tag memory and data memory of one STT-RAM retention unit.
//
// LARS builds its L1 data cache from several STT-RAM units that differ only in
// retention time; each is a complete 32KB, 4-way, 64-byte-line tag and data
// store. This module is one such unit, written as two ordinary arrays. A read
// returns the tags and lines of all ways of one set, so tag compare and data
// select can happen together; a write stores one tag and one whole line.
// The unit's access latency is counted out before `done`: RD_LAT_P cycles for
// a read (the paper's 2-cycle hit latency) and WR_LAT_P cycles for a write
// (3, 4, 5 and 7 cycles for the 100us, 1ms, 10ms and 100ms units).
// The loss of data after the retention time is not modelled: the monitor
// counters of the status array remove every block before that happens.
//
// Handshake: `req` is taken at a clock edge where `busy` is low. An access
// occupies the unit for exactly RD_LAT_P or WR_LAT_P cycles: `done` is high in
// the last of them, and `busy` is already low then, so the next access can be
// accepted at the edge that ends it (back-to-back accesses cost RD + WR
// cycles, no bubble). Read data on rtags/rlines is valid while `done` is high.
// A write takes effect at the edge that ends its `done` cycle.
module stt_ram_unit #(
  parameter int unsigned SETS_P   = lars_pkg::SETS,
  parameter int unsigned WAYS_P   = lars_pkg::WAYS,
  parameter int unsigned TAG_BITS = lars_pkg::TAG_W,
  parameter int unsigned LINE_W   = lars_pkg::LINE_BITS,
  parameter int unsigned RD_LAT_P = lars_pkg::RD_LAT,
  parameter int unsigned WR_LAT_P = 7,
  localparam int unsigned IW = $clog2(SETS_P),
  localparam int unsigned WW = $clog2(WAYS_P),
  localparam int unsigned CW = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req,
  input  logic                we,
  input  logic [IW-1:0]       set,
  input  logic [WW-1:0]       way,
  input  logic [TAG_BITS-1:0] wtag,
  input  logic [LINE_W-1:0]   wline,
  output logic                busy,
  output logic                done,
  output logic [TAG_BITS-1:0] rtags  [WAYS_P],
  output logic [LINE_W-1:0]   rlines [WAYS_P]
);

  logic [TAG_BITS-1:0] tag_mem  [SETS_P*WAYS_P];
  logic [LINE_W-1:0]   data_mem [SETS_P*WAYS_P];

  logic                we_q;
  logic [IW-1:0]       set_q;
  logic [WW-1:0]       way_q;
  logic [TAG_BITS-1:0] wtag_q;
  logic [LINE_W-1:0]   wline_q;
  logic [CW-1:0]       cnt;

  logic busy_q, accept;
  assign done   = busy_q && (cnt == '0);
  assign busy   = busy_q && (cnt != '0);
  assign accept = req && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cnt    <= '0;
      we_q   <= 1'b0;
      set_q  <= '0;
      way_q  <= '0;
    end else if (accept) begin
      busy_q <= 1'b1;
      we_q   <= we;
      set_q  <= set;
      way_q  <= way;
      cnt    <= we ? CW'(WR_LAT_P - 1) : CW'(RD_LAT_P - 1);
    end else if (done) begin
      busy_q <= 1'b0;
    end else if (busy_q) begin
      cnt <= cnt - 1'b1;
    end
  end

  // Write data registers (no reset needed: only used after being loaded).
  always_ff @(posedge clk) begin
    if (accept) begin
      wtag_q  <= wtag;
      wline_q <= wline;
    end
  end

  // Array write at the edge that ends the write's last cycle.
  always_ff @(posedge clk) begin
    if (done && we_q) begin
      tag_mem [int'(set_q) * WAYS_P + int'(way_q)] <= wtag_q;
      data_mem[int'(set_q) * WAYS_P + int'(way_q)] <= wline_q;
    end
  end

  always_comb begin
    for (int w = 0; w < WAYS_P; w++) begin
      rtags[w]  = tag_mem [int'(set_q) * WAYS_P + w];
      rlines[w] = data_mem[int'(set_q) * WAYS_P + w];
    end
  end

endmodule
