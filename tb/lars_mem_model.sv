// lars_mem_model: behavioural main memory for the testbenches.
//
// Holds 512-bit lines in a sparse table; a line never written reads as a
// pattern derived from its line address (word k = {line address, k}). A
// request is acknowledged after a random delay of 1..MAX_LAT cycles; on a read
// the line is presented on rdata in the ack cycle.
module lars_mem_model #(
  parameter int unsigned AW      = 26,
  parameter int unsigned MAX_LAT = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [511:0]  wdata,
  output logic          ack,
  output logic [511:0]  rdata,
  output int unsigned   n_reads,
  output int unsigned   n_writes
);
  logic [511:0] lines [logic [AW-1:0]];
  int unsigned wait_cnt;
  logic busy;

  function automatic logic [511:0] initial_line(input logic [AW-1:0] a);
    logic [511:0] l;
    for (int k = 0; k < 16; k++) l[k*32 +: 32] = {2'b0, a, 4'(k)};
    return l;
  endfunction

  function automatic logic [511:0] peek(input logic [AW-1:0] a);
    return lines.exists(a) ? lines[a] : initial_line(a);
  endfunction

  always_comb begin
    ack   = busy && wait_cnt == 0 && req;
    rdata = peek(addr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      wait_cnt <= 0;
      n_reads  <= 0;
      n_writes <= 0;
    end else if (!busy) begin
      if (req) begin
        busy     <= 1'b1;
        wait_cnt <= $urandom % MAX_LAT;
      end
    end else if (wait_cnt != 0) begin
      wait_cnt <= wait_cnt - 1;
    end else if (req) begin
      busy <= 1'b0;
      if (we) begin
        n_writes <= n_writes + 1;
      end else begin
        n_reads <= n_reads + 1;
      end
    end
  end
  // The sparse table is written with a blocking assignment (a dynamic array
  // cannot take a nonblocking one); reads of it are combinational.
  always @(posedge clk)
    if (rst_n && busy && wait_cnt == 0 && req && we) lines[addr] = wdata;
endmodule
