// weight_buffer -- weight buffer of the SPARQ systolic-array engine.
//
// Holds, for each of the ROWS array rows, DEPTH weight pairs {w_second, w_first}
// (two signed 8-bit weights: SPARQ doubles the weight bandwidth, since each PE may
// multiply both weights of a pair in one cycle). Write port: one pair per cycle into
// row wr_row at address wr_addr. Read port: when rd_en is high the pair at rd_addr is
// read from every row at once, registered (one cycle read latency), and row r is then
// delayed by r further cycles to skew the array's left edge. When rd_en is low zeros
// are fed.
// Timing: rd_en/rd_addr sampled at edge t -> w_left[r] shows the pair after edge t+r.
//
// The paper names a weight buffer left of the array and states that SPARQ doubles
// the weight bandwidth; the organisation (one bank per row, depth, read latency,
// skew registers, zero fill) is this design's own.
module weight_buffer
  import sparq_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned WW   = 2 * WGT_W,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [AW-1:0] wr_addr,
  input  logic [WW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [WW-1:0] w_left [ROWS]
);

  logic [WW-1:0] mem [ROWS][DEPTH];
  logic [WW-1:0] rd_q [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_addr] <= wr_data;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     rd_q[r] <= '0;
      else if (rd_en) rd_q[r] <= mem[r][rd_addr];
      else            rd_q[r] <= '0;
    end

    if (r == 0) begin : g_noskew
      assign w_left[r] = rd_q[r];
    end else begin : g_skew
      logic [WW-1:0] sk [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) sk[i] <= '0;
        end else begin
          sk[0] <= rd_q[r];
          for (int i = 1; i < r; i++) sk[i] <= sk[i-1];
        end
      end
      assign w_left[r] = sk[r-1];
    end
  end

endmodule
