// act_buffer -- activation buffer of the SPARQ systolic-array engine.
//
// Holds, for each of the COLS array columns, DEPTH encoded activation pairs (two
// lanes of data + ShiftCtrl + MuxCtrl each, as produced by vsparq_encoder), i.e. the
// activations are stored together with their SPARQ metadata. Write port: one pair
// per cycle into column wr_col at address wr_addr. Read port: when rd_en is high the
// pair at rd_addr is read from every column at once; the word is registered (one
// cycle read latency) and column c is then delayed by c further cycles, so the array
// top edge receives the skewed wavefront a systolic array needs. When rd_en is low
// zeros are fed, which contribute nothing to the partial sums.
// Timing: rd_en/rd_addr sampled at edge t -> a_top[c] shows the word after edge t+c.
//
// The paper names an activation buffer above the array and says SPARQ metadata
// accompanies every stored activation; the organisation (one bank per column, depth,
// read latency, skew registers, zero fill) is this design's own.
module act_buffer
  import sparq_pkg::*;
#(
  parameter int unsigned COLS  = 16,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned PW    = 16,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [CW-1:0] wr_col,
  input  logic [AW-1:0] wr_addr,
  input  logic [PW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [PW-1:0] a_top [COLS]
);

  logic [PW-1:0] mem [COLS][DEPTH];
  logic [PW-1:0] rd_q [COLS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_col][wr_addr] <= wr_data;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     rd_q[c] <= '0;
      else if (rd_en) rd_q[c] <= mem[c][rd_addr];
      else            rd_q[c] <= '0;
    end

    if (c == 0) begin : g_noskew
      assign a_top[c] = rd_q[c];
    end else begin : g_skew
      logic [PW-1:0] sk [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) sk[i] <= '0;
        end else begin
          sk[0] <= rd_q[c];
          for (int i = 1; i < c; i++) sk[i] <= sk[i-1];
        end
      end
      assign a_top[c] = sk[c-1];
    end
  end

endmodule
