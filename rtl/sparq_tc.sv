// sparq_tc -- SPARQ on a dense tensor core: D = A x B + C with 4 x 4 result tiles.
//
// A tensor core multiplies two small matrices and adds a third. Here the result tile
// is 4 x 4 and every result element has its own dot-product unit (tc_dp_unit, four
// SPARQ multipliers). Because each SPARQ multiplier takes an activation pair and two
// weights, one evaluation covers a reduction of 8: A is 4 x 8 unsigned 8-bit
// activations, B is 8 x 4 signed 8-bit weights, C and D are 4 x 4 32-bit values.
// Each row of A is split into four neighbouring pairs and encoded once
// (vsparq_encoder: zero detection, then trimming and rounding); the encoded row is
// shared by the four dot-product units of that result row, so the encoders run at a
// quarter of the multipliers' rate.
// Timing: one register stage; D and out_valid are updated at the edge that samples
// in_valid, and D holds its value while in_valid is low. pcase[i][k] reports the
// pair case of pair k of row i for the same edge.
//
// Follows the paper: four multipliers per dot-product unit with an adder tree and a
// 32-bit third operand, the multipliers replaced by SPARQ ones and the weight
// bandwidth doubled. Design choices: the 4 x 4 tile built from sixteen dot-product
// units, the output register, and encoding A at the input, shared across a row.
module sparq_tc
  import sparq_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned NOPT   = 5,
  parameter bit          ROUND  = 1'b1,
  parameter bit          VSPARQ = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [ACT_W-1:0]         a     [4][8],
  input  logic signed [WGT_W-1:0]  b     [8][4],
  input  logic signed [PSUM_W-1:0] c     [4][4],
  output logic signed [PSUM_W-1:0] d     [4][4],
  output logic                     out_valid,
  output pair_case_e               pcase [4][4]
);

  localparam int unsigned LW = lane_bits(N, NOPT);
  localparam int unsigned PW = 2 * LW;

  logic [PW-1:0]            pairs [4][4];
  logic signed [PSUM_W-1:0] dn    [4][4];
  pair_case_e               pc    [4][4];

  for (genvar i = 0; i < 4; i++) begin : g_row
    for (genvar k = 0; k < 4; k++) begin : g_enc
      logic [LW-1:0] l0, l1;
      vsparq_encoder #(.N(N), .NOPT(NOPT), .ROUND(ROUND), .VSPARQ(VSPARQ)) u_enc (
        .a0(a[i][2*k]), .a1(a[i][2*k+1]), .lane0(l0), .lane1(l1), .pcase(pc[i][k])
      );
      assign pairs[i][k] = {l1, l0};
    end
    for (genvar j = 0; j < 4; j++) begin : g_col
      logic signed [WGT_W-1:0] wcol [8];
      for (genvar r = 0; r < 8; r++) begin : g_w
        assign wcol[r] = b[r][j];
      end
      tc_dp_unit #(.N(N), .NOPT(NOPT)) u_dp (
        .a(pairs[i]), .w(wcol), .c_in(c[i][j]), .d(dn[i][j])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < 4; i++) begin
        for (int j = 0; j < 4; j++) begin
          d[i][j]     <= '0;
          pcase[i][j] <= PAIR_ZERO;
        end
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        d     <= dn;
        pcase <= pc;
      end
    end
  end

endmodule
