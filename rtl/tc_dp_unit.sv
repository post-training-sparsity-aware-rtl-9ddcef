// tc_dp_unit -- tensor-core dot-product unit with SPARQ multipliers.
//
// Four SPARQ multipliers each take one encoded activation pair (two lanes) and the
// matching pair of signed 8-bit weights, so the unit covers eight activation-weight
// products per evaluation. The four 17-bit results are summed by a two-level adder
// tree (17 -> 18 -> 19 bits) and added to the 32-bit third operand c_in:
// d = c_in + sum. Combinational.
//
// Follows the paper's dot-product-unit figure (four multipliers, adder tree, 32-bit
// accumulate input and output) with the multipliers replaced by SPARQ ones and the
// weight bandwidth doubled, as the paper prescribes. The adder-tree widths grow one
// bit per level from the 17-bit multiplier output, as the figure's 16/17/18 do from
// a 16-bit one.
module tc_dp_unit
  import sparq_pkg::*;
#(
  parameter int unsigned N    = 4,
  parameter int unsigned NOPT = 5,
  localparam int unsigned LW  = lane_bits(N, NOPT),
  localparam int unsigned PW  = 2 * LW,
  localparam int unsigned NM  = 4   // multipliers per dot-product unit
) (
  input  logic [PW-1:0]            a    [NM],    // encoded pairs {lane1, lane0}
  input  logic signed [WGT_W-1:0]  w    [2*NM],  // w[2k], w[2k+1] belong to pair k
  input  logic signed [PSUM_W-1:0] c_in,
  output logic signed [PSUM_W-1:0] d
);

  localparam int unsigned SB = sc_bits(NOPT);

  typedef struct packed {
    logic          mux;
    logic [SB-1:0] sc;
    logic [N-1:0]  data;
  } lane_t;

  logic signed [MULT_W-1:0]   p  [NM];
  logic signed [MULT_W:0]     s1 [NM/2];
  logic signed [MULT_W+1:0]   s2;

  for (genvar k = 0; k < NM; k++) begin : g_mult
    lane_t l0, l1;
    assign l0 = a[k][LW-1:0];
    assign l1 = a[k][PW-1:LW];
    sparq_mult #(.N(N), .NOPT(NOPT)) u_mult (
      .x1(l0.data), .x2(l1.data),
      .w1(w[2*k]), .w2(w[2*k+1]),
      .mux1(l0.mux), .mux2(l1.mux),
      .sc1(l0.sc), .sc2(l1.sc),
      .p(p[k])
    );
  end

  for (genvar k = 0; k < NM/2; k++) begin : g_tree1
    assign s1[k] = (MULT_W+1)'(p[2*k]) + (MULT_W+1)'(p[2*k+1]);
  end

  assign s2 = (MULT_W+2)'(s1[0]) + (MULT_W+2)'(s1[1]);
  assign d  = c_in + PSUM_W'(s2);

endmodule
