// sparq_mult -- the SPARQ flexible multiplier.
//
// Computes 2^sh1 * x1 * wsel1 + 2^sh2 * x2 * wsel2, where x1, x2 are n-bit unsigned
// lane values, wsel1/wsel2 are each chosen by a MuxCtrl bit from the pair's two signed
// 8-bit weights w1, w2, and sh = ShiftCtrl * STEP. With both muxes on the same weight
// and shifts n and 0 it performs one full 8b-8b product; with the muxes on different
// weights it performs two independent 4b-8b products. Structure: two weight muxes,
// two n-bit x 8-bit signed multipliers, two shift-left units to 16 bits, one adder to
// a 17-bit signed result. Combinational.
//
// Follows the paper's multiplier figure (widths 4, 8, 16 and 17 are printed there)
// and its equation for two independent shifted 4b-8b products. Design choice: the
// ShiftCtrl code is the index of an evenly spaced placement (see sparq_pkg), so 3opt
// needs a 2-bit and 5opt a 3-bit code, matching the metadata sizes the paper states.
module sparq_mult
  import sparq_pkg::*;
#(
  parameter int unsigned N    = 4,
  parameter int unsigned NOPT = 5,
  localparam int unsigned SB  = sc_bits(NOPT)
) (
  input  logic [N-1:0]        x1,
  input  logic [N-1:0]        x2,
  input  logic signed [7:0]   w1,
  input  logic signed [7:0]   w2,
  input  logic                mux1,  // 0: w1, 1: w2
  input  logic                mux2,  // 0: w1, 1: w2
  input  logic [SB-1:0]       sc1,
  input  logic [SB-1:0]       sc2,
  output logic signed [MULT_W-1:0] p
);

  localparam int unsigned STEP = opt_step(N, NOPT);

  logic signed [7:0]        ws1, ws2;
  logic signed [N+8:0]      m1, m2;     // n-bit unsigned x 8-bit signed
  logic signed [PROD_W-1:0] s1, s2;

  assign ws1 = mux1 ? w2 : w1;
  assign ws2 = mux2 ? w2 : w1;

  assign m1 = $signed({1'b0, x1}) * ws1;
  assign m2 = $signed({1'b0, x2}) * ws2;

  assign s1 = PROD_W'(m1) <<< (32'(sc1) * STEP);
  assign s2 = PROD_W'(m2) <<< (32'(sc2) * STEP);

  assign p = MULT_W'(s1) + MULT_W'(s2);

endmodule
