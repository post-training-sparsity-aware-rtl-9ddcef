// vsparq_encoder -- the trimming and rounding unit for one activation pair.
//
// Takes two 8-bit unsigned activations (a0, a1) that share a 2n-bit data budget and
// produces the two lanes that drive the SPARQ multiplier (see sparq_pkg for the lane
// layout), plus the pair case found by the zero detector:
//   * both zero           -> both lanes zero;
//   * exactly one non-zero -> that activation keeps a 2n-bit window (all 8 bits when
//     n = 4); its upper n bits go to lane 0 and its lower n bits to lane 1, both lanes
//     select the same weight (MuxCtrl) and the upper lane carries n more bits of shift;
//   * both non-zero       -> each activation is trimmed to n bits by bSPARQ; lane 0
//     multiplies the first weight and lane 1 the second.
// With VSPARQ = 0 (the paper's "-vS" ablation) the zero detector does not alter the
// lanes and both activations are always trimmed to n bits.
// Combinational; in the systolic-array engine it sits on the activation buffer write
// path, in the sparse tensor core it sits in front of the dot-product unit.
//
// Follows the paper: the three cases of vSPARQ, the 2n-bit budget of a lone value,
// the ShiftCtrl/MuxCtrl metadata per n-bit lane. Design choices: which half of a lone
// value goes to which lane, lane contents for an all-zero pair, and that the lone
// value's 2n-bit window uses the same placement spacing as the n-bit windows.
module vsparq_encoder
  import sparq_pkg::*;
#(
  parameter int unsigned N      = 4,     // data bits per lane
  parameter int unsigned NOPT   = 5,     // window placement options
  parameter bit          ROUND  = 1'b1,  // round by residual LSBs
  parameter bit          VSPARQ = 1'b1,  // exploit zero-valued activations
  localparam int unsigned SB    = sc_bits(NOPT),
  localparam int unsigned LW    = lane_bits(N, NOPT)
) (
  input  logic [7:0]    a0,
  input  logic [7:0]    a1,
  output logic [LW-1:0] lane0,
  output logic [LW-1:0] lane1,
  output pair_case_e    pcase
);

  localparam int unsigned STEP = opt_step(N, NOPT);

  typedef struct packed {
    logic          mux;
    logic [SB-1:0] sc;
    logic [N-1:0]  data;
  } lane_t;

  logic [N-1:0]   t0_win, t1_win;
  logic [2:0]     t0_sh, t1_sh, lone_sh;
  logic [2*N-1:0] lone_win;
  logic [7:0]     lone_in;
  lane_t          l0, l1;

  bsparq_trim #(.WIN(N), .STEP(STEP), .ROUND(ROUND)) u_trim0 (.x(a0), .win(t0_win), .shamt(t0_sh));
  bsparq_trim #(.WIN(N), .STEP(STEP), .ROUND(ROUND)) u_trim1 (.x(a1), .win(t1_win), .shamt(t1_sh));

  assign lone_in = (a0 != 8'd0) ? a0 : a1;
  bsparq_trim #(.WIN(2*N), .STEP(STEP), .ROUND(ROUND)) u_lone (.x(lone_in), .win(lone_win), .shamt(lone_sh));

  always_comb begin
    unique case ({a1 != 8'd0, a0 != 8'd0})
      2'b00:   pcase = PAIR_ZERO;
      2'b01:   pcase = PAIR_LONE0;
      2'b10:   pcase = PAIR_LONE1;
      default: pcase = PAIR_BOTH;
    endcase

    if (VSPARQ && (pcase == PAIR_LONE0 || pcase == PAIR_LONE1)) begin
      l0.data = lone_win[2*N-1:N];
      l0.sc   = SB'((32'(lone_sh) + N) / STEP);
      l0.mux  = (pcase == PAIR_LONE1);
      l1.data = lone_win[N-1:0];
      l1.sc   = SB'(32'(lone_sh) / STEP);
      l1.mux  = (pcase == PAIR_LONE1);
    end else begin
      l0.data = t0_win;
      l0.sc   = SB'(32'(t0_sh) / STEP);
      l0.mux  = 1'b0;
      l1.data = t1_win;
      l1.sc   = SB'(32'(t1_sh) / STEP);
      l1.mux  = 1'b1;
    end
  end

  assign lane0 = l0;
  assign lane1 = l1;

  // Supported configurations: the lone value's halves must land on placements.
  initial begin
    assert ((ACT_W - N) % (NOPT - 1) == 0 && N % STEP == 0)
      else $error("vsparq_encoder: unsupported N=%0d NOPT=%0d", N, NOPT);
  end

endmodule
