// sparq_pe -- output-stationary systolic-array processing element with the SPARQ
// multiplier.
//
// Each cycle the PE multiplies the encoded activation pair arriving from above by the
// weight pair arriving from the left (one sparq_mult, i.e. two MACs' worth of work),
// adds the 17-bit result to its 32-bit partial sum, and forwards both operands to its
// downstream neighbours through one register each (activation down, weights right).
// The partial sum stays in the PE and is read on `psum`. For readout the partial sums
// of a column form a shift chain: with `shift` high the PE loads psum_in (the partial
// sum of the PE above) instead of accumulating, so a column drains out of its bottom
// PE one row per cycle.
// Timing: operands on a_in/w_in are added into psum at the next clock edge and appear
// on a_out/w_out at that edge. `clr` (synchronous) drops the old partial sum in the
// same edge, so psum <= product when clr is high; `shift` has priority over both.
// rst_n (asynchronous, active low)
// zeroes all registers.
//
// Follows the paper's PE figure (operand registers, 32-bit partial sum) with the
// conventional multiplier replaced by the SPARQ one and the weight input doubled to a
// pair. The partial-sum line leaving the PE downwards in that figure is built as the
// drain chain; the clear input, the shift control and the reset are this design's
// choices.
module sparq_pe
  import sparq_pkg::*;
#(
  parameter int unsigned N    = 4,
  parameter int unsigned NOPT = 5,
  localparam int unsigned LW  = lane_bits(N, NOPT),
  localparam int unsigned PW  = 2 * LW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     shift,
  input  logic signed [PSUM_W-1:0] psum_in,  // partial sum of the PE above
  input  logic [PW-1:0]            a_in,   // {lane1, lane0}
  input  logic [2*WGT_W-1:0]       w_in,   // {w_second, w_first}
  output logic [PW-1:0]            a_out,
  output logic [2*WGT_W-1:0]       w_out,
  output logic signed [PSUM_W-1:0] psum
);

  localparam int unsigned SB = sc_bits(NOPT);

  typedef struct packed {
    logic          mux;
    logic [SB-1:0] sc;
    logic [N-1:0]  data;
  } lane_t;

  lane_t l0, l1;
  logic signed [MULT_W-1:0] prod;

  assign l0 = a_in[LW-1:0];
  assign l1 = a_in[PW-1:LW];

  sparq_mult #(.N(N), .NOPT(NOPT)) u_mult (
    .x1(l0.data), .x2(l1.data),
    .w1(w_in[WGT_W-1:0]), .w2(w_in[2*WGT_W-1:WGT_W]),
    .mux1(l0.mux), .mux2(l1.mux),
    .sc1(l0.sc), .sc2(l1.sc),
    .p(prod)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      w_out <= '0;
      psum  <= '0;
    end else begin
      a_out <= a_in;
      w_out <= w_in;
      psum  <= shift ? psum_in : (clr ? '0 : psum) + PSUM_W'(prod);
    end
  end

endmodule
