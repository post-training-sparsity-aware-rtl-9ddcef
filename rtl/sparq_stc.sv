// sparq_stc -- SPARQ on a sparse tensor core dot-product path.
//
// Per cycle with in_valid high: sixteen 8-bit activations, the eight non-zero weights
// of a 2:4-pruned weight vector and their coordinates enter. The selector keeps the
// eight activations that meet stored weights; these form four activation pairs, each
// passed through its own trimming and rounding unit (vsparq_encoder: vSPARQ zero
// detection, then bSPARQ), and the SPARQ dot-product unit adds the eight products to
// the accumulator. acc_clr with in_valid starts a new dot product (the accumulator is
// replaced instead of added to).
// Timing: one register stage; acc and out_valid are updated at the edge that samples
// in_valid. pcase reports, for the same edge, what each pair's zero detector found.
//
// Follows the paper: selection by the non-zero-weight coordinates, vSPARQ on the
// selected pairs, trimming and rounding replicated per dot-product unit, SPARQ
// multipliers in the dot-product unit. Design choices: the unit width (16
// activations, 8 weights, i.e. the conventional figure's width doubled with the
// weight bandwidth), the pairing of neighbouring selected activations, and the
// accumulator register with its clear.
module sparq_stc
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
  input  logic                     acc_clr,
  input  logic [7:0]               act  [16],
  input  logic signed [WGT_W-1:0]  wgt  [8],
  input  logic [1:0]               idx  [4][2],
  output logic signed [PSUM_W-1:0] acc,
  output logic                     out_valid,
  output pair_case_e               pcase [4]
);

  localparam int unsigned LW = lane_bits(N, NOPT);
  localparam int unsigned PW = 2 * LW;

  logic [7:0]               sel   [8];
  logic [PW-1:0]            pairs [4];
  logic signed [PSUM_W-1:0] c_in, d;
  pair_case_e               pc    [4];

  stc_selector #(.GROUPS(4)) u_sel (.act(act), .idx(idx), .sel(sel));

  for (genvar k = 0; k < 4; k++) begin : g_enc
    logic [LW-1:0] l0, l1;
    vsparq_encoder #(.N(N), .NOPT(NOPT), .ROUND(ROUND), .VSPARQ(VSPARQ)) u_enc (
      .a0(sel[2*k]), .a1(sel[2*k+1]), .lane0(l0), .lane1(l1), .pcase(pc[k])
    );
    assign pairs[k] = {l1, l0};
  end

  assign c_in = acc_clr ? '0 : acc;

  tc_dp_unit #(.N(N), .NOPT(NOPT)) u_dp (.a(pairs), .w(wgt), .c_in(c_in), .d(d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      for (int k = 0; k < 4; k++) pcase[k] <= PAIR_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc <= d;
        for (int k = 0; k < 4; k++) pcase[k] <= pc[k];
      end
    end
  end

endmodule
