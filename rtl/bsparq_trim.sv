// bsparq_trim -- bSPARQ window selection and rounding for one 8-bit activation.
//
// The unit keeps WIN consecutive bits of the unsigned 8-bit input x. The window may
// sit at bit offsets 0, STEP, 2*STEP, ... up to 8-WIN; the lowest offset whose window
// still holds the leading one is chosen (leading zero bits are skipped). The window
// value is then rounded half-up using the first discarded bit below it; a carry out
// of the window saturates the window to all ones, so the placement never changes
// after it is chosen. Output: the window bits `win` and the offset `shamt` in bits,
// so that x is approximated by win << shamt. Purely combinational, no clock.
//
// Follows the paper: the leading-one search, the placement sets of the 5opt, 3opt
// and 2opt configurations and rounding by the residual LSBs. Design choices: the
// rounding rule (half-up on the first residual bit) and saturation on carry-out.
// With WIN = 8 there is a single placement and the value passes exactly; the pair
// encoder uses such a wide window for an activation whose partner is zero.
module bsparq_trim #(
  parameter int unsigned WIN   = 4,  // window width in bits
  parameter int unsigned STEP  = 1,  // spacing of window placements in bits
  parameter bit          ROUND = 1'b1
) (
  input  logic [7:0]     x,
  output logic [WIN-1:0] win,
  output logic [2:0]     shamt
);

  localparam int unsigned NPL = (8 - WIN) / STEP + 1;  // number of placements

  logic [8:0] limit;
  logic [WIN-1:0] shifted;
  logic [WIN:0] rounded;
  logic       rbit;
  int unsigned sel;

  assign limit = 9'(1) << WIN;

  always_comb begin
    // smallest placement whose window contains every set bit of x
    sel = NPL - 1;
    for (int i = NPL - 1; i >= 0; i--) begin
      if ({1'b0, x >> (i * STEP)} < limit) sel = i;
    end
    shamt   = 3'(sel * STEP);
    shifted = WIN'(x >> shamt);
    rbit    = (shamt != 3'd0) ? x[shamt - 3'd1] : 1'b0;
    rounded = {1'b0, shifted} + ((ROUND && rbit) ? (WIN+1)'(1) : '0);
    win     = rounded[WIN] ? '1 : rounded[WIN-1:0];
  end

endmodule
