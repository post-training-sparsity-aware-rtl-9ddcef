// sparq_systolic_array -- ROWS x COLS output-stationary grid of SPARQ PEs.
//
// Column c receives a stream of encoded activation pairs on a_top[c] that flows
// downwards; row r receives a stream of weight pairs on w_left[r] that flows to the
// right. PE (r,c) accumulates the dot product of its row's weight stream and its
// column's activation stream, so after a tile the grid holds a ROWS x COLS block of
// the result matrix on psum[r][c]. With `shift` high every PE takes the partial sum of
// the PE above (row 0 takes zero), so the tile drains out of the bottom row on
// psum_bottom[c], row ROWS-1 first, one row per cycle. The feeder is expected to skew the edges (row r
// and column c delayed by r and c cycles) so that matching operands meet; the
// activation and weight buffers do that. `clr` reaches every PE in the same cycle
// and is to be raised when the first operands reach PE (0,0).
// Timing: an operand entering PE (0,0) in cycle t enters PE (r,c) in cycle t+r+c
// (when the edges are skewed), and that PE's psum includes it one edge later.
//
// Follows the paper's systolic-array figure (activation buffer on top, weight
// buffer on the left, operands passed PE to PE). The array size is this design's
// choice: the paper gives no size for its own array.
module sparq_systolic_array
  import sparq_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned N    = 4,
  parameter int unsigned NOPT = 5,
  localparam int unsigned PW  = pair_bits(N, NOPT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     shift,
  input  logic [PW-1:0]            a_top  [COLS],
  input  logic [2*WGT_W-1:0]       w_left [ROWS],
  output logic signed [PSUM_W-1:0] psum   [ROWS][COLS],
  output logic signed [PSUM_W-1:0] psum_bottom [COLS]
);

  // a_v[r][c]: activation entering PE(r,c); w_h[r][c]: weights entering PE(r,c)
  logic [PW-1:0]      a_v [ROWS+1][COLS];
  logic [2*WGT_W-1:0] w_h [ROWS][COLS+1];

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign a_v[0][c] = a_top[c];
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign w_h[r][0] = w_left[r];
  end

  // drain chain: partial sum of the PE above, zero above row 0
  logic signed [PSUM_W-1:0] p_up [ROWS][COLS];
  for (genvar r = 0; r < ROWS; r++) begin : g_up
    for (genvar c = 0; c < COLS; c++) begin : g_upc
      if (r == 0) begin : g_first
        assign p_up[r][c] = '0;
      end else begin : g_next
        assign p_up[r][c] = psum[r-1][c];
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign psum_bottom[c] = psum[ROWS-1][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      sparq_pe #(.N(N), .NOPT(NOPT)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .shift (shift),
        .psum_in (p_up[r][c]),
        .a_in  (a_v[r][c]),
        .w_in  (w_h[r][c]),
        .a_out (a_v[r+1][c]),
        .w_out (w_h[r][c+1]),
        .psum  (psum[r][c])
      );
    end
  end

endmodule
