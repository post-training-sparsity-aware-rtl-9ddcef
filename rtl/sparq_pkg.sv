// sparq_pkg -- constants, types and width helpers shared by the SPARQ datapath.
//
// Activations are 8-bit unsigned and weights 8-bit signed (the A8W8 base model).
// An activation pair is carried as two "lanes"; each lane holds n data bits, a
// ShiftCtrl code that selects one of NOPT window placements, and a MuxCtrl bit that
// chooses which of the pair's two weights the lane multiplies (0: first, 1: second).
// Lane layout (LSB first): data[N-1:0], shift code, mux bit. A pair word is
// {lane1, lane0}. Window placements are evenly spaced: placement k shifts the lane
// left by k*STEP bits, STEP = (8-N)/(NOPT-1), which gives [7:4]..[3:0] for 5opt,
// [7:4],[5:2],[3:0] for 3opt and [7:4],[3:0] for 2opt, as in the paper.
// The widths 16/17 (shifted product / multiplier sum) and 32 (partial sum) are the
// numbers printed in the paper's multiplier, PE and dot-product figures.
package sparq_pkg;

  localparam int unsigned ACT_W  = 8;   // activation width (unsigned)
  localparam int unsigned WGT_W  = 8;   // weight width (signed)
  localparam int unsigned PROD_W = 16;  // shifted 4b-8b product
  localparam int unsigned MULT_W = 17;  // sum of the two shifted products
  localparam int unsigned PSUM_W = 32;  // partial-sum / accumulator width

  // What the vSPARQ zero detector found in an activation pair.
  typedef enum logic [1:0] {
    PAIR_ZERO  = 2'd0,  // both activations are zero
    PAIR_LONE0 = 2'd1,  // only the first is non-zero: it gets the whole 2n-bit budget
    PAIR_LONE1 = 2'd2,  // only the second is non-zero: it gets the whole 2n-bit budget
    PAIR_BOTH  = 2'd3   // both non-zero: each is trimmed to n bits by bSPARQ
  } pair_case_e;

  // Bit spacing between neighbouring window placements.
  function automatic int unsigned opt_step(input int unsigned n, input int unsigned nopt);
    return (ACT_W - n) / (nopt - 1);
  endfunction

  // Width of the ShiftCtrl code.
  function automatic int unsigned sc_bits(input int unsigned nopt);
    return $clog2(nopt);
  endfunction

  // Width of one lane and of one encoded pair.
  function automatic int unsigned lane_bits(input int unsigned n, input int unsigned nopt);
    return n + sc_bits(nopt) + 1;
  endfunction

  function automatic int unsigned pair_bits(input int unsigned n, input int unsigned nopt);
    return 2 * lane_bits(n, nopt);
  endfunction

endpackage
