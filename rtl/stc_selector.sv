// stc_selector -- activation selection of a sparse tensor core (2:4 weight sparsity).
//
// Weights are pruned so that every group of four has at most two non-zero values;
// only those two are stored, with their 2-bit positions (coordinates) inside the
// group. For each group g the selector forwards the two activations that meet the
// stored weights: sel[2g+j] = act[4g + idx[g][j]], j = 0, 1 (a 4:2 multiplexer per
// group). Combinational.
//
// Follows the paper's sparse-tensor-core figure (one MUX 4:2 per group of four
// activations, driven by the stored indices). The figure prints "2x3" on the index
// input; two 2-bit coordinates are what selecting two of four needs, and that is what
// is built here. GROUPS is 4 (16 activations to 8), twice the two groups of the
// conventional figure, because the SPARQ dot-product unit takes twice as many
// weights.
module stc_selector #(
  parameter int unsigned GROUPS = 4
) (
  input  logic [7:0] act [4*GROUPS],
  input  logic [1:0] idx [GROUPS][2],
  output logic [7:0] sel [2*GROUPS]
);

  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      for (int j = 0; j < 2; j++) begin
        sel[2*g+j] = act[4*g + int'(idx[g][j])];
      end
    end
  end

endmodule
