// th_unit: thresholding, the fused form of batch normalization followed by
// the sign function at the input of a binary convolution.
//
// For each of LANES channels the 16-bit fixed-point activation is compared
// with a programmable per-channel threshold; the output bit is 1 (+1) when the
// activation is greater than the threshold and 0 (-1) otherwise. The
// comparison replaces the multiply of a batch normalization, as the paper
// describes. Operands are compared as signed numbers because activations are
// signed in this design; a threshold equal to the activation gives 0.
// Combinational: one group of LANES channels per cycle.
module th_unit
  import nb_pkg::*;
#(
  parameter int N = LANES
) (
  input  act_t       x  [N],
  input  act_t       th [N],
  output logic [N-1:0] y
);
  always_comb
    for (int i = 0; i < N; i++) y[i] = (x[i] > th[i]);
endmodule
