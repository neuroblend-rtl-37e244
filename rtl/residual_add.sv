// residual_add: the summation of the residual connection. Adds the main-path
// and skip-path activations of LANES channels and saturates each sum to the
// 16-bit fixed-point range (saturation is this design's choice; the paper does
// not say how an overflow is handled). Combinational.
module residual_add
  import nb_pkg::*;
#(
  parameter int N = LANES
) (
  input  act_t m [N],
  input  act_t s [N],
  output act_t y [N],
  output logic [N-1:0] sat   // lane saturated this cycle
);
  always_comb
    for (int i = 0; i < N; i++) begin
      logic signed [ACT_W:0] t;
      t = {m[i][ACT_W-1], m[i]} + {s[i][ACT_W-1], s[i]};
      sat[i] = (t[ACT_W] != t[ACT_W-1]);
      y[i] = sat16(48'(t));
    end
endmodule
