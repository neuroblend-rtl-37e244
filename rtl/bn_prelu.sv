// bn_prelu: batch normalization, PReLU and optional second batch
// normalization (the BN-PReLU and BN-PReLU-BN operations), LANES channels per
// cycle.
//
// Batch normalization is folded offline into one per-channel affine map
// y = a*x + b (Algorithm 1 with mean, variance, gamma and beta combined). The
// scale a, shift b and PReLU slope are Q8.8. The input has IN_FRAC fraction
// bits: 0 for raw binary-convolution sums (integers), 8 for Q8.8 activations.
//   s1 = sat16((a1*x) >>> IN_FRAC + b1)
//   s2 = prelu_en ? (s1 < 0 ? sat16((alpha*s1) >>> 8) : s1) : s1
//   y  = bn2_en   ? sat16((a2*s2) >>> 8 + b2) : s2
// With prelu_en = 0 and bn2_en = 0 the unit is a plain BN, which is how the
// block output BN uses it. Combinational.
module bn_prelu
  import nb_pkg::*;
#(
  parameter int N       = LANES,
  parameter int IN_FRAC = 0
) (
  input  logic prelu_en,
  input  logic bn2_en,
  input  act_t x     [N],
  input  act_t a1    [N],
  input  act_t b1    [N],
  input  act_t alpha [N],
  input  act_t a2    [N],
  input  act_t b2    [N],
  output act_t y     [N]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [47:0] p;
      act_t s1, s2;
      p  = (48'(x[i]) * 48'(a1[i])) >>> IN_FRAC;
      s1 = sat16(p + 48'(b1[i]));
      if (prelu_en && s1 < 0) s2 = sat16((48'(alpha[i]) * 48'(s1)) >>> FRAC);
      else                    s2 = s1;
      if (bn2_en) y[i] = sat16(((48'(a2[i]) * 48'(s2)) >>> FRAC) + 48'(b2[i]));
      else        y[i] = s2;
    end
  end
endmodule
