// bmac: one binary multiply-accumulate over a 48-bit packed word.
//
// Binary values are encoded as 1 = +1 and 0 = -1, so the product of an
// activation bit and a weight bit is their XNOR. The 48 XNORs are what one
// DSP48E2 performs as a single wide logic operation; the popcount of the XNOR
// result then gives the number of +1 products. Bits whose mask is 0 (padding
// taps, unused channels of a partly filled word) take no part. The output is
// the signed +/-1 dot product of the unmasked bits:
//     dot = 2 * popcount(~(act ^ wgt) & mask) - popcount(mask)
// Purely combinational; the caller registers the result.
module bmac #(
  parameter int W = nb_pkg::BMAC_W
) (
  input  logic [W-1:0]                 act,
  input  logic [W-1:0]                 wgt,
  input  logic [W-1:0]                 mask,
  output logic signed [$clog2(W)+2:0]  dot
);
  localparam int CW = $clog2(W) + 1;

  logic [W-1:0] xnor_bits;
  logic [CW-1:0] n_pos, n_valid;

  always_comb begin
    xnor_bits = ~(act ^ wgt) & mask;
    n_pos   = '0;
    n_valid = '0;
    for (int i = 0; i < W; i++) begin
      n_pos   = n_pos + CW'(xnor_bits[i]);
      n_valid = n_valid + CW'(mask[i]);
    end
    dot = $signed({2'b00, n_pos}) + $signed({2'b00, n_pos}) - $signed({2'b00, n_valid});
  end
endmodule
