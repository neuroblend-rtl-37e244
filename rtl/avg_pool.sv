// avg_pool: lane-parallel average pooling over a window of 2**SHIFT values.
//
// The caller presents the window one value vector per cycle with in_valid;
// first marks the window's first value and restarts the sums. After the last
// value has been accepted, avg holds sum >>> SHIFT (rounding toward minus
// infinity) from the next cycle on. SHIFT = 2 gives the 2x2 pooling of the
// downsample skip path; SHIFT = 6 gives global pooling of an 8x8 map.
// Average pooling as an operation follows the paper; the window sizes and
// the floor rounding are this design's choices.
module avg_pool
  import nb_pkg::*;
#(
  parameter int N     = LANES,
  parameter int SHIFT = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic first,
  input  act_t din [N],
  output act_t avg [N]
);
  localparam int SW = ACT_W + SHIFT;
  logic signed [SW-1:0] acc [N];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < N; i++) acc[i] <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < N; i++)
        acc[i] <= (first ? SW'(0) : acc[i]) + SW'(din[i]);
    end

  always_comb
    for (int i = 0; i < N; i++) avg[i] = act_t'(acc[i] >>> SHIFT);
endmodule
