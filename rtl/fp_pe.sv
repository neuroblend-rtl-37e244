// fp_pe: one processing element of the fixed-point systolic array (one FPMAC,
// a DSP48E2 on the FPGA).
//
// The PE holds a stationary 16-bit weight. Each cycle it passes the incoming
// activation to its right-hand neighbour and the partial sum plus
// weight * activation to the PE below, both through registers:
//     a_out <= a_in;   p_out <= p_in + w * a_in
// The weight is loaded with w_load. Weight-stationary operation is this
// design's choice; the paper names a 32x32 systolic array of DSPs only.
module fp_pe
  import nb_pkg::*;
#(
  parameter int ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_load,
  input  act_t                    w_in,
  input  act_t                    a_in,
  input  logic signed [ACC_W-1:0] p_in,
  output act_t                    a_out,
  output logic signed [ACC_W-1:0] p_out
);
  act_t w;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      w <= '0; a_out <= '0; p_out <= '0;
    end else begin
      if (w_load) w <= w_in;
      a_out <= a_in;
      p_out <= p_in + ACC_W'(w * a_in);
    end
endmodule
