// tb_neuroblend_top: end-to-end test of the NeuroBlend-20 engine at a reduced
// image size (8x8 input map, so the stages work on 8x8, 4x4 and 2x2 pixels
// with the full 16/32/64 channels). Stimulus, golden model and checks are in
// nb_top_driver.
module tb_neuroblend_top;
  import nb_pkg::*;
  localparam int IMG = 8;
  logic clk, rst_n, in_we, start, busy, done;
  cfg_wr_t cfg;
  logic [ADDR_W-1:0] in_waddr;
  act_t in_wdata [LANES];
  logic signed [31:0] logit [10];
  logic [8:0] sat_evt;

  neuroblend_top #(.IMG(IMG)) dut (.*);
  nb_top_driver #(.IMG(IMG), .MAX_CYC(400000)) drv (.*);
endmodule
