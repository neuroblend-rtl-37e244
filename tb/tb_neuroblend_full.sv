// tb_neuroblend_full: one full-size frame through the NeuroBlend-20 engine
// with every parameter at its default (32x32 input map, 16/32/64 channels,
// 32x32 systolic arrays). Stimulus, golden model and checks are in
// nb_top_driver.
module tb_neuroblend_full;
  import nb_pkg::*;
  logic clk, rst_n, in_we, start, busy, done;
  cfg_wr_t cfg;
  logic [ADDR_W-1:0] in_waddr;
  act_t in_wdata [LANES];
  logic signed [31:0] logit [10];
  logic [8:0] sat_evt;

  neuroblend_top dut (.*);
  nb_top_driver #(.IMG(32), .MAX_CYC(3000000)) drv (.*);
endmodule
