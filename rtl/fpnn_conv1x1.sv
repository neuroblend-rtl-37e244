// fpnn_conv1x1: 1x1 fixed-point convolution of the skip path ("1X1 FPConv"),
// built on the FPMAC systolic array.
//
// The engine stores the fused BN-CONV-BN weights w''[cout][cin] and biases
// b''[cout] (Q8.8, computed offline) written through the configuration bus
// (CFG_FW address cout*CIN + cin, CFG_FB address cout). The array has ROWS
// input channels and COLS output channels; when COUT > COLS the output
// channels are produced in tiles of COLS: the caller pulses tile_load with the
// tile number, which copies that tile's weights into the array in one cycle,
// then streams the pixel vectors, one per cycle if it likes, with in_valid.
// Each output vector, out[j] = sat16((sum_i w[t*COLS+j][i] * x[i]) >>> 8
// + b[t*COLS+j]), leaves ROWS + COLS - 1 cycles after its input with
// out_valid. Inputs above CIN and outputs above COUT are zero.
// The array size follows the paper (32 x 32); the tiling and the
// requantization are this design's choices.
module fpnn_conv1x1
  import nb_pkg::*;
#(
  parameter int CIN    = 16,
  parameter int COUT   = 32,
  parameter int ROWS   = SA_DIM,
  parameter int COLS   = SA_DIM,
  parameter int BLK_ID = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    tile_load,
  input  logic [3:0] tile,
  input  logic    in_valid,
  input  act_t    in_vec [CIN],
  output logic    out_valid,
  output act_t    out_vec [COLS]
);
  localparam int ACC_W = 40;

  act_t wmem [COUT][CIN];
  act_t bias [COUT];

  always_ff @(posedge clk)
    if (cfg.we && cfg.blk == 4'(BLK_ID)) begin
      if (cfg.sel == CFG_FW && int'(cfg.addr) < COUT * CIN)
        wmem[int'(cfg.addr) / CIN][int'(cfg.addr) % CIN] <= act_t'(cfg.data[ACT_W-1:0]);
      if (cfg.sel == CFG_FB && int'(cfg.addr) < COUT)
        bias[cfg.addr] <= act_t'(cfg.data[ACT_W-1:0]);
    end

  logic [3:0] cur_tile;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         cur_tile <= '0;
    else if (tile_load) cur_tile <= tile;

  act_t w_in [ROWS][COLS];
  act_t a_in [ROWS];
  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      a_in[i] = (i < CIN) ? in_vec[i < CIN ? i : 0] : act_t'(0);
      for (int j = 0; j < COLS; j++) begin
        int co;
        co = int'(tile) * COLS + j;
        w_in[i][j] = (i < CIN && co < COUT) ? wmem[co < COUT ? co : 0][i < CIN ? i : 0] : act_t'(0);
      end
    end
  end

  logic                    sa_valid;
  logic signed [ACC_W-1:0] sa_out [COLS];

  fp_systolic_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n,
    .w_load(tile_load), .w_in(w_in),
    .in_valid(in_valid), .in_vec(a_in),
    .out_valid(sa_valid), .out_vec(sa_out)
  );

  always_comb begin
    out_valid = sa_valid;
    for (int j = 0; j < COLS; j++) begin
      int co;
      co = int'(cur_tile) * COLS + j;
      out_vec[j] = (co < COUT) ? sat16(48'(sa_out[j] >>> FRAC) + 48'(bias[co < COUT ? co : 0])) : act_t'(0);
    end
  end

  initial assert (CIN <= ROWS) else $error("CIN must not exceed the array height");
endmodule
