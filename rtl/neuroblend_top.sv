// neuroblend_top: NeuroBlend-20 inference engine for 32x32 CIFAR-10 images.
//
// The network after the first layer is nine blend blocks in three stages of
// three, with C0, 2*C0 and 4*C0 channels at IMG, IMG/2 and IMG/4 pixels
// square; the first block of stages 2 and 3 is a downsample block (stride-2
// binary conv, average pooling and 1x1 fixed-point conv on the skip). A
// classifier head (global average pooling and a 16-bit linear layer) gives
// NCLS logits. Every block has its own hardware and its own output map, as in
// a layer-per-engine streaming design. The output BN of blocks 2 and 5 is
// folded into the following downsample block; every other block applies its
// own output BN.
//
// Interface:
//   cfg        configuration bus; blk = block index 0..8, the linear layer
//              ignores blk. All weights, thresholds and BN values are loaded
//              through it before start.
//   in_we ...  write port of the input map (the first layer's output,
//              IMG x IMG x C0, address pixel*C0/16 + group, 16 channels a word).
//   start      runs blocks 0..8 and the head one after another on the map;
//              done pulses when logits are valid.
//   sat_evt    per block, high in a cycle where a residual sum saturated.
// The first layer (a 16-bit 3x3 convolution of the RGB image) is outside this
// module. Frames are processed one at a time: a block starts when the block
// before it has finished. The block types, the per-layer hardware and the
// 16-bit last layer follow the paper; the ResNet-20 stage plan is the usual
// one for CIFAR-10, and the configuration bus and sequential frame handling
// are this design's choices.
module neuroblend_top
  import nb_pkg::*;
#(
  parameter int IMG  = 32,
  parameter int C0   = 16,
  parameter int NCLS = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               in_we,
  input  logic [ADDR_W-1:0]  in_waddr,
  input  act_t               in_wdata [LANES],
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic signed [31:0] logit [NCLS],
  output logic [8:0]         sat_evt
);
  localparam int NB = 9;

  // Input feature map.
  act_t xmem [IMG*IMG*C0/LANES][LANES];
  always_ff @(posedge clk)
    if (in_we) xmem[int'(in_waddr) % (IMG*IMG*C0/LANES)] <= in_wdata;

  logic [ADDR_W-1:0] rd_addr [NB+1];      // rd_addr[i]: address block i (or the head, i = NB) reads
  act_t              rd_data [NB+1][LANES];
  logic              blk_start [NB+1];
  logic              blk_done  [NB+1];
  logic              blk_busy  [NB];

  always_comb
    for (int l = 0; l < LANES; l++) rd_data[0][l] = xmem[int'(rd_addr[0]) % (IMG*IMG*C0/LANES)][l];

  assign blk_start[0] = start && !busy;

  for (genvar i = 0; i < NB; i++) begin : g_blk
    localparam int  S    = i / 3;
    localparam bit  DN   = (i == 3) || (i == 6);
    localparam int  CO   = C0 << S;
    localparam int  CI   = DN ? CO / 2 : CO;
    localparam int  HI   = DN ? (IMG >> S) * 2 : (IMG >> S);
    localparam bit  OBN  = !((i == 2) || (i == 5));

    blend_block #(.H(HI), .W(HI), .CIN(CI), .COUT(CO), .DOWN(DN), .OUT_BN(OBN), .BLK_ID(i)) u_blk (
      .clk, .rst_n, .cfg,
      .start(blk_start[i]), .busy(blk_busy[i]), .done(blk_done[i]),
      .in_raddr(rd_addr[i]), .in_rdata(rd_data[i]),
      .out_raddr(rd_addr[i+1]), .out_rdata(rd_data[i+1]),
      .sat_evt(sat_evt[i])
    );
    assign blk_start[i+1] = blk_done[i];
  end

  classifier_head #(.HW((IMG/4)*(IMG/4)), .C(C0*4), .NOUT(NCLS)) u_head (
    .clk, .rst_n, .cfg,
    .start(blk_start[NB]), .busy(), .done(blk_done[NB]),
    .fm_raddr(rd_addr[NB]), .fm_rdata(rd_data[NB]),
    .logit(logit)
  );

  // Busy from start until the head finishes.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)              busy <= 1'b0;
    else if (blk_start[0])   busy <= 1'b1;
    else if (blk_done[NB])   busy <= 1'b0;

  assign done = blk_done[NB];
endmodule
