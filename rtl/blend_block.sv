// blend_block: one optimized NeuroBlend block, the unit of the network.
//
// Dataflow (after the compile-time fusions of the paper's Fig. 8):
//   main path : thresholding -> 3x3 binary conv (stride 1 or 2) -> BN -> PReLU
//   skip path : identity                                   (DOWN = 0)
//               2x2 average pooling -> 1x1 fixed-point conv (DOWN = 1)
//   output    : main + skip (saturating), then the block's own output BN
//               when OUT_BN = 1. When the next block is a downsample block
//               that BN is instead folded by the compiler into the next
//               block's thresholds and skip-conv weights (OUT_BN = 0).
// The BN that precedes the sign function is folded into the thresholds; the
// BN-CONV-BN sequence of the skip path is folded into the 1x1 conv weights and
// biases. All of these folded values are plain per-channel numbers written
// through the configuration bus.
//
// Operation. A start pulse runs four phases one after another:
//   BIN   read the H x W x CIN fixed-point input map, LANES channels per
//         cycle, threshold it and store the bits, channel-packed into 48-bit
//         words, in the binary map memory (H*W*CIN/16 cycles);
//   POOL  (DOWN only) 2x2-average every channel group of every output pixel
//         into the pooled-vector memory (4 cycles per group and pixel);
//   SKIP  (DOWN only) for each tile of 32 output channels, load the tile's
//         weights into the systolic array and stream all pooled vectors
//         through it into the skip buffer;
//   MAIN  run the binary convolution; each beat of LANES sums goes through
//         BN-PReLU, the residual add and the optional output BN and is
//         written to the output map.
// done pulses for one cycle at the end. The input map is read through
// in_raddr/in_rdata (address pixel*CIN/16 + group, read combinationally) and
// must stay unchanged until done; the output map is read the same way through
// out_raddr/out_rdata. The phase order, the memories' read style and the
// OUT_BN choice are this design's; the block structure is the paper's.
module blend_block
  import nb_pkg::*;
#(
  parameter int H      = 32,
  parameter int W      = 32,
  parameter int CIN    = 16,
  parameter int COUT   = 16,
  parameter bit DOWN   = 1'b0,
  parameter bit OUT_BN = 1'b1,
  parameter int BLK_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [ADDR_W-1:0] in_raddr,
  input  act_t              in_rdata [LANES],
  input  logic [ADDR_W-1:0] out_raddr,
  output act_t              out_rdata [LANES],
  output logic              sat_evt     // a residual sum saturated (for statistics)
);
  localparam int STRIDE = DOWN ? 2 : 1;
  localparam int OH  = H / STRIDE;
  localparam int OW  = W / STRIDE;
  localparam int CGI = CIN / LANES;
  localparam int CGO = COUT / LANES;
  localparam int NW  = (CIN + BMAC_W - 1) / BMAC_W;
  localparam int NT  = (COUT + SA_DIM - 1) / SA_DIM;
  localparam int NSK = DOWN ? OH * OW : 1;   // skip-path memory depth

  // ---------------- per-channel parameters ----------------
  act_t th    [CIN];
  act_t bn1_a [COUT];
  act_t bn1_b [COUT];
  act_t alpha [COUT];
  act_t obn_a [COUT];
  act_t obn_b [COUT];

  always_ff @(posedge clk)
    if (cfg.we && cfg.blk == 4'(BLK_ID)) begin
      if (cfg.sel == CFG_TH && int'(cfg.addr) < CIN) th[cfg.addr] <= act_t'(cfg.data[15:0]);
      if (int'(cfg.addr) < COUT)
        case (cfg.sel)
          CFG_BN1_A: bn1_a[cfg.addr] <= act_t'(cfg.data[15:0]);
          CFG_BN1_B: bn1_b[cfg.addr] <= act_t'(cfg.data[15:0]);
          CFG_PRELU: alpha[cfg.addr] <= act_t'(cfg.data[15:0]);
          CFG_OBN_A: obn_a[cfg.addr] <= act_t'(cfg.data[15:0]);
          CFG_OBN_B: obn_b[cfg.addr] <= act_t'(cfg.data[15:0]);
          default: ;
        endcase
    end

  // ---------------- memories ----------------
  logic [NW*BMAC_W-1:0] bmem [H*W];        // binary input map
  act_t                 amem [NSK][CIN];   // pooled skip vectors
  act_t                 smem [NSK][COUT];  // skip-conv outputs
  act_t                 ymem [OH*OW*CGO][LANES];

  always_comb
    for (int l = 0; l < LANES; l++) out_rdata[l] = ymem[out_raddr][l];

  // ---------------- control ----------------
  typedef enum logic [2:0] {S_IDLE, S_BIN, S_POOL, S_TLOAD, S_TRUN, S_TDRAIN, S_MAIN, S_DONE} state_e;
  state_e st;

  logic [ADDR_W-1:0] cnt, ocnt;    // general counter, skip output counter
  logic [7:0]        pg;           // pool channel group
  logic [1:0]        pk;           // pool window position
  logic [3:0]        tile;

  logic              conv_start, conv_busy, conv_done, conv_v;
  logic [ADDR_W-1:0] conv_pix, b_raddr;
  logic [7:0]        conv_grp;
  act_t              conv_sum [LANES];

  logic              pool_v, pool_first, pend_v;
  logic [ADDR_W-1:0] pend_op;
  logic [7:0]        pend_g;
  act_t              pool_avg [LANES];

  logic              fp_load, fp_in_v, fp_out_v;
  act_t              fp_out [SA_DIM];

  // Binarization datapath.
  logic [LANES-1:0] th_bits;
  act_t             th_sel [LANES];
  always_comb
    for (int l = 0; l < LANES; l++) th_sel[l] = th[(int'(cnt) % CGI) * LANES + l];
  th_unit #(.N(LANES)) u_th (.x(in_rdata), .th(th_sel), .y(th_bits));

  // Input-map address for each phase.
  logic [ADDR_W-1:0] op_y, op_x;
  always_comb begin
    op_y = ADDR_W'(int'(cnt) / OW);
    op_x = ADDR_W'(int'(cnt) % OW);
    case (st)
      S_BIN:   in_raddr = cnt;
      S_POOL:  in_raddr = ADDR_W'(((2 * int'(op_y) + int'(pk[1])) * W + 2 * int'(op_x) + int'(pk[0])) * CGI + int'(pg));
      default: in_raddr = ADDR_W'(int'(conv_pix) * CGI + int'(conv_grp));
    endcase
  end

  wire last_px_bin = (int'(cnt) == H * W * CGI - 1);
  wire last_op     = (int'(cnt) == OH * OW - 1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; ocnt <= '0; pg <= '0; pk <= '0; tile <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin st <= S_BIN; cnt <= '0; end
        S_BIN: begin
          cnt <= cnt + 1'b1;
          if (last_px_bin) begin
            cnt <= '0; pg <= '0; pk <= '0; tile <= '0;
            st  <= DOWN ? S_POOL : S_MAIN;
          end
        end
        S_POOL: begin
          pk <= pk + 1'b1;
          if (pk == 2'd3) begin
            if (int'(pg) == CGI - 1) begin
              pg <= '0;
              cnt <= cnt + 1'b1;
              if (last_op) begin cnt <= '0; st <= S_TLOAD; end
            end else pg <= pg + 1'b1;
          end
        end
        S_TLOAD: begin st <= S_TRUN; cnt <= '0; ocnt <= '0; end
        S_TRUN: begin
          cnt <= cnt + 1'b1;
          if (last_op) st <= S_TDRAIN;
        end
        S_TDRAIN: ;
        S_MAIN: if (conv_done) st <= S_DONE;
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      if (fp_out_v) begin
        ocnt <= ocnt + 1'b1;
        if (int'(ocnt) == OH * OW - 1) begin
          if (int'(tile) == NT - 1) st <= S_MAIN;
          else begin tile <= tile + 1'b1; st <= S_TLOAD; end
        end
      end
    end

  logic main_started;
  assign conv_start = (st == S_MAIN) && !conv_busy && !conv_done && !main_started;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)               main_started <= 1'b0;
    else if (st != S_MAIN)    main_started <= 1'b0;
    else if (conv_start)      main_started <= 1'b1;

  assign busy = (st != S_IDLE);
  assign done = (st == S_DONE);

  // Binary map write.
  always_ff @(posedge clk)
    if (st == S_BIN)
      bmem[int'(cnt) / CGI][(int'(cnt) % CGI) * LANES +: LANES] <= th_bits;

  // ---------------- skip path ----------------
  assign pool_v     = (st == S_POOL);
  assign pool_first = (pk == 2'd0);

  avg_pool #(.N(LANES), .SHIFT(2)) u_pool (
    .clk, .rst_n, .in_valid(pool_v), .first(pool_first), .din(in_rdata), .avg(pool_avg)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pend_v <= 1'b0; pend_op <= '0; pend_g <= '0;
    end else begin
      pend_v  <= pool_v && (pk == 2'd3);
      pend_op <= cnt;
      pend_g  <= pg;
    end

  always_ff @(posedge clk)
    if (DOWN && pend_v)
      for (int l = 0; l < LANES; l++)
        amem[int'(pend_op) % NSK][(int'(pend_g) * LANES + l) % CIN] <= pool_avg[l];

  assign fp_load = (st == S_TLOAD);
  assign fp_in_v = (st == S_TRUN);

  if (DOWN) begin : g_skipconv
    fpnn_conv1x1 #(.CIN(CIN), .COUT(COUT), .ROWS(SA_DIM), .COLS(SA_DIM), .BLK_ID(BLK_ID)) u_fpconv (
      .clk, .rst_n, .cfg,
      .tile_load(fp_load), .tile(tile),
      .in_valid(fp_in_v), .in_vec(amem[int'(cnt) % NSK]),
      .out_valid(fp_out_v), .out_vec(fp_out)
    );
  end else begin : g_noskipconv
    assign fp_out_v = 1'b0;
    always_comb for (int j = 0; j < SA_DIM; j++) fp_out[j] = '0;
  end

  always_ff @(posedge clk)
    if (DOWN && fp_out_v)
      for (int j = 0; j < SA_DIM; j++)
        if (int'(tile) * SA_DIM + j < COUT)
          smem[int'(ocnt) % NSK][(int'(tile) * SA_DIM + j) % COUT] <= fp_out[j];

  // ---------------- main path ----------------
  bnn_conv3x3 #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .STRIDE(STRIDE), .P(LANES), .BLK_ID(BLK_ID)) u_bconv (
    .clk, .rst_n, .cfg,
    .start(conv_start), .busy(conv_busy), .done(conv_done),
    .b_raddr(b_raddr), .b_rdata(bmem[b_raddr]),
    .out_valid(conv_v), .out_pix(conv_pix), .out_grp(conv_grp), .out_sum(conv_sum)
  );

  act_t ch_a1 [LANES], ch_b1 [LANES], ch_al [LANES], ch_oa [LANES], ch_ob [LANES], zero [LANES];
  act_t main_v [LANES], skip_v [LANES], sum_v [LANES], obn_v [LANES];
  logic [LANES-1:0] sat_l;

  always_comb
    for (int l = 0; l < LANES; l++) begin
      int c;
      c = int'(conv_grp) * LANES + l;
      ch_a1[l] = bn1_a[c % COUT];
      ch_b1[l] = bn1_b[c % COUT];
      ch_al[l] = alpha[c % COUT];
      ch_oa[l] = obn_a[c % COUT];
      ch_ob[l] = obn_b[c % COUT];
      zero[l]  = '0;
      skip_v[l] = DOWN ? smem[int'(conv_pix) % NSK][c % COUT] : in_rdata[l];
    end

  bn_prelu #(.N(LANES), .IN_FRAC(0)) u_bn_main (
    .prelu_en(1'b1), .bn2_en(1'b0), .x(conv_sum),
    .a1(ch_a1), .b1(ch_b1), .alpha(ch_al), .a2(zero), .b2(zero), .y(main_v)
  );

  residual_add #(.N(LANES)) u_add (.m(main_v), .s(skip_v), .y(sum_v), .sat(sat_l));

  bn_prelu #(.N(LANES), .IN_FRAC(FRAC)) u_bn_out (
    .prelu_en(1'b0), .bn2_en(1'b0), .x(sum_v),
    .a1(ch_oa), .b1(ch_ob), .alpha(zero), .a2(zero), .b2(zero), .y(obn_v)
  );

  always_ff @(posedge clk)
    if (conv_v)
      for (int l = 0; l < LANES; l++)
        ymem[int'(conv_pix) * CGO + int'(conv_grp)][l] <= OUT_BN ? obn_v[l] : sum_v[l];

  assign sat_evt = conv_v && (|sat_l);

  initial begin
    assert (CIN % LANES == 0 && COUT % LANES == 0) else $error("channel counts must be multiples of LANES");
    assert (DOWN || CIN == COUT) else $error("an identity skip needs CIN == COUT");
  end
endmodule
