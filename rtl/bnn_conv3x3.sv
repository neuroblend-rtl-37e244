// bnn_conv3x3: 3x3 binary convolution engine (the "3X3 BConv" of a blend block).
//
// The input is a binary feature map of H x W pixels, each stored as one entry
// of NW 48-bit words with the CIN channels packed from bit 0 upward. The
// engine holds the binary weights of all COUT output channels and computes P
// output channels at once with P BMACs. For every output pixel and every group
// of P output channels it steps through the 9 taps and the NW words of the
// tap's input pixel, one (tap, word) per cycle, and accumulates the BMAC dot
// products. Taps that fall outside the image (padding of 1) and channel bits
// at or above CIN are masked, so they add nothing. Stride is STRIDE in both
// directions; the output map is (H/STRIDE) x (W/STRIDE).
//
// Interface: pulse start; the engine reads the map combinationally through
// b_raddr/b_rdata and emits one out_valid beat per (pixel, group) with the P
// signed 16-bit sums, the pixel index and the group index, then pulses done.
// Throughput is one output group every 9*NW cycles; out_valid of the first
// beat rises 9*NW + 1 clock edges after the edge that samples start, and done
// is high together with the last beat. No back-pressure: the consumer must take every beat.
// Weights are written through the configuration bus (CFG_BW, address
// (cout*9 + tap)*NW + word, tap = 3*ky + kx).
//
// The 48-bit BMAC width and the 16-bit sums follow the paper; the number of
// parallel BMACs (P), the loop order and the masking of padding are this
// design's choices.
module bnn_conv3x3
  import nb_pkg::*;
#(
  parameter int H      = 32,
  parameter int W      = 32,
  parameter int CIN    = 16,
  parameter int COUT   = 16,
  parameter int STRIDE = 1,
  parameter int P      = LANES,
  parameter int BLK_ID = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [ADDR_W-1:0] b_raddr,
  input  logic [((CIN+BMAC_W-1)/BMAC_W)*BMAC_W-1:0] b_rdata,
  output logic             out_valid,
  output logic [ADDR_W-1:0] out_pix,
  output logic [7:0]       out_grp,
  output act_t             out_sum [P]
);
  localparam int NW  = (CIN + BMAC_W - 1) / BMAC_W;
  localparam int OH  = H / STRIDE;
  localparam int OW  = W / STRIDE;
  localparam int NG  = COUT / P;
  localparam int NWT = COUT * 9 * NW;

  logic [BMAC_W-1:0] wmem [NWT];

  always_ff @(posedge clk)
    if (cfg.we && cfg.sel == CFG_BW && cfg.blk == 4'(BLK_ID) && int'(cfg.addr) < NWT)
      wmem[cfg.addr] <= cfg.data[BMAC_W-1:0];

  // Step counters.
  logic [ADDR_W-1:0] oy, ox;
  logic [7:0]        g;
  logic [3:0]        tap;
  logic [7:0]        wd;
  logic              run;

  wire last_wd  = (int'(wd) == NW - 1);
  wire last_tap = (tap == 4'd8);
  wire last_g   = (int'(g) == NG - 1);
  wire last_ox  = (int'(ox) == OW - 1);
  wire last_oy  = (int'(oy) == OH - 1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      run <= 1'b0; oy <= '0; ox <= '0; g <= '0; tap <= '0; wd <= '0;
    end else if (start && !run) begin
      run <= 1'b1; oy <= '0; ox <= '0; g <= '0; tap <= '0; wd <= '0;
    end else if (run) begin
      if (!last_wd) wd <= wd + 1'b1;
      else begin
        wd <= '0;
        if (!last_tap) tap <= tap + 1'b1;
        else begin
          tap <= '0;
          if (!last_g) g <= g + 1'b1;
          else begin
            g <= '0;
            if (!last_ox) ox <= ox + 1'b1;
            else begin
              ox <= '0;
              if (!last_oy) oy <= oy + 1'b1;
              else run <= 1'b0;
            end
          end
        end
      end
    end

  // Address of the tap's input pixel, with padding detection.
  logic signed [ADDR_W+1:0] iy, ix;
  logic                     inb;
  logic [BMAC_W-1:0]        a_word, a_mask;

  always_comb begin
    iy  = $signed({2'b00, oy}) * STRIDE + $signed({2'b00, 12'(tap / 3)}) - 1;
    ix  = $signed({2'b00, ox}) * STRIDE + $signed({2'b00, 12'(tap % 3)}) - 1;
    inb = (iy >= 0) && (iy < H) && (ix >= 0) && (ix < W);
    b_raddr = inb ? ADDR_W'(iy * W + ix) : '0;
    a_word  = b_rdata[int'(wd)*BMAC_W +: BMAC_W];
    for (int i = 0; i < BMAC_W; i++)
      a_mask[i] = inb && (int'(wd) * BMAC_W + i < CIN);
  end

  // P BMACs.
  logic signed [$clog2(BMAC_W)+2:0] dot [P];
  for (genvar k = 0; k < P; k++) begin : g_bmac
    bmac #(.W(BMAC_W)) u_bmac (
      .act (a_word),
      .wgt (wmem[((int'(g) * P + k) * 9 + int'(tap)) * NW + int'(wd)]),
      .mask(a_mask),
      .dot (dot[k])
    );
  end

  // Stage 1: registered BMAC results with step tags.
  logic                              s1_v, s1_first, s1_last;
  logic signed [$clog2(BMAC_W)+2:0]  s1_dot [P];
  logic [ADDR_W-1:0]                 s1_pix;
  logic [7:0]                        s1_g;
  act_t                              acc [P];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_pix <= '0; s1_g <= '0;
      for (int k = 0; k < P; k++) s1_dot[k] <= '0;
    end else begin
      s1_v     <= run;
      s1_first <= (tap == 4'd0) && (wd == 8'd0);
      s1_last  <= last_tap && last_wd;
      s1_pix   <= ADDR_W'(int'(oy) * OW + int'(ox));
      s1_g     <= g;
      for (int k = 0; k < P; k++) s1_dot[k] <= dot[k];
    end

  // Stage 2: accumulate; emit the sums on the last step of a group.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0; out_grp <= '0;
      for (int k = 0; k < P; k++) begin acc[k] <= '0; out_sum[k] <= '0; end
    end else begin
      out_valid <= s1_v && s1_last;
      if (s1_v) begin
        for (int k = 0; k < P; k++) begin
          act_t nxt;
          nxt = (s1_first ? act_t'(0) : acc[k]) + act_t'(s1_dot[k]);
          acc[k] <= nxt;
          if (s1_last) out_sum[k] <= nxt;
        end
        if (s1_last) begin out_pix <= s1_pix; out_grp <= s1_g; end
      end
    end

  logic s1_run_d;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) s1_run_d <= 1'b0;
    else        s1_run_d <= s1_v;

  assign busy = run || s1_v || s1_run_d;
  assign done = s1_run_d && !s1_v;

  initial assert (COUT % P == 0) else $error("COUT must be a multiple of P");
endmodule
