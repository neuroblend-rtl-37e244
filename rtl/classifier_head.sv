// classifier_head: global average pooling of the last feature map followed by
// the linear layer.
//
// The head reads the HW-pixel, C-channel map through fm_raddr/fm_rdata
// (address pixel*C/16 + group, combinational read), one channel group at a
// time: it sums the HW values of every channel with an avg_pool unit
// (HW must be a power of two) and stores the averages, then starts the linear
// layer. A start pulse gives done after C/16*(HW+1) + NOUT*C/16 + a few
// cycles; logits then hold the NOUT class scores. Global pooling before the
// classifier is the usual ResNet-20 arrangement; the paper lists average
// pooling and the linear layer among the accelerator's operations.
module classifier_head
  import nb_pkg::*;
#(
  parameter int HW   = 64,
  parameter int C    = 64,
  parameter int NOUT = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [ADDR_W-1:0]  fm_raddr,
  input  act_t               fm_rdata [LANES],
  output logic signed [31:0] logit [NOUT]
);
  localparam int CG = C / LANES;
  localparam int SH = $clog2(HW);

  typedef enum logic [1:0] {H_IDLE, H_POOL, H_FC} hstate_e;
  hstate_e st;
  logic [ADDR_W-1:0] pix;
  logic [7:0]        g;
  logic              pend_v;
  logic [7:0]        pend_g;
  act_t              avg [LANES];
  act_t              pooled [C];
  logic              fc_start, fc_busy, fc_done;

  assign fm_raddr = ADDR_W'(int'(pix) * CG + int'(g));

  avg_pool #(.N(LANES), .SHIFT(SH)) u_gap (
    .clk, .rst_n, .in_valid(st == H_POOL), .first(pix == '0), .din(fm_rdata), .avg(avg)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= H_IDLE; pix <= '0; g <= '0; pend_v <= 1'b0; pend_g <= '0; fc_start <= 1'b0;
    end else begin
      pend_v   <= (st == H_POOL) && (int'(pix) == HW - 1);
      pend_g   <= g;
      fc_start <= 1'b0;
      case (st)
        H_IDLE: if (start) begin st <= H_POOL; pix <= '0; g <= '0; end
        H_POOL: begin
          if (int'(pix) == HW - 1) begin
            pix <= '0;
            if (int'(g) == CG - 1) begin g <= '0; st <= H_FC; fc_start <= 1'b1; end
            else g <= g + 1'b1;
          end else pix <= pix + 1'b1;
        end
        H_FC: if (fc_done) st <= H_IDLE;
        default: st <= H_IDLE;
      endcase
    end

  always_ff @(posedge clk)
    if (pend_v)
      for (int l = 0; l < LANES; l++) pooled[(int'(pend_g) * LANES + l) % C] <= avg[l];

  // fc_start is registered, so the last group's averages are stored in the
  // same cycle the linear layer starts and are read from the next cycle on.
  linear_layer #(.NIN(C), .NOUT(NOUT), .N(LANES)) u_fc (
    .clk, .rst_n, .cfg, .start(fc_start), .x(pooled),
    .busy(fc_busy), .done(fc_done), .logit(logit)
  );

  assign busy = (st != H_IDLE);
  assign done = fc_done;
endmodule
