// linear_layer: the fully connected last layer, in 16-bit fixed point.
//
// logit[o] = ((sum_i w[o][i] * x[i]) >>> 8) + b[o]   for o < NOUT, i < NIN,
// with Q8.8 inputs, weights and biases and 32-bit signed logits (Q.8, not
// saturated). LANES multiply-accumulates run in parallel: a start pulse
// computes one output every NIN/LANES cycles; done rises NOUT*NIN/LANES
// clock edges after the edge that samples start and pulses for one cycle,
// and the logits stay valid until the next start.
// The input vector must be stable while the layer runs. Weights and biases
// are written through the configuration bus (CFG_FCW address o*NIN + i,
// CFG_FCB address o). The schedule is this design's choice.
module linear_layer
  import nb_pkg::*;
#(
  parameter int NIN  = 64,
  parameter int NOUT = 10,
  parameter int N    = LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               start,
  input  act_t               x [NIN],
  output logic               busy,
  output logic               done,
  output logic signed [31:0] logit [NOUT]
);
  localparam int NC = NIN / N;

  act_t wmem [NOUT][NIN];
  act_t bias [NOUT];

  always_ff @(posedge clk)
    if (cfg.we) begin
      if (cfg.sel == CFG_FCW && int'(cfg.addr) < NOUT * NIN)
        wmem[int'(cfg.addr) / NIN][int'(cfg.addr) % NIN] <= act_t'(cfg.data[15:0]);
      if (cfg.sel == CFG_FCB && int'(cfg.addr) < NOUT)
        bias[int'(cfg.addr)] <= act_t'(cfg.data[15:0]);
    end

  logic [7:0] o, c;
  logic       run;
  logic signed [47:0] acc, part;

  always_comb begin
    part = '0;
    for (int l = 0; l < N; l++)
      part = part + 48'(wmem[int'(o) % NOUT][(int'(c) * N + l) % NIN]) * 48'(x[(int'(c) * N + l) % NIN]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      run <= 1'b0; o <= '0; c <= '0; acc <= '0; done <= 1'b0;
      for (int k = 0; k < NOUT; k++) logit[k] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; o <= '0; c <= '0; acc <= '0;
      end else if (run) begin
        if (int'(c) == NC - 1) begin
          logit[int'(o) % NOUT] <= 32'((acc + part) >>> FRAC) + 32'(bias[int'(o) % NOUT]);
          acc <= '0;
          c   <= '0;
          if (int'(o) == NOUT - 1) begin run <= 1'b0; done <= 1'b1; end
          else o <= o + 1'b1;
        end else begin
          acc <= acc + part;
          c   <= c + 1'b1;
        end
      end
    end

  assign busy = run;
endmodule
