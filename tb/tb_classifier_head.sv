// tb_classifier_head: a 16-pixel, 32-channel map held in the testbench is
// read by the head, which must average every channel (floor of sum / 16) and
// apply the linear layer; the ten logits are compared with that computation.
module tb_classifier_head;
  import nb_pkg::*;
  localparam int HW = 16, C = 32, NO = 10;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_wr_t cfg;
  logic [ADDR_W-1:0] fm_raddr;
  act_t fm_rdata [LANES];
  logic signed [31:0] logit [NO];
  act_t fmap [HW*C/LANES][LANES];
  int wt [NO][C], bs [NO];
  int checks = 0, failures = 0;
  classifier_head #(.HW(HW), .C(C), .NOUT(NO)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int l = 0; l < LANES; l++) fm_rdata[l] = fmap[int'(fm_raddr) % (HW*C/LANES)][l];
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(cfg_sel_e sel, int addr, int data);
    cfg_wr_t w;
    w.we = 1; w.blk = '0; w.sel = sel; w.addr = ADDR_W'(addr); w.data = 48'(data);
    cfg <= w; @(posedge clk);
  endtask
  initial begin
    cfg = '0;
    foreach (fmap[a, l]) fmap[a][l] = act_t'($urandom);
    for (int o = 0; o < NO; o++) begin
      bs[o] = $urandom_range(2000) - 1000;
      for (int i = 0; i < C; i++) wt[o][i] = $urandom_range(1000) - 500;
    end
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int o = 0; o < NO; o++) begin
      wr(CFG_FCB, o, bs[o]);
      for (int i = 0; i < C; i++) wr(CFG_FCW, o*C + i, wt[o][i]);
    end
    cfg <= '0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    for (int o = 0; o < NO; o++) begin
      automatic longint s = 0, e;
      for (int c = 0; c < C; c++) begin
        automatic longint p = 0;
        for (int q = 0; q < HW; q++) p += fmap[q*(C/LANES) + c/LANES][c%LANES];
        s += longint'(wt[o][c]) * (p >>> 4);
      end
      e = longint'(int'(s >>> 8)) + bs[o];
      checks++;
      if (longint'(logit[o]) != e) begin failures++; $display("logit %0d got %0d exp %0d", o, logit[o], e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
