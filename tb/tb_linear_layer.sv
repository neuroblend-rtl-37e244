// tb_linear_layer: 64 inputs, 10 outputs, random Q8.8 weights, biases and
// inputs; the logits must equal ((sum w*x) >>> 8) + b and done must rise
// NOUT*NIN/16 edges after the edge that samples start (seen by the testbench
// two edges later than the edge where it drives start). Run twice with new inputs.
module tb_linear_layer;
  import nb_pkg::*;
  localparam int NI = 64, NO = 10;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_wr_t cfg;
  act_t x [NI];
  logic signed [31:0] logit [NO];
  int wt [NO][NI], bs [NO];
  longint cyc = 0;
  int checks = 0, failures = 0;
  linear_layer #(.NIN(NI), .NOUT(NO)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // stable at rising edges
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(cfg_sel_e sel, int addr, int data);
    cfg_wr_t w;
    w.we = 1; w.blk = 4'($urandom); w.sel = sel; w.addr = ADDR_W'(addr); w.data = 48'(data);
    cfg <= w; @(posedge clk);
  endtask
  initial begin
    longint t0;
    cfg = '0;
    foreach (x[i]) x[i] = '0;
    for (int o = 0; o < NO; o++) begin
      bs[o] = $urandom_range(2000) - 1000;
      for (int i = 0; i < NI; i++) wt[o][i] = $urandom_range(1000) - 500;
    end
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int o = 0; o < NO; o++) begin
      wr(CFG_FCB, o, bs[o]);
      for (int i = 0; i < NI; i++) wr(CFG_FCW, o*NI + i, wt[o][i]);
    end
    cfg <= '0;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < NI; i++) x[i] = act_t'($urandom);
      @(posedge clk); start <= 1; t0 = cyc; @(posedge clk); start <= 0;
      while (!done) @(posedge clk);
      checks++;
      if (cyc - t0 != NO*NI/16 + 2) begin failures++; $display("done after %0d cycles", cyc - t0); end
      @(posedge clk);
      for (int o = 0; o < NO; o++) begin
        automatic longint s = 0, e;
        for (int i = 0; i < NI; i++) s += longint'(wt[o][i]) * x[i];
        e = longint'(int'(s >>> 8)) + bs[o];
        checks++;
        if (longint'(logit[o]) != e) begin failures++; $display("logit %0d got %0d exp %0d", o, logit[o], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
