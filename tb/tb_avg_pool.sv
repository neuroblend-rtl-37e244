// tb_avg_pool: streams back-to-back windows of four random vectors into a
// SHIFT = 2 unit and of 64 vectors into a SHIFT = 6 unit; after each window
// the averages (floor of sum / 2**SHIFT) are compared one cycle later.
module tb_avg_pool;
  import nb_pkg::*;
  logic clk = 0, rst_n = 0, v = 0, first = 0;
  act_t din [LANES], avg2 [LANES], avg6 [LANES];
  int checks = 0, failures = 0;
  longint sum [LANES];
  avg_pool #(.N(LANES), .SHIFT(2)) u2 (.clk, .rst_n, .in_valid(v), .first, .din, .avg(avg2));
  avg_pool #(.N(LANES), .SHIFT(6)) u6 (.clk, .rst_n, .in_valid(v), .first, .din, .avg(avg6));
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(int len, int which);
    for (int k = 0; k < len; k++) begin
      v <= 1; first <= (k == 0);
      for (int l = 0; l < LANES; l++) begin
        automatic act_t d = act_t'($urandom);
        din[l] <= d;
        sum[l] = (k == 0 ? 0 : sum[l]) + d;
      end
      @(posedge clk);
    end
    v <= 0;
    #1;
    for (int l = 0; l < LANES; l++) begin
      automatic longint e = sum[l] >>> (which == 2 ? 2 : 6);
      automatic act_t got = (which == 2) ? avg2[l] : avg6[l];
      checks++;
      if (longint'(got) != e) begin failures++; $display("shift %0d lane %0d got %0d exp %0d", which, l, got, e); end
    end
    @(posedge clk);
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int n = 0; n < 20; n++) run(4, 2);
    for (int n = 0; n < 5; n++) run(64, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
