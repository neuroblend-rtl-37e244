// tb_fp_systolic_array: a full 32x32 array with random weights receives a
// burst of back-to-back random input vectors, a gap, then more vectors. Each
// output vector is compared with the matrix-vector product and must leave
// exactly ROWS + COLS - 1 cycles after its input (LAT + 1 rising edges
// after the edge at which the testbench drives it).
module tb_fp_systolic_array;
  import nb_pkg::*;
  localparam int R = 32, C = 32, LAT = R + C - 1, NV = 40;
  logic clk = 0, rst_n = 0, w_load = 0, in_valid = 0, out_valid;
  act_t w_in [R][C], in_vec [R];
  logic signed [39:0] out_vec [C];
  act_t vecs [NV][R];
  longint tin [NV];
  longint cyc = 0;
  int checks = 0, failures = 0, nout = 0;
  fp_systolic_array #(.ROWS(R), .COLS(C), .ACC_W(40)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // stable at rising edges
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int j = 0; j < C; j++) begin
      automatic longint e = 0;
      for (int i = 0; i < R; i++) e += longint'(w_in[i][j]) * vecs[nout][i];
      checks++;
      if (longint'(out_vec[j]) != e) begin failures++; $display("vec %0d col %0d got %0d exp %0d", nout, j, out_vec[j], e); end
    end
    checks++;
    if (cyc - tin[nout] != LAT + 1) begin failures++; $display("vec %0d latency %0d", nout, cyc - tin[nout]); end
    nout++;
  end
  initial begin
    for (int i = 0; i < R; i++) begin
      in_vec[i] = '0;
      for (int j = 0; j < C; j++) w_in[i][j] = act_t'($urandom_range(2000)) - 1000;
    end
    for (int n = 0; n < NV; n++) for (int i = 0; i < R; i++) vecs[n][i] = act_t'($urandom);
    repeat (2) @(posedge clk); rst_n <= 1;
    @(posedge clk); w_load <= 1; @(posedge clk); w_load <= 0;
    for (int n = 0; n < NV; n++) begin
      if (n == 25) begin in_valid <= 0; repeat (7) @(posedge clk); end
      in_valid <= 1; in_vec <= vecs[n]; tin[n] = cyc;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 5) @(posedge clk);
    checks++; if (nout != NV) begin failures++; $display("got %0d vectors", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
