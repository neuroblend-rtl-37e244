// tb_fp_pe: loads a weight, drives random activations and partial sums each
// cycle and checks that one cycle later a_out repeats the activation and
// p_out equals p_in + w * a_in; reloads the weight between runs.
module tb_fp_pe;
  import nb_pkg::*;
  logic clk = 0, rst_n = 0, w_load = 0;
  act_t w_in, a_in, a_out;
  logic signed [39:0] p_in, p_out;
  int checks = 0, failures = 0;
  fp_pe #(.ACC_W(40)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    act_t w;
    a_in = '0; p_in = '0; w_in = '0;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int r = 0; r < 10; r++) begin
      w = act_t'($urandom);
      @(negedge clk); w_load = 1; w_in = w;
      @(negedge clk); w_load = 0; w_in = act_t'($urandom);
      for (int n = 0; n < 50; n++) begin
        automatic act_t a = act_t'($urandom);
        automatic logic signed [39:0] p = 40'(signed'(32'($urandom)));
        a_in = a; p_in = p;
        @(negedge clk);
        checks++;
        if (a_out != a || p_out != p + 40'(w * a)) begin
          failures++; $display("w=%0d a=%0d p=%0d -> a_out=%0d p_out=%0d", w, a, p, a_out, p_out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
