// tb_th_unit: random activations and thresholds, including equal values and
// the extremes of the 16-bit range; output bit must be (x > th).
module tb_th_unit;
  import nb_pkg::*;
  act_t x [LANES], th [LANES];
  logic [LANES-1:0] y;
  int checks = 0, failures = 0;
  th_unit #(.N(LANES)) dut (.x, .th, .y);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int l = 0; l < LANES; l++) begin
        x[l]  = act_t'($urandom);
        th[l] = (l % 4 == 0) ? x[l] : (l % 4 == 1) ? act_t'($urandom_range(200)) - 100 : act_t'($urandom);
        if (n == 0) begin x[l] = 16'sh8000; th[l] = 16'sh7fff; end
        if (n == 1) begin x[l] = 16'sh7fff; th[l] = 16'sh8000; end
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (y[l] != (int'(x[l]) > int'(th[l]))) begin failures++; $display("x=%0d th=%0d y=%0b", x[l], th[l], y[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
