// tb_residual_add: random and extreme operand pairs; the sum must saturate to
// the 16-bit range and the saturation flag must be set exactly when it does.
module tb_residual_add;
  import nb_pkg::*;
  act_t m [LANES], s [LANES], y [LANES];
  logic [LANES-1:0] sat;
  int checks = 0, failures = 0, nsat = 0;
  residual_add #(.N(LANES)) dut (.m, .s, .y, .sat);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int l = 0; l < LANES; l++) begin
        m[l] = act_t'($urandom);
        s[l] = (l < 8) ? act_t'($urandom) : act_t'($urandom_range(2000)) - 1000;
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        automatic int t = int'(m[l]) + int'(s[l]);
        automatic int e = t > 32767 ? 32767 : t < -32768 ? -32768 : t;
        automatic bit es = (t != e);
        nsat += es;
        checks++;
        if (int'(y[l]) != e || sat[l] != es) begin failures++; $display("m=%0d s=%0d y=%0d sat=%0b", m[l], s[l], y[l], sat[l]); end
      end
    end
    checks++; if (nsat == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
