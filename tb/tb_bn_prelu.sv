// tb_bn_prelu: two units, one on raw integer convolution sums (IN_FRAC = 0)
// and one on Q8.8 activations (IN_FRAC = 8), driven with random values and
// all four combinations of the PReLU and second-BN enables. Outputs are
// compared with the equations worked out in 64-bit integers.
module tb_bn_prelu;
  import nb_pkg::*;
  logic pe, b2e;
  act_t x [LANES], a1 [LANES], b1 [LANES], al [LANES], a2 [LANES], b2 [LANES];
  act_t y0 [LANES], y8 [LANES];
  int checks = 0, failures = 0, nneg = 0;
  bn_prelu #(.N(LANES), .IN_FRAC(0)) u0 (.prelu_en(pe), .bn2_en(b2e), .x, .a1, .b1, .alpha(al), .a2, .b2, .y(y0));
  bn_prelu #(.N(LANES), .IN_FRAC(8)) u8 (.prelu_en(pe), .bn2_en(b2e), .x, .a1, .b1, .alpha(al), .a2, .b2, .y(y8));

  function automatic longint sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction
  function automatic longint model(longint xv, int fr, longint ca1, longint cb1, longint cal, longint ca2, longint cb2, bit p, bit b);
    automatic longint s1 = sat(((xv * ca1) >>> fr) + cb1);
    automatic longint s2 = (p && s1 < 0) ? sat((cal * s1) >>> 8) : s1;
    return b ? sat(((ca2 * s2) >>> 8) + cb2) : s2;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 400; n++) begin
      pe = n[0]; b2e = n[1];
      for (int l = 0; l < LANES; l++) begin
        x[l]  = act_t'($urandom_range(1200)) - 600;
        a1[l] = act_t'($urandom_range(600)) - 100;
        b1[l] = act_t'($urandom_range(2000)) - 1000;
        al[l] = act_t'($urandom_range(128));
        a2[l] = act_t'($urandom_range(512)) - 256;
        b2[l] = act_t'($urandom_range(512)) - 256;
        if (l == 0) x[l] = act_t'($urandom);   // large values exercise saturation
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        automatic longint e0 = model(x[l], 0, a1[l], b1[l], al[l], a2[l], b2[l], pe, b2e);
        automatic longint e8 = model(x[l], 8, a1[l], b1[l], al[l], a2[l], b2[l], pe, b2e);
        if (pe && sat(longint'(x[l]) * a1[l] + b1[l]) < 0) nneg++;
        checks += 2;
        if (longint'(y0[l]) != e0) begin failures++; $display("frac0 x=%0d y=%0d exp=%0d", x[l], y0[l], e0); end
        if (longint'(y8[l]) != e8) begin failures++; $display("frac8 x=%0d y=%0d exp=%0d", x[l], y8[l], e8); end
      end
    end
    checks++; if (nneg == 0) begin failures++; $display("PReLU negative branch never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
