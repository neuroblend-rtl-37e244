// tb_bmac: random activation, weight and mask words; the +/-1 dot product is
// recomputed bit by bit and compared, including all-masked and all-set masks.
module tb_bmac;
  logic [47:0] act, wgt, mask;
  logic signed [8:0] dot;
  int checks = 0, failures = 0;
  bmac #(.W(48)) dut (.act, .wgt, .mask, .dot);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 500; n++) begin
      int r;
      act  = {$urandom, $urandom};
      wgt  = {$urandom, $urandom};
      case (n % 4)
        0: mask = '1;
        1: mask = '0;
        2: mask = 48'hffff;
        default: mask = {$urandom, $urandom};
      endcase
      #1;
      r = 0;
      for (int i = 0; i < 48; i++) if (mask[i]) r += (act[i] == wgt[i]) ? 1 : -1;
      checks++;
      if (int'(dot) != r) begin failures++; $display("act=%h wgt=%h mask=%h dot=%0d exp=%0d", act, wgt, mask, dot, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
