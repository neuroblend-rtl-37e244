// tb_fpnn_conv1x1: 16 input and 48 output channels, so two array tiles.
// Weights and biases go in through the configuration bus; for each tile the
// test loads the tile, streams 20 random pixel vectors back to back and
// compares each output with sat16((sum w*x) >>> 8 + b) and its latency with
// ROWS + COLS - 1 cycles. Writes to another block index must be ignored.
module tb_fpnn_conv1x1;
  import nb_pkg::*;
  localparam int CI = 16, CO = 48, NP = 20, LAT = 63;
  logic clk = 0, rst_n = 0, tile_load = 0, in_valid = 0, out_valid;
  logic [3:0] tile = '0;
  cfg_wr_t cfg;
  act_t in_vec [CI], out_vec [32];
  int wt [CO][CI], bs [CO];
  act_t px [NP][CI];
  longint tin [NP], cyc = 0;
  int checks = 0, failures = 0, nout = 0, cur = 0;
  fpnn_conv1x1 #(.CIN(CI), .COUT(CO), .BLK_ID(3)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // stable at rising edges
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int j = 0; j < 32; j++) begin
      automatic int co = cur * 32 + j;
      automatic longint e = 0;
      if (co < CO) begin
        for (int i = 0; i < CI; i++) e += longint'(wt[co][i]) * px[nout][i];
        e = sat((e >>> 8) + bs[co]);
      end
      checks++;
      if (longint'(out_vec[j]) != e) begin failures++; $display("tile %0d px %0d ch %0d got %0d exp %0d", cur, nout, j, out_vec[j], e); end
    end
    checks++;
    if (cyc - tin[nout] != LAT + 1) begin failures++; $display("latency %0d", cyc - tin[nout]); end
    nout++;
  end
  task automatic wr(int blk, cfg_sel_e sel, int addr, int data);
    cfg_wr_t w;
    w.we = 1; w.blk = 4'(blk); w.sel = sel; w.addr = ADDR_W'(addr); w.data = 48'(data);
    cfg <= w; @(posedge clk);
  endtask
  initial begin
    cfg = '0;
    for (int i = 0; i < CI; i++) in_vec[i] = '0;
    for (int o = 0; o < CO; o++) begin
      bs[o] = $urandom_range(1000) - 500;
      for (int i = 0; i < CI; i++) wt[o][i] = $urandom_range(512) - 256;
    end
    for (int n = 0; n < NP; n++) for (int i = 0; i < CI; i++) px[n][i] = act_t'($urandom_range(4000)) - 2000;
    px[0][0] = 16'sh7fff;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int o = 0; o < CO; o++) begin
      wr(3, CFG_FB, o, bs[o]);
      for (int i = 0; i < CI; i++) wr(3, CFG_FW, o*CI + i, wt[o][i]);
      wr(5, CFG_FW, o*CI, 12345);   // other block: ignored
    end
    cfg <= '0;
    for (int t = 0; t < 2; t++) begin
      cur = t; nout = 0;
      @(posedge clk); tile_load <= 1; tile <= 4'(t); @(posedge clk); tile_load <= 0;
      for (int n = 0; n < NP; n++) begin
        in_valid <= 1; for (int i = 0; i < CI; i++) in_vec[i] <= px[n][i]; tin[n] = cyc;
        @(posedge clk);
      end
      in_valid <= 0;
      repeat (LAT + 3) @(posedge clk);
      checks++; if (nout != NP) begin failures++; $display("tile %0d: %0d outputs", t, nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
