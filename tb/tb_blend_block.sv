// tb_blend_block: two blocks on random maps and parameters. Block D is a
// downsample block (8x8x32 -> 4x4x64, two systolic-array tiles, output BN
// fused away); block N is a normal block (4x4x64 -> 4x4x64, identity skip,
// output BN applied, two 48-bit words per pixel with the second partly used).
// Every output value is compared with a reference computed from the block
// equations, and the number of saturated residual groups with the block's
// sat_evt count. Large BN scales on some channels force saturation.
module tb_blend_block;
  import nb_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NBK = 2;
  // geometry per test block: H, CIN, COUT, DOWN, OUT_BN
  localparam int GH [NBK] = '{8, 4};
  localparam int GCI[NBK] = '{32, 64};
  localparam int GCO[NBK] = '{64, 64};
  localparam bit GDN[NBK] = '{1'b1, 1'b0};
  localparam bit GOB[NBK] = '{1'b0, 1'b1};

  int  th [NBK][64], a1 [NBK][64], b1 [NBK][64], al [NBK][64], oa [NBK][64], ob [NBK][64];
  int  fw [NBK][64][64], fb [NBK][64];
  bit  bw [NBK][64][9][64];
  int  xin [NBK][8*8*64];
  int  yref [NBK][8*8*64];
  int  satref [NBK], satdut [NBK];

  logic st [NBK], bsy [NBK], dn [NBK], sev [NBK];
  logic [ADDR_W-1:0] ira [NBK], ora [NBK];
  act_t ird [NBK][LANES], ord [NBK][LANES];

  for (genvar b = 0; b < NBK; b++) begin : g_b
    blend_block #(.H(GH[b]), .W(GH[b]), .CIN(GCI[b]), .COUT(GCO[b]), .DOWN(GDN[b]), .OUT_BN(GOB[b]), .BLK_ID(b + 4)) u (
      .clk, .rst_n, .cfg, .start(st[b]), .busy(bsy[b]), .done(dn[b]),
      .in_raddr(ira[b]), .in_rdata(ird[b]), .out_raddr(ora[b]), .out_rdata(ord[b]), .sat_evt(sev[b]));
    always_comb for (int l = 0; l < LANES; l++)
      ird[b][l] = act_t'(xin[b][(int'(ira[b]) * LANES + l) % (8*8*64)]);
    always @(posedge clk) if (rst_n && sev[b]) satdut[b]++;
  end

  function automatic longint sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction

  task automatic reference(int b);
    int h = GH[b], ci = GCI[b], co = GCO[b], s = GDN[b] ? 2 : 1, ho = GH[b] / (GDN[b] ? 2 : 1);
    for (int oy = 0; oy < ho; oy++) for (int ox = 0; ox < ho; ox++) begin
      longint pooled [64];
      bit gs [4];
      for (int g = 0; g < 4; g++) gs[g] = 0;
      for (int c = 0; c < ci; c++) begin
        longint t = 0;
        if (GDN[b]) for (int k = 0; k < 4; k++) t += xin[b][((2*oy + k/2)*h + 2*ox + k%2)*ci + c];
        pooled[c] = t >>> 2;
      end
      for (int o = 0; o < co; o++) begin
        longint acc = 0, m, sk, sm;
        for (int t = 0; t < 9; t++) begin
          int iy = oy*s + t/3 - 1, ix = ox*s + t%3 - 1;
          if (iy < 0 || iy >= h || ix < 0 || ix >= h) continue;
          for (int c = 0; c < ci; c++)
            acc += ((xin[b][(iy*h + ix)*ci + c] > th[b][c]) == bw[b][o][t][c]) ? 1 : -1;
        end
        m = sat(acc * a1[b][o] + b1[b][o]);
        if (m < 0) m = sat((al[b][o] * m) >>> 8);
        if (GDN[b]) begin
          longint d = 0;
          for (int c = 0; c < ci; c++) d += fw[b][o][c] * pooled[c];
          sk = sat((d >>> 8) + fb[b][o]);
        end else sk = xin[b][(oy*ho + ox)*ci + o];
        sm = m + sk;
        if (sm != sat(sm)) gs[o/16] = 1;
        sm = sat(sm);
        yref[b][(oy*ho + ox)*co + o] = int'(GOB[b] ? sat(((sm * oa[b][o]) >>> 8) + ob[b][o]) : sm);
      end
      for (int g = 0; g < co/16; g++) satref[b] += gs[g];
    end
  endtask

  task automatic wr(int blk, cfg_sel_e sel, int addr, logic [47:0] d);
    cfg_wr_t w;
    w.we = 1; w.blk = 4'(blk); w.sel = sel; w.addr = ADDR_W'(addr); w.data = d;
    cfg <= w; @(posedge clk);
  endtask

  initial begin
    cfg = '0;
    for (int b = 0; b < NBK; b++) begin
      st[b] = 0; ora[b] = '0; satref[b] = 0; satdut[b] = 0;
      for (int c = 0; c < 64; c++) begin
        th[b][c] = $urandom_range(512) - 256;
        a1[b][c] = (c % 16 == 3) ? 4000 : $urandom_range(72) + 8;
        b1[b][c] = $urandom_range(1024) - 512;
        al[b][c] = $urandom_range(80) + 16;
        oa[b][c] = $urandom_range(256) + 128;
        ob[b][c] = $urandom_range(256) - 128;
        fb[b][c] = $urandom_range(512) - 256;
        for (int k = 0; k < 64; k++) fw[b][c][k] = $urandom_range(128) - 64;
        for (int t = 0; t < 9; t++) for (int k = 0; k < 64; k++) bw[b][c][t][k] = 1'($urandom);
      end
      for (int k = 0; k < 8*8*64; k++) xin[b][k] = $urandom_range(2048) - 1024;
    end
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int b = 0; b < NBK; b++) begin
      automatic int ci = GCI[b], co = GCO[b], nw = (GCI[b] + 47) / 48;
      for (int c = 0; c < ci; c++) wr(b + 4, CFG_TH, c, 48'(th[b][c]));
      for (int o = 0; o < co; o++) begin
        wr(b + 4, CFG_BN1_A, o, 48'(a1[b][o]));
        wr(b + 4, CFG_BN1_B, o, 48'(b1[b][o]));
        wr(b + 4, CFG_PRELU, o, 48'(al[b][o]));
        wr(b + 4, CFG_OBN_A, o, 48'(oa[b][o]));
        wr(b + 4, CFG_OBN_B, o, 48'(ob[b][o]));
        wr(b + 4, CFG_FB, o, 48'(fb[b][o]));
        for (int c = 0; c < ci; c++) wr(b + 4, CFG_FW, o*ci + c, 48'(fw[b][o][c]));
        for (int t = 0; t < 9; t++) for (int w = 0; w < nw; w++) begin
          automatic logic [47:0] d = '0;
          for (int k = 0; k < 48; k++) if (w*48 + k < ci) d[k] = bw[b][o][t][w*48 + k];
          wr(b + 4, CFG_BW, (o*9 + t)*nw + w, d);
        end
      end
    end
    cfg <= '0;
    for (int b = 0; b < NBK; b++) reference(b);
    @(posedge clk);
    for (int b = 0; b < NBK; b++) st[b] <= 1;
    @(posedge clk);
    for (int b = 0; b < NBK; b++) st[b] <= 0;
    @(posedge clk);
    while (bsy[0] || bsy[1]) @(posedge clk);
    @(posedge clk);
    for (int b = 0; b < NBK; b++) begin
      automatic int co = GCO[b], ho = GH[b] / (GDN[b] ? 2 : 1);
      for (int a = 0; a < ho*ho*co/LANES; a++) begin
        ora[b] = ADDR_W'(a);
        #1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (int'(ord[b][l]) != yref[b][a*LANES + l]) begin
            failures++;
            if (failures < 10) $display("block %0d word %0d lane %0d got %0d exp %0d", b, a, l, ord[b][l], yref[b][a*LANES + l]);
          end
        end
      end
      checks++;
      if (satdut[b] != satref[b] || satref[b] == 0) begin failures++; $display("block %0d sat groups %0d exp %0d", b, satdut[b], satref[b]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
