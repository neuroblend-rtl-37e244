// tb_bnn_conv3x3: two engines on random binary maps and weights: a stride-1
// engine with 16 input channels (one partly used 48-bit word) and a stride-2
// engine with 64 input channels (a full and a partly used word) and 32
// output channels (two groups). Every output beat is compared with a direct
// +/-1 convolution with padding taps skipped. Timing: the first beat's
// out_valid rises 9*NW + 1 edges after the edge that samples start (the
// testbench sees it 9*NW + 3 edges after the edge where it drives start), and
// later beats follow every 9*NW cycles.
module tb_bnn_conv3x3;
  import nb_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  longint cyc = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // stable at rising edges
  initial begin
    repeat (60000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Engine A: 6x6, CIN 16, COUT 16, stride 1.   Engine B: 6x6, CIN 64, COUT 32, stride 2.
  localparam int H = 6;
  bit  mapA [H*H][16], mapB [H*H][64];
  bit  wA [16][9][16], wB [32][9][64];
  logic st_a = 0, st_b = 0;
  logic busy_a, done_a, v_a, busy_b, done_b, v_b;
  logic [ADDR_W-1:0] ra_a, ra_b, pix_a, pix_b;
  logic [7:0] g_a, g_b;
  act_t s_a [16], s_b [16];
  logic [47:0] rd_a;
  logic [95:0] rd_b;

  always_comb begin
    rd_a = '0; rd_b = '0;
    for (int c = 0; c < 16; c++) rd_a[c] = mapA[int'(ra_a) % (H*H)][c];
    for (int c = 0; c < 64; c++) rd_b[c] = mapB[int'(ra_b) % (H*H)][c];
    rd_a[47:16] = 32'($urandom);   // unused channel bits must be ignored
  end

  bnn_conv3x3 #(.H(H), .W(H), .CIN(16), .COUT(16), .STRIDE(1), .BLK_ID(1)) ua (
    .clk, .rst_n, .cfg, .start(st_a), .busy(busy_a), .done(done_a), .b_raddr(ra_a), .b_rdata(rd_a),
    .out_valid(v_a), .out_pix(pix_a), .out_grp(g_a), .out_sum(s_a));
  bnn_conv3x3 #(.H(H), .W(H), .CIN(64), .COUT(32), .STRIDE(2), .BLK_ID(2)) ub (
    .clk, .rst_n, .cfg, .start(st_b), .busy(busy_b), .done(done_b), .b_raddr(ra_b), .b_rdata(rd_b),
    .out_valid(v_b), .out_pix(pix_b), .out_grp(g_b), .out_sum(s_b));

  function automatic int refA(int p, int o);
    automatic int oy = p / H, ox = p % H, s = 0;
    for (int t = 0; t < 9; t++) begin
      automatic int iy = oy + t/3 - 1, ix = ox + t%3 - 1;
      if (iy < 0 || iy >= H || ix < 0 || ix >= H) continue;
      for (int c = 0; c < 16; c++) s += (mapA[iy*H + ix][c] == wA[o][t][c]) ? 1 : -1;
    end
    return s;
  endfunction
  function automatic int refB(int p, int o);
    automatic int oy = p / (H/2), ox = p % (H/2), s = 0;
    for (int t = 0; t < 9; t++) begin
      automatic int iy = 2*oy + t/3 - 1, ix = 2*ox + t%3 - 1;
      if (iy < 0 || iy >= H || ix < 0 || ix >= H) continue;
      for (int c = 0; c < 64; c++) s += (mapB[iy*H + ix][c] == wB[o][t][c]) ? 1 : -1;
    end
    return s;
  endfunction

  int na = 0, nb = 0;
  longint t_start, last_a, last_b;
  always @(posedge clk) if (rst_n) begin
    if (v_a) begin
      checks++;
      if (int'(pix_a) != na || g_a != 0) begin failures++; $display("A order: pix %0d grp %0d at beat %0d", pix_a, g_a, na); end
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (int'(s_a[k]) != refA(int'(pix_a), k)) begin failures++; $display("A pix %0d ch %0d got %0d exp %0d", pix_a, k, s_a[k], refA(int'(pix_a), k)); end
      end
      checks++;
      if (na == 0 ? (cyc - t_start != 9 + 3) : (cyc - last_a != 9)) begin failures++; $display("A timing beat %0d at %0d", na, cyc - t_start); end
      last_a = cyc; na++;
    end
    if (v_b) begin
      checks++;
      if (int'(pix_b) != nb / 2 || int'(g_b) != nb % 2) begin failures++; $display("B order: pix %0d grp %0d at beat %0d", pix_b, g_b, nb); end
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (int'(s_b[k]) != refB(int'(pix_b), int'(g_b)*16 + k)) begin failures++; $display("B pix %0d ch %0d got %0d", pix_b, int'(g_b)*16+k, s_b[k]); end
      end
      checks++;
      if (nb == 0 ? (cyc - t_start != 18 + 3) : (cyc - last_b != 18)) begin failures++; $display("B timing beat %0d", nb); end
      last_b = cyc; nb++;
    end
  end

  task automatic wr(int blk, int addr, logic [47:0] d);
    cfg_wr_t w;
    w.we = 1; w.blk = 4'(blk); w.sel = CFG_BW; w.addr = ADDR_W'(addr); w.data = d;
    cfg <= w; @(posedge clk);
  endtask

  initial begin
    cfg = '0;
    foreach (mapA[p, c]) mapA[p][c] = 1'($urandom);
    foreach (mapB[p, c]) mapB[p][c] = 1'($urandom);
    foreach (wA[o, t, c]) wA[o][t][c] = 1'($urandom);
    foreach (wB[o, t, c]) wB[o][t][c] = 1'($urandom);
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int o = 0; o < 16; o++) for (int t = 0; t < 9; t++) begin
      automatic logic [47:0] d = 48'($urandom) << 16;   // bits above CIN are don't-care
      for (int c = 0; c < 16; c++) d[c] = wA[o][t][c];
      wr(1, o*9 + t, d);
    end
    for (int o = 0; o < 32; o++) for (int t = 0; t < 9; t++) for (int w = 0; w < 2; w++) begin
      automatic logic [47:0] d = '0;
      for (int k = 0; k < 48; k++) if (w*48 + k < 64) d[k] = wB[o][t][w*48 + k];
      wr(2, (o*9 + t)*2 + w, d);
    end
    cfg <= '0;
    @(posedge clk);
    st_a <= 1; st_b <= 1; t_start = cyc;
    @(posedge clk);
    st_a <= 0; st_b <= 0;
    @(posedge clk);
    while (busy_a || busy_b) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++; if (na != H*H)       begin failures++; $display("A beats %0d", na); end
    checks++; if (nb != (H/2)*(H/2)*2) begin failures++; $display("B beats %0d", nb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
