// nb_top_driver: stimulus and golden model for end-to-end tests of
// neuroblend_top, shared by the reduced-size and the full-size testbench.
//
// It draws random thresholds, binary weights, BN/PReLU coefficients, skip
// conv and linear-layer weights and a random input map, loads them through
// the configuration bus and the input-map port, runs one frame and compares
// the ten logits and each block's count of saturated residual sums with an
// integer reference model written directly from the block equations (no RTL
// module is reused). It also counts how often each mechanism of the design
// occurs in the reference (downsample skip path, identity skip, systolic
// array tiling, fused and applied output BN, PReLU negative branch, residual
// saturation, padded taps, partly filled 48-bit words) and counts a failure
// for any that never happens. A watchdog ends the run after MAX_CYC cycles.
module nb_top_driver
  import nb_pkg::*;
#(
  parameter int IMG     = 8,
  parameter int C0      = 16,
  parameter int NCLS    = 10,
  parameter int MAX_CYC = 2000000
) (
  output logic               clk,
  output logic               rst_n,
  output cfg_wr_t            cfg,
  output logic               in_we,
  output logic [ADDR_W-1:0]  in_waddr,
  output act_t               in_wdata [LANES],
  output logic               start,
  input  logic               busy,
  input  logic               done,
  input  logic signed [31:0] logit [NCLS],
  input  logic [8:0]         sat_evt
);
  localparam int NB   = 9;
  localparam int CMAX = 4 * C0;
  localparam int FMSZ = IMG * IMG * C0;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // Mechanism counters.
  int n_down = 0, n_ident = 0, n_tiles2 = 0, n_obn_fused = 0, n_obn_applied = 0;
  int n_prelu_neg = 0, n_sat = 0, n_pad = 0, n_partial = 0;

  // Network parameters.
  int  th    [NB][CMAX];
  bit  bw    [NB][CMAX][9][CMAX];
  int  bn1a  [NB][CMAX], bn1b [NB][CMAX], alph [NB][CMAX], oba [NB][CMAX], obb [NB][CMAX];
  int  fw    [NB][CMAX][CMAX], fb [NB][CMAX];
  int  fcw   [NCLS][CMAX], fcb [NCLS];
  int  fm    [NB+1][FMSZ];
  longint ref_logit [NCLS];
  int  ref_sat [NB];
  int  dut_sat [NB];

  function automatic longint sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // Block geometry, as in the top: stages of three blocks.
  function automatic void geom(int i, output int ci, output int co, output int hi, output bit dn, output bit obn);
    automatic int s = i / 3;
    dn  = (i == 3) || (i == 6);
    co  = C0 << s;
    ci  = dn ? co / 2 : co;
    hi  = dn ? (IMG >> s) * 2 : (IMG >> s);
    obn = !((i == 2) || (i == 5));
  endfunction

  // Golden model of one block: fm[i] -> fm[i+1].
  task automatic ref_block(int i);
    automatic int ci, co, hi, ho, st; bit dn, obn;
    bit bin [];
    geom(i, ci, co, hi, dn, obn);
    st = dn ? 2 : 1;
    ho = hi / st;
    bin = new[hi * hi * ci];
    for (int p = 0; p < hi * hi; p++)
      for (int c = 0; c < ci; c++) bin[p*ci + c] = fm[i][p*ci + c] > th[i][c];
    if (dn) begin n_down++; if (co > 32) n_tiles2++; end else n_ident++;
    if (obn) n_obn_applied++; else n_obn_fused++;
    if (ci > 48) n_partial++;
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < ho; ox++) begin
        longint pooled [CMAX];
        bit any_sat [CMAX/16];
        for (int g = 0; g < co / 16; g++) any_sat[g] = 0;
        if (dn)
          for (int c = 0; c < ci; c++) begin
            automatic longint s4 = 0;
            for (int k = 0; k < 4; k++) s4 += fm[i][((2*oy + k/2) * hi + 2*ox + k%2) * ci + c];
            pooled[c] = s4 >>> 2;
          end
        for (int o = 0; o < co; o++) begin
          automatic longint acc = 0, m, skip, s, y;
          for (int t = 0; t < 9; t++) begin
            automatic int iy = oy*st + t/3 - 1, ix = ox*st + t%3 - 1;
            if (iy < 0 || iy >= hi || ix < 0 || ix >= hi) begin n_pad++; continue; end
            for (int c = 0; c < ci; c++)
              acc += (bin[(iy*hi + ix)*ci + c] == bw[i][o][t][c]) ? 1 : -1;
          end
          m = sat(acc * bn1a[i][o] + bn1b[i][o]);
          if (m < 0) begin n_prelu_neg++; m = sat((alph[i][o] * m) >>> 8); end
          if (dn) begin
            automatic longint d = 0;
            for (int c = 0; c < ci; c++) d += fw[i][o][c] * pooled[c];
            skip = sat((d >>> 8) + fb[i][o]);
          end else skip = fm[i][(oy*ho + ox)*ci + o];
          s = m + skip;
          if (s != sat(s)) begin any_sat[o/16] = 1; n_sat++; end
          s = sat(s);
          y = obn ? sat(((s * oba[i][o]) >>> 8) + obb[i][o]) : s;
          fm[i+1][(oy*ho + ox)*co + o] = int'(y);
        end
        for (int g = 0; g < co / 16; g++) ref_sat[i] += any_sat[g];
      end
  endtask

  task automatic ref_head();
    automatic int hw = (IMG/4) * (IMG/4), sh = $clog2((IMG/4) * (IMG/4));
    longint pooled [CMAX];
    for (int c = 0; c < CMAX; c++) begin
      automatic longint s = 0;
      for (int p = 0; p < hw; p++) s += fm[NB][p*CMAX + c];
      pooled[c] = s >>> sh;
    end
    for (int o = 0; o < NCLS; o++) begin
      automatic longint s = 0;
      for (int c = 0; c < CMAX; c++) s += fcw[o][c] * pooled[c];
      ref_logit[o] = longint'(int'(s >>> 8)) + fcb[o];
    end
  endtask

  // One configuration write; the bus keeps we high across back-to-back
  // writes and is cleared once loading is over.
  task automatic cfg_write(int blk, cfg_sel_e sel, int addr, logic [47:0] data);
    cfg_wr_t w;
    w.we = 1'b1; w.blk = 4'(blk); w.sel = sel; w.addr = ADDR_W'(addr); w.data = data;
    cfg <= w;
    @(posedge clk);
  endtask

  initial begin clk = 0; forever #5 clk = ~clk; end
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) for (int i = 0; i < NB; i++) if (sat_evt[i]) dut_sat[i]++;

  initial begin
    repeat (MAX_CYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    automatic longint t0, t1;
    rst_n = 0; cfg = '0; in_we = 0; in_waddr = '0; start = 0;
    for (int l = 0; l < LANES; l++) in_wdata[l] = '0;
    for (int i = 0; i < NB; i++) begin ref_sat[i] = 0; dut_sat[i] = 0; end
    // Random network.
    for (int i = 0; i < NB; i++) begin
      automatic int ci, co, hi; bit dn, obn;
      geom(i, ci, co, hi, dn, obn);
      for (int c = 0; c < CMAX; c++) begin
        th[i][c]   = rnd(-256, 256);
        bn1a[i][c] = (i == 0 && c < 2) ? 3000 : rnd(8, 80);
        bn1b[i][c] = rnd(-512, 512);
        alph[i][c] = rnd(16, 96);
        oba[i][c]  = rnd(128, 384);
        obb[i][c]  = rnd(-128, 128);
        fb[i][c]   = rnd(-256, 256);
        for (int t = 0; t < 9; t++) for (int k = 0; k < CMAX; k++) bw[i][c][t][k] = 1'($urandom);
        for (int k = 0; k < CMAX; k++) fw[i][c][k] = rnd(-64, 64);
      end
    end
    for (int o = 0; o < NCLS; o++) begin
      fcb[o] = rnd(-256, 256);
      for (int c = 0; c < CMAX; c++) fcw[o][c] = rnd(-128, 128);
    end
    for (int k = 0; k < FMSZ; k++) fm[0][k] = rnd(-1024, 1024);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // Load parameters.
    for (int i = 0; i < NB; i++) begin
      automatic int ci, co, hi, nw; bit dn, obn;
      geom(i, ci, co, hi, dn, obn);
      nw = (ci + 47) / 48;
      for (int c = 0; c < ci; c++) cfg_write(i, CFG_TH, c, 48'(th[i][c]));
      for (int o = 0; o < co; o++) begin
        cfg_write(i, CFG_BN1_A, o, 48'(bn1a[i][o]));
        cfg_write(i, CFG_BN1_B, o, 48'(bn1b[i][o]));
        cfg_write(i, CFG_PRELU, o, 48'(alph[i][o]));
        cfg_write(i, CFG_OBN_A, o, 48'(oba[i][o]));
        cfg_write(i, CFG_OBN_B, o, 48'(obb[i][o]));
        for (int t = 0; t < 9; t++)
          for (int w = 0; w < nw; w++) begin
            automatic logic [47:0] d = '0;
            for (int k = 0; k < 48; k++) if (w*48 + k < ci) d[k] = bw[i][o][t][w*48 + k];
            cfg_write(i, CFG_BW, (o*9 + t)*nw + w, d);
          end
        if (dn) begin
          cfg_write(i, CFG_FB, o, 48'(fb[i][o]));
          for (int c = 0; c < ci; c++) cfg_write(i, CFG_FW, o*ci + c, 48'(fw[i][o][c]));
        end
      end
    end
    for (int o = 0; o < NCLS; o++) begin
      cfg_write(0, CFG_FCB, o, 48'(fcb[o]));
      for (int c = 0; c < CMAX; c++) cfg_write(0, CFG_FCW, o*CMAX + c, 48'(fcw[o][c]));
    end
    cfg <= '0;
    // Load the input map, 16 channels per word.
    for (int a = 0; a < FMSZ / LANES; a++) begin
      in_we <= 1; in_waddr <= ADDR_W'(a);
      for (int l = 0; l < LANES; l++) in_wdata[l] <= act_t'(fm[0][a*LANES + l]);
      @(posedge clk);
    end
    in_we <= 0;

    // Reference.
    for (int i = 0; i < NB; i++) ref_block(i);
    ref_head();

    // Run one frame.
    @(posedge clk);
    start <= 1; t0 = cyc;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    t1 = cyc;
    @(posedge clk);

    for (int o = 0; o < NCLS; o++) begin
      checks++;
      if (longint'(logit[o]) != ref_logit[o]) begin
        failures++;
        $display("logit %0d: got %0d expected %0d", o, logit[o], ref_logit[o]);
      end
    end
    for (int i = 0; i < NB; i++) begin
      checks++;
      if (dut_sat[i] != ref_sat[i]) begin
        failures++;
        $display("block %0d saturated groups: got %0d expected %0d", i, dut_sat[i], ref_sat[i]);
      end
    end
    checks++;
    if (busy) begin failures++; $display("busy still high after done"); end

    $display("frame took %0d cycles (IMG=%0d)", t1 - t0, IMG);
    $display("mechanisms: downsample=%0d identity=%0d two-tile=%0d obn_fused=%0d obn_applied=%0d prelu_neg=%0d sat=%0d pad=%0d partial_word=%0d",
             n_down, n_ident, n_tiles2, n_obn_fused, n_obn_applied, n_prelu_neg, n_sat, n_pad, n_partial);
    foreach (ref_sat[i]) ;
    checks++; if (n_down == 0)        begin failures++; $display("never: downsample skip"); end
    checks++; if (n_ident == 0)       begin failures++; $display("never: identity skip"); end
    checks++; if (n_tiles2 == 0)      begin failures++; $display("never: two array tiles"); end
    checks++; if (n_obn_fused == 0)   begin failures++; $display("never: fused output BN"); end
    checks++; if (n_obn_applied == 0) begin failures++; $display("never: applied output BN"); end
    checks++; if (n_prelu_neg == 0)   begin failures++; $display("never: PReLU negative"); end
    checks++; if (n_sat == 0)         begin failures++; $display("never: residual saturation"); end
    checks++; if (n_pad == 0)         begin failures++; $display("never: padding"); end
    checks++; if (n_partial == 0)     begin failures++; $display("never: partly filled word"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
