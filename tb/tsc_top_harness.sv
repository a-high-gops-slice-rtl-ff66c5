// tsc_top_harness: end-to-end test environment for tsc_top.
//
// For each configuration in CFGS it draws random weights and inputs, loads the
// weights through the weight-bank write port, runs a whole sequence of q
// windows and compares, against a bit-exact reference model written here from
// the arithmetic rules (not from the RTL):
//   * h and c after every window (read hierarchically from the memories),
//   * the class scores and the label,
//   * the number of cycles spent in each controller state against the cycle
//     formulas of the controller.
// It also counts how often each mechanism occurred (CNN on and off, ReLU
// clipping, saturation, tanh range clamp, skipped classification on
// non-final windows, units switched off) and counts a failure for any that
// never did; with REQUIRE_FILTER_GROUPS it also requires a convolution layer
// of more than 32 filters (two lane groups). Reference look-up tables are computed with real arithmetic:
// f(u_min + (i + 0.5) * du) * 256, rounded.
module tsc_top_harness
  import tsc_pkg::*;
#(
  parameter int unsigned NCFG = 2,
  parameter cfg_t        CFGS [NCFG] = '{default: '0},
  parameter int unsigned WATCHDOG_CYCLES = 2_000_000,
  parameter bit          REQUIRE_ALL_MECHANISMS = 1'b1,
  parameter bit          REQUIRE_FILTER_GROUPS  = 1'b0
)();

  localparam int unsigned NHM = 350, XM = 1280, FMM = 2500, NYM = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t            cfg;
  logic            wb_wr_en = 1'b0;
  wb_bank_e        wb_wr_bank = WB_CNN;
  logic [16:0]     wb_wr_addr = '0;
  logic [WB_W-1:0] wb_wr_data = '0;
  logic            x_wr_en = 1'b0;
  logic [11:0]     x_wr_addr = '0;
  data_t           x_wr_data = '0;
  logic            start = 1'b0, win_valid = 1'b0, win_ready;
  logic            out_valid;
  logic [4:0]      label;
  logic [4:0]      y_rd_addr = '0;
  data_t           y_rd_data;
  logic            busy, en_macs, en_nfs, en_ims, en_wbs;
  mc_state_e       state;
  logic [7:0]      step;

  tsc_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- watchdog ----------------
  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference look-up tables ----------------
  int sig_tab [64], tanh_tab [64];
  function automatic real sigm(real u); return 1.0 / (1.0 + $exp(-u)); endfunction
  function automatic real tanh_r(real u); return (1.0 - $exp(-2.0*u)) / (1.0 + $exp(-2.0*u)); endfunction
  function automatic int rnd(real v); return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5)); endfunction
  initial begin
    for (int i = 0; i < 64; i++) begin
      sig_tab[i]  = rnd(256.0 * sigm(-8.0 + (i + 0.5) * 0.25));
      tanh_tab[i] = rnd(256.0 * tanh_r(-4.0 + (i + 0.5) * 0.125));
    end
  end

  int n_relu_clip = 0, n_sat = 0, n_tanh_clamp = 0;
  function automatic int sat(longint v);
    if (v > 2047)  begin n_sat++; return 2047;  end
    if (v < -2048) begin n_sat++; return -2048; end
    return int'(v);
  endfunction
  function automatic int asr8(longint v); return int'(v >>> 8); endfunction
  function automatic int f_sig(int u);
    int a = int'($floor((real'(u) / 256.0 + 8.0) / 0.25));
    return sig_tab[a];
  endfunction
  function automatic int f_tanh(int u);
    int a = int'($floor((real'(u) / 256.0 + 4.0) / 0.125));
    if (a < 0)  begin a = 0;  n_tanh_clamp++; end
    if (a > 63) begin a = 63; n_tanh_clamp++; end
    return tanh_tab[a];
  endfunction
  function automatic int tern_rand(); int r = $urandom_range(0, 3); return (r == 0) ? -1 : (r == 1) ? 1 : 0; endfunction
  function automatic logic [1:0] tcode(int w); return (w == 1) ? 2'b01 : (w == -1) ? 2'b11 : 2'b00; endfunction

  // ---------------- weights and state of the reference ----------------
  byte   w1  [64][128][7];        // [o][ch][a]
  byte   w2  [64][64][7];
  int    wfc [][];                // [j][k]
  byte   wg  [4][NHM][];          // [gate][n][k]
  int    wy  [NYM][NHM];
  int    xr  [XM];
  int    fm1 [FMM], fm2 [FMM], xin [XM];
  int    h   [NHM], c [NHM];
  int    g   [4][NHM];

  // mechanism counters
  int n_filter_groups = 0;
  int n_cnn_on = 0, n_cnn_off = 0, n_s8_skip = 0, n_gated = 0, n_class = 0;

  // cycles per state (of one window)
  int st_cycles [16];
  always @(posedge clk) if (rst_n) st_cycles[state] <= st_cycles[state] + 1;
  always @(posedge clk) if (state == ST_S3 && !en_nfs && en_macs) n_gated <= n_gated + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic wb_write(wb_bank_e b, int addr, logic [WB_W-1:0] d);
    @(negedge clk);
    wb_wr_en = 1'b1; wb_wr_bank = b; wb_wr_addr = 17'(addr); wb_wr_data = d;
    @(negedge clk);
    wb_wr_en = 1'b0;
  endtask

  task automatic run_cfg(cfg_t cf);
    int lx, n1, n2, kfc, kg, passes;
    int exp_cyc;
    int g1 = 1, g2 = 1;
    cfg = cf;
    lx = int'(cf.m_ch) * int'(cf.win);
    n1 = int'(cf.win) - int'(cf.k1) + 1;
    n2 = n1 - int'(cf.k2) + 1;
    kfc = int'(cf.f2) * n2;
    kg  = int'(cf.nh) + lx;
    if (cf.cnn_en) n_cnn_on++; else n_cnn_off++;
    if (cf.cnn_en && (cf.f1 > 6'd32 || cf.f2 > 6'd32)) n_filter_groups++;

    // ---- draw and load weights ----
    if (cf.cnn_en) begin
      // filter groups of 32 lanes; group g of a layer follows group g-1
      g1 = (int'(cf.f1) + 31) / 32;
      g2 = (int'(cf.f2) + 31) / 32;
      for (int o = 0; o < int'(cf.f1); o++)
        for (int ch = 0; ch < int'(cf.m_ch); ch++)
          for (int a = 0; a < int'(cf.k1); a++) w1[o][ch][a] = byte'(tern_rand());
      for (int o = 0; o < int'(cf.f2); o++)
        for (int ch = 0; ch < int'(cf.f1); ch++)
          for (int a = 0; a < int'(cf.k2); a++) w2[o][ch][a] = byte'(tern_rand());
      for (int g = 0; g < g1; g++)
        for (int ch = 0; ch < int'(cf.m_ch); ch++)
          for (int a = 0; a < int'(cf.k1); a++) begin
            logic [WB_W-1:0] wd = '0;
            for (int l = 0; l < 32 && 32*g + l < int'(cf.f1); l++) wd[2*l +: 2] = tcode(int'(w1[32*g + l][ch][a]));
            wb_write(WB_CNN, (g*int'(cf.m_ch) + ch)*int'(cf.k1) + a, wd);
          end
      for (int g = 0; g < g2; g++)
        for (int ch = 0; ch < int'(cf.f1); ch++)
          for (int a = 0; a < int'(cf.k2); a++) begin
            logic [WB_W-1:0] wd = '0;
            for (int l = 0; l < 32 && 32*g + l < int'(cf.f2); l++) wd[2*l +: 2] = tcode(int'(w2[32*g + l][ch][a]));
            wb_write(WB_CNN, g1*int'(cf.m_ch)*int'(cf.k1) + (g*int'(cf.f1) + ch)*int'(cf.k2) + a, wd);
          end
      wfc = new[(lx + 3) / 4 * 4];
      foreach (wfc[j]) begin
        wfc[j] = new[kfc];
        foreach (wfc[j][k]) wfc[j][k] = (j < lx) ? $urandom_range(0, 96) - 48 : 0;
      end
      for (int p = 0; p < (lx + 3) / 4; p++)
        for (int k = 0; k < kfc; k++) begin
          logic [WB_W-1:0] wd = '0;
          for (int l = 0; l < 4; l++) wd[12*l +: 12] = 12'(wfc[4*p + l][k]);
          wb_write(WB_FC, p*kfc + k, wd);
        end
    end
    for (int gi = 0; gi < 4; gi++)
      for (int n = 0; n < NHM; n++) begin
        wg[gi][n] = new[kg];
        foreach (wg[gi][n][k]) wg[gi][n][k] = (n < int'(cf.nh)) ? byte'(tern_rand()) : 8'sd0;
      end
    passes = (int'(cf.nh) + 7) / 8;
    for (int p = 0; p < passes; p++)
      for (int k = 0; k < kg; k++) begin
        logic [WB_W-1:0] wd = '0;
        for (int gi = 0; gi < 4; gi++)
          for (int e = 0; e < 8; e++)
            if (8*p + e < int'(cf.nh)) wd[16*gi + 2*e +: 2] = tcode(int'(wg[gi][8*p + e][k]));
        wb_write(WB_LSTM, p*kg + k, wd);
      end
    for (int p = 0; p < int'(cf.ny); p++)
      for (int k = 0; k < int'(cf.nh); k++) begin
        wy[p][k] = $urandom_range(0, 256) - 128;
        wb_write(WB_Y, p*int'(cf.nh) + k, WB_W'(12'(wy[p][k])));
      end

    // ---- run the sequence ----
    for (int j = 0; j < int'(cf.nh); j++) begin h[j] = 0; c[j] = 0; end
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    for (int s = 0; s < int'(cf.q); s++) begin
      int max_v, max_i;
      wait (win_ready);
      @(negedge clk);
      for (int i = 0; i < lx; i++) begin
        xr[i] = $urandom_range(0, 1024) - 512;
        x_wr_en = 1'b1; x_wr_addr = 12'(i); x_wr_data = 12'(xr[i]);
        @(negedge clk);
      end
      x_wr_en = 1'b0;
      foreach (st_cycles[i]) st_cycles[i] = 0;
      win_valid = 1'b1; @(negedge clk); win_valid = 1'b0;

      // reference: CNN branch
      if (cf.cnn_en) begin
        for (int o = 0; o < int'(cf.f1); o++)
          for (int i = 0; i < n1; i++) begin
            longint acc = 0;
            for (int ch = 0; ch < int'(cf.m_ch); ch++)
              for (int a = 0; a < int'(cf.k1); a++) acc += w1[o][ch][a] * xr[ch*int'(cf.win) + i + a];
            fm1[o*n1 + i] = sat(acc);
            if (fm1[o*n1 + i] < 0) begin fm1[o*n1 + i] = 0; n_relu_clip++; end
          end
        for (int o = 0; o < int'(cf.f2); o++)
          for (int i = 0; i < n2; i++) begin
            longint acc = 0;
            for (int ch = 0; ch < int'(cf.f1); ch++)
              for (int a = 0; a < int'(cf.k2); a++) acc += w2[o][ch][a] * fm1[ch*n1 + i + a];
            fm2[o*n2 + i] = sat(acc);
            if (fm2[o*n2 + i] < 0) begin fm2[o*n2 + i] = 0; n_relu_clip++; end
          end
        for (int j = 0; j < lx; j++) begin
          longint acc = 0;
          for (int k = 0; k < kfc; k++) acc += longint'(wfc[j][k]) * fm2[k];
          xin[j] = sat(longint'(sat(longint'(asr8(acc)))) + longint'(xr[j]));
        end
      end else
        for (int j = 0; j < lx; j++) xin[j] = xr[j];
      // reference: LSTM
      for (int gi = 0; gi < 4; gi++)
        for (int n = 0; n < int'(cf.nh); n++) begin
          longint acc = 0;
          for (int k = 0; k < kg; k++) acc += longint'(wg[gi][n][k]) * ((k < int'(cf.nh)) ? longint'(h[k]) : longint'(xin[k - int'(cf.nh)]));
          g[gi][n] = sat(acc);
        end
      for (int n = 0; n < int'(cf.nh); n++) begin
        int hf = f_sig(g[0][n]), hi = f_sig(g[1][n]), ho = f_sig(g[2][n]), hc = f_tanh(g[3][n]);
        c[n] = sat(longint'(asr8(longint'(hf) * c[n] + longint'(hc) * hi)));
        h[n] = sat(longint'(asr8(longint'(ho) * f_tanh(c[n]))));
      end

      // wait for the window to finish
      if (s == int'(cf.q) - 1) begin
        wait (out_valid);
        @(negedge clk);
      end else begin
        wait (win_ready);
        n_s8_skip++;
      end
      for (int n = 0; n < int'(cf.nh); n++) begin
        check(dut.u_im.h_mem[n] == 12'(h[n]), $sformatf("cfg cnn=%0d step %0d h[%0d] dut=%0d ref=%0d", cf.cnn_en, s, n, dut.u_im.h_mem[n], h[n]));
        check(dut.u_im.c_mem[n] == 12'(c[n]), $sformatf("cfg cnn=%0d step %0d c[%0d] dut=%0d ref=%0d", cf.cnn_en, s, n, dut.u_im.c_mem[n], c[n]));
      end
      if (cf.cnn_en) begin
        exp_cyc = n1*(g1*int'(cf.m_ch)*int'(cf.k1) + int'(cf.f1)) + n2*(g2*int'(cf.f1)*int'(cf.k2) + int'(cf.f2));
        check(st_cycles[ST_S1] == exp_cyc, $sformatf("S1 cycles %0d expected %0d", st_cycles[ST_S1], exp_cyc));
        exp_cyc = (lx + 3) / 4 * (kfc + 4);
        check(st_cycles[ST_S2] == exp_cyc, $sformatf("S2 cycles %0d expected %0d", st_cycles[ST_S2], exp_cyc));
      end else
        check(st_cycles[ST_S1] == 0 && st_cycles[ST_S2] == 0, "CNN states skipped when CNN is off");
      exp_cyc = passes * (kg + 32);
      check(st_cycles[ST_S3] == exp_cyc, $sformatf("S3 cycles %0d expected %0d", st_cycles[ST_S3], exp_cyc));
      for (int st = int'(ST_S4); st <= int'(ST_S7); st++)
        check(st_cycles[st] == int'(cf.nh), $sformatf("state %0d cycles %0d expected N_h=%0d", st, st_cycles[st], cf.nh));
      if (s == int'(cf.q) - 1) begin
        exp_cyc = int'(cf.ny) * (int'(cf.nh) + 1);
        check(st_cycles[ST_S8] == exp_cyc, $sformatf("S8 cycles %0d expected %0d", st_cycles[ST_S8], exp_cyc));
        // scores and label
        max_v = -100000; max_i = 0;
        for (int p = 0; p < int'(cf.ny); p++) begin
          longint acc = 0;
          int yv;
          for (int k = 0; k < int'(cf.nh); k++) acc += longint'(wy[p][k]) * h[k];
          yv = sat(longint'(asr8(acc)));
          y_rd_addr = 5'(p); #1;
          check(y_rd_data == 12'(yv), $sformatf("score %0d dut=%0d ref=%0d", p, y_rd_data, yv));
          if (yv > max_v) begin max_v = yv; max_i = p; end
        end
        check(label == 5'(max_i), $sformatf("label dut=%0d ref=%0d", label, max_i));
        n_class++;
      end else
        check(st_cycles[ST_S8] == 1, "S8 passes straight to the next window");
    end
  endtask

  initial begin
    cfg = CFGS[0];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < int'(NCFG); i++) begin
      run_cfg(CFGS[i]);
      $display("configuration %0d done at cycle %0d: checks=%0d failures=%0d", i, cyc, checks, failures);
    end
    $display("mechanisms: cnn_on=%0d cnn_off=%0d relu_clip=%0d saturation=%0d tanh_clamp=%0d window_without_output=%0d classifications=%0d units_off=%0d",
             n_cnn_on, n_cnn_off, n_relu_clip, n_sat, n_tanh_clamp, n_s8_skip, n_class, n_gated);
    if (REQUIRE_ALL_MECHANISMS) begin
      check(n_cnn_on > 0,     "CNN-enabled mode never ran");
      check(n_cnn_off > 0,    "CNN-bypass mode never ran");
      check(n_relu_clip > 0,  "ReLU never clipped");
      check(n_sat > 0,        "saturation never happened");
      check(n_tanh_clamp > 0, "tanh range clamp never happened");
      check(n_s8_skip > 0,    "no window passed without classification");
    end
    $display("filter_groups=%0d", n_filter_groups);
    if (REQUIRE_FILTER_GROUPS) check(n_filter_groups > 0, "no layer with more than 32 filters ran");
    check(n_class > 0,      "no classification");
    check(n_gated > 0,      "NF unit never switched off during MAC work");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
