// tb_tsc_mc: test of the master controller on its own.
//
// Runs a CNN-LSTM sequence, an LSTM-only sequence and a CNN-LSTM sequence
// whose layers have more than 32 filters, and records, cycle by
// cycle, what the controller issues. Checks against lists built here from the
// documented schedule:
//   * every accumulate issue (weight bank and address, activation buffer and
//     address) of every pass of S1 (both convolution layers, both filter
//     groups), S2, S3 and S8,
//   * every MAC write-back (destination buffer, address, lane, ReLU / residual),
//   * the cycles spent in each state,
//   * that each issue has its unit enabled in the cycle it is used,
//   * the arg-max: scores are fed back through wr_value with a known maximum,
//   * one out_valid per sequence and win_ready only between windows.
module tb_tsc_mc;
  import tsc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic start = 0, win_valid = 0;
  data_t wr_value;
  mc_state_e state;
  logic busy, win_ready, out_valid;
  logic [4:0] label;
  logic [7:0] step;
  logic en_macs, en_nfs, en_ims, en_wbs;
  wb_bank_e wb_bank;
  logic [16:0] wb_addr;
  im_sel_e act_sel, wr_sel;
  logic [11:0] act_addr, vec_addr, wr_addr, vwr_addr;
  logic mac_acc_en, mac_first, wr_en, wr_addx, vwr_en;
  mac_mode_e mac_mode;
  wr_src_e wr_src;
  logic [4:0] wr_lane;
  nf_func_e wr_func;
  int checks = 0, failures = 0;
  int target;

  tsc_mc dut (.*);

  // scores: class 'target' gets the largest value
  assign wr_value = (wr_sel == IM_Y && wr_en) ? ((32'(wr_addr) == target) ? 12'sd900 : data_t'(12'(wr_addr) * 12'd7 - 12'd40)) : '0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // observed issues
  typedef struct { int bank, waddr, sel, aaddr; } acc_t;
  typedef struct { int sel, addr, lane, func, addx; } wbk_t;
  acc_t got_acc [$];
  wbk_t got_wb  [$];
  int st_cycles [16];
  int n_out = 0, bad_en = 0;

  always @(posedge clk) if (rst_n) begin
    st_cycles[state]++;
    if (mac_acc_en) got_acc.push_back('{int'(wb_bank), int'(wb_addr), int'(act_sel), int'(act_addr)});
    if (wr_en && wr_src == WR_MAC) got_wb.push_back('{int'(wr_sel), int'(wr_addr), int'(wr_lane), int'(wr_func), int'(wr_addx)});
    if (mac_acc_en && !(en_wbs && en_macs && en_ims)) bad_en++;
    if (vwr_en && !(en_nfs && en_ims)) bad_en++;
    if (wr_en && (wr_src == WR_CELL || wr_src == WR_HID) && !en_macs) bad_en++;
    if (wr_en && wr_func != NF_PASS && !en_nfs) bad_en++;
    if (out_valid) n_out++;
  end

  task automatic run(cfg_t cf, int tgt);
    acc_t exp_acc [$];
    wbk_t exp_wb  [$];
    int lx = int'(cf.m_ch) * int'(cf.win);
    int n1 = int'(cf.win) - int'(cf.k1) + 1, n2 = n1 - int'(cf.k2) + 1;
    int nh = int'(cf.nh);
    int w;
    int g1 = (int'(cf.f1) + 31) / 32, g2 = (int'(cf.f2) + 31) / 32;
    cfg = cf; target = tgt;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int s = 0; s < int'(cf.q); s++) begin
      exp_acc.delete(); exp_wb.delete();
      got_acc.delete(); got_wb.delete();
      wait (win_ready);
      chk(!busy, "not busy while waiting for a window");
      @(negedge clk);
      foreach (st_cycles[i]) st_cycles[i] = 0;
      win_valid = 1; @(negedge clk); win_valid = 0;
      if (cf.cnn_en) begin
        // layers of more than 32 filters run as groups of 32 lanes
        for (int g = 0; g < g1; g++)
          for (int p = 0; p < n1; p++) begin
            w = g * int'(cf.m_ch) * int'(cf.k1);
            for (int ch = 0; ch < int'(cf.m_ch); ch++) for (int a = 0; a < int'(cf.k1); a++)
              exp_acc.push_back('{int'(WB_CNN), w++, int'(IM_X), ch*int'(cf.win) + p + a});
            for (int o = 32*g; o < int'(cf.f1) && o < 32*g + 32; o++)
              exp_wb.push_back('{int'(IM_FM1), o*n1 + p, o - 32*g, int'(NF_RELU), 0});
          end
        for (int g = 0; g < g2; g++)
          for (int p = 0; p < n2; p++) begin
            w = g1 * int'(cf.m_ch) * int'(cf.k1) + g * int'(cf.f1) * int'(cf.k2);
            for (int ch = 0; ch < int'(cf.f1); ch++) for (int a = 0; a < int'(cf.k2); a++)
              exp_acc.push_back('{int'(WB_CNN), w++, int'(IM_FM1), ch*n1 + p + a});
            for (int o = 32*g; o < int'(cf.f2) && o < 32*g + 32; o++)
              exp_wb.push_back('{int'(IM_FM2), o*n2 + p, o - 32*g, int'(NF_RELU), 0});
          end
        w = 0;
        for (int p = 0; p < (lx + 3) / 4; p++) begin
          for (int k = 0; k < int'(cf.f2) * n2; k++) exp_acc.push_back('{int'(WB_FC), w++, int'(IM_FM2), k});
          for (int l = 0; l < 4; l++) if (4*p + l < lx) exp_wb.push_back('{int'(IM_XIN), 4*p + l, l, int'(NF_PASS), 1});
        end
      end
      w = 0;
      for (int p = 0; p < (nh + 7) / 8; p++) begin
        for (int k = 0; k < nh + lx; k++)
          exp_acc.push_back('{int'(WB_LSTM), w++, (k < nh) ? int'(IM_H) : (cf.cnn_en ? int'(IM_XIN) : int'(IM_X)), (k < nh) ? k : k - nh});
        for (int l = 0; l < 32; l++) if (8*p + l % 8 < nh) exp_wb.push_back('{int'(IM_G0) + l / 8, 8*p + l % 8, l, int'(NF_PASS), 0});
      end
      if (s == int'(cf.q) - 1) begin
        w = 0;
        for (int p = 0; p < int'(cf.ny); p++) begin
          for (int k = 0; k < nh; k++) exp_acc.push_back('{int'(WB_Y), w++, int'(IM_H), k});
          exp_wb.push_back('{int'(IM_Y), p, 0, int'(NF_PASS), 0});
        end
        wait (out_valid); @(negedge clk);
        chk(label == 5'(tgt), $sformatf("label %0d expected %0d", label, tgt));
        chk(st_cycles[ST_S8] == int'(cf.ny) * (nh + 1), $sformatf("S8 cycles %0d", st_cycles[ST_S8]));
      end else begin
        wait (win_ready);
        chk(st_cycles[ST_S8] == 1, "S8 single cycle on a non-final window");
      end
      @(negedge clk);
      chk(got_acc.size() == exp_acc.size(), $sformatf("accumulate issues %0d expected %0d", got_acc.size(), exp_acc.size()));
      foreach (exp_acc[i]) if (i < got_acc.size())
        chk(got_acc[i] == exp_acc[i], $sformatf("acc issue %0d: got bank %0d w %0d sel %0d a %0d, exp bank %0d w %0d sel %0d a %0d", i,
            got_acc[i].bank, got_acc[i].waddr, got_acc[i].sel, got_acc[i].aaddr, exp_acc[i].bank, exp_acc[i].waddr, exp_acc[i].sel, exp_acc[i].aaddr));
      chk(got_wb.size() == exp_wb.size(), $sformatf("write-backs %0d expected %0d", got_wb.size(), exp_wb.size()));
      foreach (exp_wb[i]) if (i < got_wb.size())
        chk(got_wb[i] == exp_wb[i], $sformatf("write-back %0d: got sel %0d addr %0d lane %0d, exp sel %0d addr %0d lane %0d", i,
            got_wb[i].sel, got_wb[i].addr, got_wb[i].lane, exp_wb[i].sel, exp_wb[i].addr, exp_wb[i].lane));
      chk(st_cycles[ST_S3] == (nh + 7) / 8 * (nh + lx + 32), $sformatf("S3 cycles %0d", st_cycles[ST_S3]));
      if (cf.cnn_en)
        chk(st_cycles[ST_S1] == n1 * (g1 * int'(cf.m_ch) * int'(cf.k1) + int'(cf.f1)) + n2 * (g2 * int'(cf.f1) * int'(cf.k2) + int'(cf.f2)),
            $sformatf("S1 cycles %0d", st_cycles[ST_S1]));
      for (int st = int'(ST_S4); st <= int'(ST_S7); st++) chk(st_cycles[st] == nh, $sformatf("state %0d cycles %0d", st, st_cycles[st]));
    end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run('{cnn_en: 1'b1, m_ch: 8'd2, win: 8'd9, q: 8'd2, nh: 10'd13, ny: 5'd4, f1: 6'd3, k1: 3'd3, f2: 6'd5, k2: 3'd2}, 2);
    run('{cnn_en: 1'b0, m_ch: 8'd1, win: 8'd5, q: 8'd3, nh: 10'd9, ny: 5'd6, f1: 6'd0, k1: 3'd1, f2: 6'd0, k2: 3'd1}, 5);
    run('{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd7, q: 8'd1, nh: 10'd9, ny: 5'd2, f1: 6'd33, k1: 3'd2, f2: 6'd35, k2: 3'd2}, 1);
    chk(n_out == 3, $sformatf("out_valid pulses %0d", n_out));
    chk(bad_en == 0, $sformatf("issues with their unit disabled: %0d", bad_en));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
