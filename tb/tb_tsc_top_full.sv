// tb_tsc_top_full: the classifier at the network sizes the paper runs on it.
//
// Two complete classifications on the default-sized hardware:
//   sEMG DB-c: no CNN, 128 channels x window 10, N_h = 350, 12 classes,
//              15 windows (the largest LSTM the paper maps to the hardware);
//   PhysioNet 2017: CNN with 10 filters of length 5 and 30 of length 3,
//              1 channel, window 50, N_h = 350, 4 classes, 30 windows.
// Checks as in tsc_top_harness (bit-exact h, c, scores, label, cycle counts).
module tb_tsc_top_full;
  import tsc_pkg::*;
  localparam cfg_t CFG_DBC   = '{cnn_en: 1'b0, m_ch: 8'd128, win: 8'd10, q: 8'd15, nh: 10'd350, ny: 5'd12,
                                 f1: 6'd0, k1: 3'd1, f2: 6'd0, k2: 3'd1};
  localparam cfg_t CFG_PN17  = '{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd50, q: 8'd30, nh: 10'd350, ny: 5'd4,
                                 f1: 6'd10, k1: 3'd5, f2: 6'd30, k2: 3'd3};
  tsc_top_harness #(.NCFG(2), .CFGS('{CFG_DBC, CFG_PN17}), .WATCHDOG_CYCLES(8_000_000)) h ();
endmodule
