// tb_tsc_top: end-to-end test of the classifier at small network sizes.
//
// Three sequences run back to back on the default-sized hardware: a CNN-LSTM
// network (1 channel, window 12, filters 4 and 6 of lengths 5 and 3, N_h = 20,
// 5 classes, 3 windows), an LSTM-only network (2 channels, window 6,
// N_h = 16, 3 classes, 2 windows), so the CNN mode switch happens, and a
// CNN-LSTM network whose layers have 34 and 40 filters (2 channels, window 10,
// lengths 3 and 2, N_h = 12, 4 classes, 2 windows), so both layers run as two
// groups of MAC lanes. The checking itself (bit-exact reference, cycle counts,
// mechanism counts) is in tsc_top_harness.
module tb_tsc_top;
  import tsc_pkg::*;
  localparam cfg_t CFG_CNN  = '{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd12, q: 8'd3, nh: 10'd20, ny: 5'd5,
                                f1: 6'd4, k1: 3'd5, f2: 6'd6, k2: 3'd3};
  localparam cfg_t CFG_LSTM = '{cnn_en: 1'b0, m_ch: 8'd2, win: 8'd6, q: 8'd2, nh: 10'd16, ny: 5'd3,
                                f1: 6'd0, k1: 3'd1, f2: 6'd0, k2: 3'd1};
  localparam cfg_t CFG_WIDE = '{cnn_en: 1'b1, m_ch: 8'd2, win: 8'd10, q: 8'd2, nh: 10'd12, ny: 5'd4,
                                f1: 6'd34, k1: 3'd3, f2: 6'd40, k2: 3'd2};
  localparam cfg_t CFGS [3] = '{CFG_CNN, CFG_LSTM, CFG_WIDE};
  tsc_top_harness #(.NCFG(3), .CFGS(CFGS), .WATCHDOG_CYCLES(2_000_000),
                    .REQUIRE_FILTER_GROUPS(1'b1)) h ();
endmodule
