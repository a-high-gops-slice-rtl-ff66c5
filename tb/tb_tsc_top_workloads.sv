// tb_tsc_top_workloads: the remaining evaluated networks on the default-sized
// classifier.
//
// Each entry below is one complete classification with the sizes of a network
// from the evaluation; the hardware (tsc_top) keeps all its default
// parameters and only the run-time configuration changes:
//   sEMG 8 gestures: no CNN, 128 channels x window 5, N_h = 250, 8 classes,
//                    30 windows;
//   ECG200:          CNN 10 x len 5 and 30 x len 3, window 20, N_h = 350,
//                    2 classes, 4 windows;
//   ECG5000:         as ECG200 with 5 classes and 7 windows;
//   PhysioNet 2016:  CNN as above, window 50, N_h = 350, 2 classes,
//                    30 windows;
//   chaotic-series LSTM: no CNN, 1 channel x window 50, N_h = 350,
//                    30 windows; the class count is not stated there, 5 is
//                    this test's choice;
//   chaotic-series CNN-LSTM: as above with a CNN of 20 and 50 filters; the
//                    kernel lengths are not stated for it, this test uses
//                    5 and 3 as in the heart networks. The 50-filter layer
//                    runs as two groups of MAC lanes.
// The class counts of the ECG and heart-sound sets are those of the public
// data sets. Checks as in tsc_top_harness: bit-exact h and c after every
// window, scores, label and cycles per controller state.
module tb_tsc_top_workloads;
  import tsc_pkg::*;
  localparam cfg_t CFG_DBA   = '{cnn_en: 1'b0, m_ch: 8'd128, win: 8'd5, q: 8'd30, nh: 10'd250, ny: 5'd8,
                                 f1: 6'd0, k1: 3'd1, f2: 6'd0, k2: 3'd1};
  localparam cfg_t CFG_E200  = '{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd20, q: 8'd4, nh: 10'd350, ny: 5'd2,
                                 f1: 6'd10, k1: 3'd5, f2: 6'd30, k2: 3'd3};
  localparam cfg_t CFG_E5000 = '{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd20, q: 8'd7, nh: 10'd350, ny: 5'd5,
                                 f1: 6'd10, k1: 3'd5, f2: 6'd30, k2: 3'd3};
  localparam cfg_t CFG_PN16  = '{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd50, q: 8'd30, nh: 10'd350, ny: 5'd2,
                                 f1: 6'd10, k1: 3'd5, f2: 6'd30, k2: 3'd3};
  localparam cfg_t CFG_CHAOS = '{cnn_en: 1'b0, m_ch: 8'd1, win: 8'd50, q: 8'd30, nh: 10'd350, ny: 5'd5,
                                 f1: 6'd0, k1: 3'd1, f2: 6'd0, k2: 3'd1};
  localparam cfg_t CFG_CHCNN = '{cnn_en: 1'b1, m_ch: 8'd1, win: 8'd50, q: 8'd30, nh: 10'd350, ny: 5'd5,
                                 f1: 6'd20, k1: 3'd5, f2: 6'd50, k2: 3'd3};
  localparam cfg_t CFGS [6] = '{CFG_DBA, CFG_E200, CFG_E5000, CFG_PN16, CFG_CHAOS, CFG_CHCNN};
  tsc_top_harness #(.NCFG(6), .CFGS(CFGS), .WATCHDOG_CYCLES(16_000_000),
                    .REQUIRE_FILTER_GROUPS(1'b1)) h ();

  // Outer time guard, above the harness's own cycle watchdog (16 M cycles of
  // 10 ns): it only fires if simulation time runs on without the harness
  // finishing.
  initial begin
    #200ms;
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures + 1);
    $finish;
  end
endmodule
