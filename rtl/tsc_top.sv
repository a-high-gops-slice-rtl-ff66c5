// tsc_top: CNN-LSTM time-series classifier built from shared units.
//
// The classifier turns q successive windows of a (multi-channel) time series
// into one class label. Per window an optional two-layer 1-D CNN with ReLU and
// a fully-connected layer extracts features P, which are added to the raw
// window x (residual path); the sum feeds a ternary-weight LSTM. After the
// q-th window a full-precision layer y = W_y^T h scores the classes and the
// arg-max is the label. All biases are zero, as in the paper.
//
// Structure (after the paper's block diagram): five units share one bus under
// a master controller, each switched on by its own enable:
//   tsc_mc         master controller (the 8-state machine), En_* signals
//   tsc_wb         weight banks, 64-bit reads
//   tsc_im         internal memories, 12-bit values, 48-bit vector reads
//   tsc_mac_array  32 MAC lanes (ternary or 12-bit weights) and the two
//                  element-wise multipliers
//   tsc_nf         sigmoid / tanh look-up tables and ReLU, 4 lanes
// The 96-bit bus is the packed struct bus_t below: 64 bits of weight word
// (or, in the element-wise and activation states, four 12-bit memory values)
// plus a 32-bit side field whose low 12 bits carry the broadcast activation.
// Results return to the internal memories over the write-back path. How the
// bus fields are assigned is this design's choice: the paper gives only the
// bus width.
//
// Host interface: load weights through wb_wr_* (the word layouts are given in
// tsc_mc and tsc_wb), set cfg, pulse start. For each of the q windows wait for
// win_ready, write the window into x through x_wr_* (channel-major,
// x[ch*win + t]) and pulse win_valid. After the q-th window out_valid pulses
// for one cycle with the label; the class scores stay readable through
// y_rd_addr / y_rd_data. All ports are synchronous to clk (100 MHz in the
// paper); rst_n is an asynchronous active-low reset of the control state.
module tsc_top
  import tsc_pkg::*;
#(
  parameter int unsigned NH_MAX     = 350,    // hidden neurons (paper: up to 350)
  parameter int unsigned X_DEPTH    = 1280,   // LSTM input length, M*omega_s (128 x 10)
  parameter int unsigned FM_DEPTH   = 2500,   // 50 filters x window 50
  parameter int unsigned NY_MAX     = 12,     // classes (paper: up to 12)
  parameter int unsigned CNN_DEPTH  = 1024,
  parameter int unsigned FC_DEPTH   = 32500,  // ceil(50/4) x 2500
  parameter int unsigned LSTM_DEPTH = 71720,
  parameter int unsigned Y_DEPTH    = 4200
)(
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,
  // weight loading
  input  logic            wb_wr_en,
  input  wb_bank_e        wb_wr_bank,
  input  logic [16:0]     wb_wr_addr,
  input  logic [WB_W-1:0] wb_wr_data,
  // input windows
  input  logic            x_wr_en,
  input  logic [11:0]     x_wr_addr,
  input  data_t           x_wr_data,
  input  logic            start,
  input  logic            win_valid,
  output logic            win_ready,
  // result
  output logic            out_valid,
  output logic [4:0]      label,
  input  logic [4:0]      y_rd_addr,
  output data_t           y_rd_data,
  // status
  output logic            busy,
  output mc_state_e       state,
  output logic [7:0]      step,
  output logic            en_macs,
  output logic            en_nfs,
  output logic            en_ims,
  output logic            en_wbs
);

  typedef struct packed {
    logic [BUS_W-WB_W-1:0] aux;   // [11:0] broadcast activation
    logic [WB_W-1:0]       data;  // weight word or four 12-bit values
  } bus_t;

  // ---------------- controller ----------------
  wb_bank_e   wb_bank;
  logic [16:0] wb_addr;
  im_sel_e    act_sel, wr_sel;
  logic [11:0] act_addr, vec_addr, wr_addr, vwr_addr;
  logic       mac_acc_en, mac_first, wr_en, wr_addx, vwr_en;
  mac_mode_e  mac_mode;
  wr_src_e    wr_src;
  logic [4:0] wr_lane;
  nf_func_e   wr_func;
  data_t      wr_data;

  tsc_mc u_mc (
    .clk, .rst_n, .cfg, .start, .win_valid, .wr_value(wr_data),
    .state, .busy, .win_ready, .out_valid, .label, .step,
    .en_macs, .en_nfs, .en_ims, .en_wbs,
    .wb_bank, .wb_addr, .act_sel, .act_addr, .vec_addr,
    .mac_acc_en, .mac_first, .mac_mode,
    .wr_en, .wr_sel, .wr_addr, .wr_src, .wr_lane, .wr_func, .wr_addx,
    .vwr_en, .vwr_addr
  );

  // ---------------- memories ----------------
  logic [WB_W-1:0] wb_rd_data;
  data_t           act_data;
  data_t           vec_data  [IM_VEC];
  data_t           vwr_data  [IM_VEC];

  tsc_wb #(.CNN_DEPTH(CNN_DEPTH), .FC_DEPTH(FC_DEPTH), .LSTM_DEPTH(LSTM_DEPTH),
           .Y_DEPTH(Y_DEPTH)) u_wb (
    .clk, .en(en_wbs),
    .rd_bank(wb_bank), .rd_addr(wb_addr), .rd_data(wb_rd_data),
    .wr_en(wb_wr_en), .wr_bank(wb_wr_bank), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data)
  );

  tsc_im #(.X_DEPTH(X_DEPTH), .FM_DEPTH(FM_DEPTH), .NH_MAX(NH_MAX), .NY_MAX(NY_MAX)) u_im (
    .clk, .en(en_ims),
    .act_sel, .act_addr, .act_data,
    .vec_addr, .vec_data,
    .wr_en, .wr_sel, .wr_addr, .wr_data,
    .vwr_en, .vwr_addr, .vwr_data,
    .x_wr_en, .x_wr_addr, .x_wr_data,
    .y_rd_addr, .y_rd_data
  );

  // ---------------- shared bus ----------------
  // Gate banks on the vector port: vec_data[0..3] = f, i, o, candidate (or
  // tanh(c) after state 6).
  bus_t bus;
  always_comb begin
    bus = '0;
    unique case (wr_src)
      WR_CELL: bus.data = WB_W'({vec_data[1], vec_data[3], act_data, vec_data[0]}); // {hi, hc, c, hf}
      WR_HID:  bus.data = WB_W'({12'd0, 12'd0, vec_data[3], vec_data[2]});          // {0, 0, tanh c, ho}
      default: begin
        if (vwr_en) bus.data = WB_W'({vec_data[3], vec_data[2], vec_data[1], vec_data[0]});
        else        bus.data = wb_rd_data;
        bus.aux = (BUS_W-WB_W)'(act_data);
      end
    endcase
  end

  // ---------------- MACs ----------------
  data_t mac_res [LANES];
  data_t elem_res;

  tsc_mac_array u_mac (
    .clk, .rst_n, .en(en_macs),
    .acc_en(mac_acc_en), .first(mac_first),
    .mode((wr_en && (wr_src == WR_CELL || wr_src == WR_HID)) ? MAC_ELEM : mac_mode),
    .act(data_t'(bus.aux[DW-1:0])), .wword(bus.data),
    .res(mac_res), .elem_res
  );

  // ---------------- NFs ----------------
  data_t    nf_din  [IM_VEC];
  data_t    nf_dout [IM_VEC];
  nf_func_e nf_fn   [IM_VEC];
  data_t    wb_pre;   // value before the optional non-linearity

  always_comb begin
    unique case (wr_src)
      WR_MAC:  wb_pre = wr_addx ? sat12(ACC_W'(mac_res[wr_lane]) + ACC_W'(act_data))
                                : mac_res[wr_lane];
      WR_CELL: wb_pre = elem_res;
      WR_HID:  wb_pre = elem_res;
      WR_ACT:  wb_pre = act_data;
      default: wb_pre = '0;
    endcase
    if (vwr_en) begin
      // state 4: sigma(f), sigma(i), sigma(o), tanh(candidate)
      for (int g = 0; g < IM_VEC; g++) nf_din[g] = data_t'(bus.data[g*DW +: DW]);
      nf_fn = '{NF_SIG, NF_SIG, NF_SIG, NF_TANH};
    end else begin
      nf_din = '{wb_pre, 12'd0, 12'd0, 12'd0};
      nf_fn  = '{wr_func, NF_PASS, NF_PASS, NF_PASS};
    end
  end

  tsc_nf u_nf (.en(en_nfs), .func(nf_fn), .din(nf_din), .dout(nf_dout));

  assign vwr_data = nf_dout;
  assign wr_data  = (wr_func == NF_PASS) ? wb_pre : nf_dout[0];

endmodule
