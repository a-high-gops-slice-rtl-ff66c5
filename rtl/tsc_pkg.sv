// tsc_pkg: types and constants shared by the time-series classifier.
//
// Number format. Every activation, feature-map value, gate value and
// full-precision weight is a 12-bit two's-complement number with 8 fraction
// bits (range [-8, 8), step 1/256). The 12-bit width follows the paper; the
// position of the binary point is this design's choice, made so that the
// sigmoid look-up range [-8, 8) covers the whole number range.
//
// Ternary weights are 2 bits: 2'b01 = +1, 2'b11 = -1, 2'b00 and 2'b10 = 0
// (two's complement of the value; the code 2'b10 is never produced by the
// weight loader). The paper gives only "two bits per weight"; the code
// assignment is this design's.
//
// The controller state encoding mirrors the eight states of the paper's
// hardware state machine plus an idle, an h/c clearing state and a state that
// waits for the next input window.
package tsc_pkg;

  localparam int unsigned DW        = 12;  // data width (paper: 12 bit)
  localparam int unsigned FRAC      = 8;   // fraction bits (design choice)
  localparam int unsigned NF_W      = 10;  // look-up table word (paper: 10 bit)
  localparam int unsigned NF_N      = 64;  // look-up table entries (paper: N = 64)
  localparam int unsigned LANES     = 32;  // parallel MAC units (paper: 32)
  localparam int unsigned GATE_LANES= 8;   // MAC lanes per LSTM gate (paper: 8 additions per cycle per gate)
  localparam int unsigned WB_W      = 64;  // weight-bank read width (paper: 64 bit)
  localparam int unsigned IM_VEC    = 4;   // values per IM vector access (paper: 48 bit = 4 x 12)
  localparam int unsigned BUS_W     = 96;  // shared bus (paper: 96 bit)
  localparam int unsigned FC_PER_WORD = 4; // full-precision W_fc weights per bank word (48 of 64 bits)
  localparam int unsigned ACC_W     = 32;  // accumulator width (design choice)

  typedef logic signed [DW-1:0] data_t;
  typedef logic [1:0]           tern_t;

  // Weight bank select
  typedef enum logic [1:0] {
    WB_CNN  = 2'd0,   // ternary W_cnn, 32 weights per word (one per filter lane)
    WB_FC   = 2'd1,   // full-precision W_fc, 4 x 12 bit per word
    WB_LSTM = 2'd2,   // ternary {W_c, W_o, W_i, W_f}, 4 x 8 weights per word
    WB_Y    = 2'd3    // full-precision W_y, one 12-bit weight per word
  } wb_bank_e;

  // Internal-memory buffer select
  typedef enum logic [3:0] {
    IM_X   = 4'd0,  // raw input window x
    IM_FM1 = 4'd1,  // CNN layer-1 feature map
    IM_FM2 = 4'd2,  // CNN layer-2 feature map
    IM_XIN = 4'd3,  // LSTM input x + P (residual sum)
    IM_H   = 4'd4,  // hidden state h
    IM_C   = 4'd5,  // cell state c
    IM_G   = 4'd6,  // four gate banks (pre-activations, then activations)
    IM_Y   = 4'd7,  // class scores
    IM_G0  = 4'd8,  // gate bank 0 (forget)
    IM_G1  = 4'd9,  // gate bank 1 (input)
    IM_G2  = 4'd10, // gate bank 2 (output)
    IM_G3  = 4'd11  // gate bank 3 (candidate, later tanh(c))
  } im_sel_e;

  // MAC array operating mode
  typedef enum logic [1:0] {
    MAC_TERN = 2'd0,  // 12-bit activation x 2-bit ternary weight, 32 lanes
    MAC_FULL = 2'd1,  // 12-bit activation x 12-bit weight
    MAC_ELEM = 2'd2   // element-wise: a*b + c*d on two multipliers
  } mac_mode_e;

  // Non-linear function select
  typedef enum logic [1:0] {
    NF_PASS = 2'd0,
    NF_RELU = 2'd1,
    NF_SIG  = 2'd2,
    NF_TANH = 2'd3
  } nf_func_e;

  // Source of a value written back to the internal memories
  typedef enum logic [2:0] {
    WR_ZERO = 3'd0,   // constant zero (clearing h and c)
    WR_MAC  = 3'd1,   // a MAC lane's sum (optionally + residual x)
    WR_CELL = 3'd2,   // element-wise hf*c + hc*hi
    WR_HID  = 3'd3,   // element-wise ho*tanh(c)
    WR_ACT  = 3'd4    // the scalar IM read (through an NF lane)
  } wr_src_e;

  // Controller states (S1..S8 are the paper's states 1..8)
  typedef enum logic [3:0] {
    ST_IDLE = 4'd0,
    ST_INIT = 4'd1,   // clear h and c at the start of a sequence
    ST_WAIT = 4'd2,   // wait for the next input window
    ST_S1   = 4'd3,   // CNN convolution + ReLU (layer 1, then layer 2)
    ST_S2   = 4'd4,   // CNN fully-connected layer, added to x
    ST_S3   = 4'd5,   // W^T xx for the four gates
    ST_S4   = 4'd6,   // sigma / tanh on the gate sums
    ST_S5   = 4'd7,   // c = hf*c + hc*hi
    ST_S6   = 4'd8,   // tanh(c)
    ST_S7   = 4'd9,   // h = ho * tanh(c)
    ST_S8   = 4'd10   // y = W_y^T h and arg-max
  } mc_state_e;

  // Network configuration written by the user (run-time sizes)
  typedef struct packed {
    logic        cnn_en;  // 1: CNN feature extractor + residual, 0: x goes straight to the LSTM
    logic [7:0]  m_ch;    // input channels M
    logic [7:0]  win;     // window length omega_s
    logic [7:0]  q;       // steps (windows per classification)
    logic [9:0]  nh;      // hidden neurons N_h
    logic [4:0]  ny;      // output classes N_y
    logic [5:0]  f1;      // CNN layer-1 filters
    logic [2:0]  k1;      // CNN layer-1 kernel length m
    logic [5:0]  f2;      // CNN layer-2 filters
    logic [2:0]  k2;      // CNN layer-2 kernel length m
  } cfg_t;

  // Saturate a wide signed value to the 12-bit data range
  function automatic data_t sat12(input logic signed [ACC_W-1:0] v);
    if (v > 2047)       return data_t'(12'sd2047);
    else if (v < -2048) return data_t'(-12'sd2048);
    else                return data_t'(v[DW-1:0]);
  endfunction

  // Ternary code to integer
  function automatic logic signed [1:0] tern_val(input tern_t w);
    case (w)
      2'b01:   return 2'sd1;
      2'b11:   return -2'sd1;
      default: return 2'sd0;
    endcase
  endfunction

endpackage
