// tsc_nf: non-linear function unit (NFs), IM_VEC = 4 lanes.
//
// Each lane applies one of sigmoid, tanh, ReLU or pass-through to a 12-bit
// value (8 fraction bits). Sigmoid and tanh come from 64-entry look-up tables
// of 10-bit words, as in the paper: the table address is
//   U = floor((u - u_min) / du),  du = (u_max - u_min) / 64,
// with [u_min, u_max) = [-8, 8) for sigmoid and [-4, 4) for tanh. Because the
// bounds are powers of two the division is a shift:
//   sigmoid: U = (u + 2048) >> 6        (covers the whole 12-bit range)
//   tanh:    U = (u + 1024) >> 5        (clamped to 0..63 outside [-4, 4))
// Entry i holds round(256 * f(u_min + (i + 0.5) * du)), the function at the
// centre of its bin, as a 10-bit two's-complement number with 8 fraction bits
// (tables tsc_nf_sigmoid.hex and tsc_nf_tanh.hex). The mid-bin sampling, the
// clamping of tanh outside its range and the number format are this design's
// choices; the paper gives the ranges, N = 64 and the 10-bit width.
//
// Timing: combinational. The tables are small read-only arrays, so a value
// read from the internal memories passes through and is written back at the
// next clock edge; this gives the paper's one value per clock per lane.
// Four lanes let the four LSTM gates be activated together (state 4 takes
// N_h cycles as in the paper).
module tsc_nf
  import tsc_pkg::*;
(
  input  logic     en,                // En_NFs: when low the outputs are zero
  input  nf_func_e func [IM_VEC],
  input  data_t    din  [IM_VEC],
  output data_t    dout [IM_VEC]
);

  logic [NF_W-1:0] sig_lut  [NF_N];
  logic [NF_W-1:0] tanh_lut [NF_N];

  initial begin
    $readmemh("rtl/tsc_nf_sigmoid.hex", sig_lut);
    $readmemh("rtl/tsc_nf_tanh.hex", tanh_lut);
  end

  for (genvar l = 0; l < IM_VEC; l++) begin : g_lane
    logic [DW-1:0] sig_off, tanh_off;
    logic [5:0]    sig_addr, tanh_addr;
    logic signed [NF_W-1:0] sig_val, tanh_val;

    always_comb begin
      sig_off   = din[l] + 12'd2048;          // u - u_min, u_min = -8
      sig_addr  = sig_off[11:6];              // divide by du = 0.25 (64 LSBs)
      tanh_off  = din[l] + 12'd1024;          // u - u_min, u_min = -4
      if (din[l] < -12'sd1024)      tanh_addr = 6'd0;
      else if (din[l] > 12'sd1023)  tanh_addr = 6'd63;
      else                          tanh_addr = tanh_off[10:5];  // du = 0.125
      sig_val   = sig_lut[sig_addr];
      tanh_val  = tanh_lut[tanh_addr];
      if (!en) dout[l] = '0;
      else begin
        unique case (func[l])
          NF_PASS: dout[l] = din[l];
          NF_RELU: dout[l] = din[l][DW-1] ? '0 : din[l];
          NF_SIG:  dout[l] = DW'(sig_val);
          NF_TANH: dout[l] = DW'(tanh_val);
        endcase
      end
    end
  end

endmodule
