// tsc_im: internal memories (IMs) for the intermediate 12-bit values.
//
// Buffers (depths default to the largest network the paper runs):
//   X    raw input window, M x omega_s values, channel-major (x[ch*win + t])
//   FM1  CNN layer-1 feature map, filter-major (fm[o*n + i])
//   FM2  CNN layer-2 feature map, filter-major
//   XIN  LSTM input x + P (output of the CNN branch plus the residual path)
//   H, C hidden and cell state, N_h values each
//   G0..G3  four gate banks (f, i, o, c): gate sums, then gate activations;
//           G3 later holds tanh(c)
//   Y    class scores
// Ports:
//   act  scalar read of any buffer (the activation broadcast to the MACs, or
//        the residual x / the cell state c)
//   vec  read of the four gate banks at one address, 4 x 12 = 48 bits, the
//        paper's IM bandwidth
//   wr   scalar write of any buffer; vwr writes the four gate banks at once
//   x_wr external write of the input window; y_rd external read of scores
// The buffer split and the ports are this design's; the paper gives the 12-bit
// width, the 48-bit bandwidth and the falling-edge read.
//
// Timing: reads are addressed at a rising edge and performed on the falling
// edge (block-RAM style, as in the paper), giving data for the next rising
// edge. Writes happen on the rising edge. Reads happen only while en (En_IMs)
// is high.
module tsc_im
  import tsc_pkg::*;
#(
  parameter int unsigned X_DEPTH  = 1280,  // 128 channels x window 10 (sEMG DB-c)
  parameter int unsigned FM_DEPTH = 2500,  // 50 filters x window 50
  parameter int unsigned NH_MAX   = 350,
  parameter int unsigned NY_MAX   = 12,
  parameter int unsigned AW       = 12
)(
  input  logic          clk,
  input  logic          en,         // En_IMs
  // scalar read
  input  im_sel_e       act_sel,
  input  logic [AW-1:0] act_addr,
  output data_t         act_data,
  // gate-bank vector read
  input  logic [AW-1:0] vec_addr,
  output data_t         vec_data [IM_VEC],
  // scalar write
  input  logic          wr_en,
  input  im_sel_e       wr_sel,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  // gate-bank vector write
  input  logic          vwr_en,
  input  logic [AW-1:0] vwr_addr,
  input  data_t         vwr_data [IM_VEC],
  // external input window write
  input  logic          x_wr_en,
  input  logic [AW-1:0] x_wr_addr,
  input  data_t         x_wr_data,
  // external score read (combinational)
  input  logic [4:0]    y_rd_addr,
  output data_t         y_rd_data
);

  // index widths of the buffers
  localparam int unsigned XW = (X_DEPTH  > 1) ? $clog2(X_DEPTH)  : 1;
  localparam int unsigned FW = (FM_DEPTH > 1) ? $clog2(FM_DEPTH) : 1;
  localparam int unsigned HW = (NH_MAX   > 1) ? $clog2(NH_MAX)   : 1;
  localparam int unsigned YW = (NY_MAX   > 1) ? $clog2(NY_MAX)   : 1;

  data_t x_mem   [X_DEPTH];
  data_t fm1_mem [FM_DEPTH];
  data_t fm2_mem [FM_DEPTH];
  data_t xin_mem [X_DEPTH];
  data_t h_mem   [NH_MAX];
  data_t c_mem   [NH_MAX];
  data_t g_mem   [IM_VEC][NH_MAX];
  data_t y_mem   [NY_MAX];

  // ---------------- writes (rising edge) ----------------
  always_ff @(posedge clk) begin
    if (x_wr_en && 32'(x_wr_addr) < X_DEPTH) x_mem[XW'(x_wr_addr)] <= x_wr_data;
    if (wr_en) begin
      unique case (wr_sel)
        IM_X:   if (32'(wr_addr) < X_DEPTH)  x_mem[XW'(wr_addr)]   <= wr_data;
        IM_FM1: if (32'(wr_addr) < FM_DEPTH) fm1_mem[FW'(wr_addr)] <= wr_data;
        IM_FM2: if (32'(wr_addr) < FM_DEPTH) fm2_mem[FW'(wr_addr)] <= wr_data;
        IM_XIN: if (32'(wr_addr) < X_DEPTH)  xin_mem[XW'(wr_addr)] <= wr_data;
        IM_H:   if (32'(wr_addr) < NH_MAX)   h_mem[HW'(wr_addr)]   <= wr_data;
        IM_C:   if (32'(wr_addr) < NH_MAX)   c_mem[HW'(wr_addr)]   <= wr_data;
        IM_Y:   if (32'(wr_addr) < NY_MAX)   y_mem[YW'(wr_addr)]   <= wr_data;
        IM_G0:  if (32'(wr_addr) < NH_MAX)   g_mem[0][HW'(wr_addr)] <= wr_data;
        IM_G1:  if (32'(wr_addr) < NH_MAX)   g_mem[1][HW'(wr_addr)] <= wr_data;
        IM_G2:  if (32'(wr_addr) < NH_MAX)   g_mem[2][HW'(wr_addr)] <= wr_data;
        IM_G3:  if (32'(wr_addr) < NH_MAX)   g_mem[3][HW'(wr_addr)] <= wr_data;
        default: ;
      endcase
    end
    if (vwr_en && 32'(vwr_addr) < NH_MAX)
      for (int g = 0; g < IM_VEC; g++) g_mem[g][HW'(vwr_addr)] <= vwr_data[g];
  end

  // ---------------- reads (falling edge) ----------------
  always_ff @(negedge clk) begin
    if (en) begin
      unique case (act_sel)
        IM_X:   act_data <= (32'(act_addr) < X_DEPTH)  ? x_mem[XW'(act_addr)]   : '0;
        IM_FM1: act_data <= (32'(act_addr) < FM_DEPTH) ? fm1_mem[FW'(act_addr)] : '0;
        IM_FM2: act_data <= (32'(act_addr) < FM_DEPTH) ? fm2_mem[FW'(act_addr)] : '0;
        IM_XIN: act_data <= (32'(act_addr) < X_DEPTH)  ? xin_mem[XW'(act_addr)] : '0;
        IM_H:   act_data <= (32'(act_addr) < NH_MAX)   ? h_mem[HW'(act_addr)]   : '0;
        IM_C:   act_data <= (32'(act_addr) < NH_MAX)   ? c_mem[HW'(act_addr)]   : '0;
        IM_Y:   act_data <= (32'(act_addr) < NY_MAX)   ? y_mem[YW'(act_addr)]   : '0;
        IM_G0:  act_data <= (32'(act_addr) < NH_MAX)   ? g_mem[0][HW'(act_addr)] : '0;
        IM_G1:  act_data <= (32'(act_addr) < NH_MAX)   ? g_mem[1][HW'(act_addr)] : '0;
        IM_G2:  act_data <= (32'(act_addr) < NH_MAX)   ? g_mem[2][HW'(act_addr)] : '0;
        IM_G3:  act_data <= (32'(act_addr) < NH_MAX)   ? g_mem[3][HW'(act_addr)] : '0;
        default: act_data <= '0;
      endcase
      for (int g = 0; g < IM_VEC; g++)
        vec_data[g] <= (32'(vec_addr) < NH_MAX) ? g_mem[g][HW'(vec_addr)] : '0;
    end
  end

  assign y_rd_data = (32'(y_rd_addr) < NY_MAX) ? y_mem[YW'(y_rd_addr)] : '0;

endmodule
