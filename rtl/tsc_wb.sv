// tsc_wb: weight banks (WBs).
//
// Four buffers hold the network weights, as the paper's WBs block does:
//   WB_CNN   ternary W_cnn of both convolution layers, 64-bit words holding
//            32 two-bit weights, one per filter lane
//   WB_FC    full-precision W_fc of the CNN fully-connected layer, 48-bit words
//            holding four 12-bit weights, one per output lane
//   WB_LSTM  ternary W_f, W_i, W_o, W_c, 64-bit words: bits [16g+15:16g]
//            hold the eight 2-bit weights of gate g (0 f, 1 i, 2 o, 3 c)
//   WB_Y     full-precision W_y, one 12-bit weight per word
// The paper keeps the four ternary gate matrices in separate buffers; here
// they share one 64-bit word so that the four gates are read together.
// The word layouts are this design's (the controller's address order is
// described in tsc_mc). Biases are not stored: the paper sets them to zero.
//
// Depths default to the largest network the paper runs: N_h = 350 with an
// LSTM input of 128 x 10 (sEMG DB-c) gives ceil(350/8) * (350 + 1280) = 71720
// gate words; the FC layer is sized for the largest CNN the paper names
// (window 50 and 50 filters in the second layer, at most 50 x 50 = 2500
// feature-map values): ceil(50/4) * 2500 = 32500 FC words; W_y needs
// 350 x 12 = 4200 words.
//
// Timing: one read of up to 64 bits per clock (the paper's bandwidth). The
// controller presents the address at a rising edge; the bank is read on the
// falling edge, as in the paper ("the address of each reading operation is
// provided on the negative clock edge"), so the data are ready for the
// next rising edge. Writes (weight loading from outside) occur on the rising
// edge. Reads only happen while en (En_WBs) is high.
module tsc_wb
  import tsc_pkg::*;
#(
  parameter int unsigned CNN_DEPTH  = 1024,
  parameter int unsigned FC_DEPTH   = 32500,
  parameter int unsigned LSTM_DEPTH = 71720,
  parameter int unsigned Y_DEPTH    = 4200,
  parameter int unsigned AW         = 17
)(
  input  logic            clk,
  input  logic            en,        // En_WBs
  input  wb_bank_e        rd_bank,
  input  logic [AW-1:0]   rd_addr,
  output logic [WB_W-1:0] rd_data,
  input  logic            wr_en,
  input  wb_bank_e        wr_bank,
  input  logic [AW-1:0]   wr_addr,
  input  logic [WB_W-1:0] wr_data
);

  // index widths of the banks
  localparam int unsigned CW = (CNN_DEPTH  > 1) ? $clog2(CNN_DEPTH)  : 1;
  localparam int unsigned FW = (FC_DEPTH   > 1) ? $clog2(FC_DEPTH)   : 1;
  localparam int unsigned LW = (LSTM_DEPTH > 1) ? $clog2(LSTM_DEPTH) : 1;
  localparam int unsigned YW = (Y_DEPTH    > 1) ? $clog2(Y_DEPTH)    : 1;

  logic [WB_W-1:0]          cnn_mem  [CNN_DEPTH];
  logic [FC_PER_WORD*DW-1:0] fc_mem  [FC_DEPTH];
  logic [WB_W-1:0]          lstm_mem [LSTM_DEPTH];
  logic [DW-1:0]            y_mem    [Y_DEPTH];

  logic [WB_W-1:0]           cnn_q, lstm_q;
  logic [FC_PER_WORD*DW-1:0] fc_q;
  logic [DW-1:0]             y_q;
  wb_bank_e                  bank_q;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_bank)
        WB_CNN:  if (32'(wr_addr) < CNN_DEPTH)  cnn_mem[CW'(wr_addr)]  <= wr_data;
        WB_FC:   if (32'(wr_addr) < FC_DEPTH)   fc_mem[FW'(wr_addr)]   <= wr_data[FC_PER_WORD*DW-1:0];
        WB_LSTM: if (32'(wr_addr) < LSTM_DEPTH) lstm_mem[LW'(wr_addr)] <= wr_data;
        WB_Y:    if (32'(wr_addr) < Y_DEPTH)    y_mem[YW'(wr_addr)]    <= wr_data[DW-1:0];
      endcase
    end
  end

  // Falling-edge reads; only the addressed bank is enabled.
  always_ff @(negedge clk) begin
    if (en) begin
      bank_q <= rd_bank;
      if (rd_bank == WB_CNN  && 32'(rd_addr) < CNN_DEPTH)  cnn_q  <= cnn_mem[CW'(rd_addr)];
      if (rd_bank == WB_FC   && 32'(rd_addr) < FC_DEPTH)   fc_q   <= fc_mem[FW'(rd_addr)];
      if (rd_bank == WB_LSTM && 32'(rd_addr) < LSTM_DEPTH) lstm_q <= lstm_mem[LW'(rd_addr)];
      if (rd_bank == WB_Y    && 32'(rd_addr) < Y_DEPTH)    y_q    <= y_mem[YW'(rd_addr)];
    end
  end

  always_comb begin
    unique case (bank_q)
      WB_CNN:  rd_data = cnn_q;
      WB_FC:   rd_data = WB_W'(fc_q);
      WB_LSTM: rd_data = lstm_q;
      WB_Y:    rd_data = WB_W'(y_q);
    endcase
  end

endmodule
