// tsc_mac_array: the shared multiply-accumulate block (MACs), 32 lanes.
//
// The paper's MACs block holds 32 parallel MAC units; each multiplies a
// 12-bit signed value by a 2-bit ternary or a 12-bit signed weight and adds
// the product to its accumulator. Here one 12-bit activation is broadcast to
// all lanes each cycle together with one 64-bit weight-bank word:
//   MAC_TERN  lane l takes the ternary weight in word bits [2l+1:2l]
//             (32 lanes, 64 bits). Products keep 8 fraction bits.
//   MAC_FULL  lane l (l < 5) takes the 12-bit weight in word bits
//             [12l+11:12l]. Products carry 16 fraction bits.
//   MAC_ELEM  element-wise mode for LSTM states 5 and 7: the word carries four
//             12-bit operands {d, c, b, a} in bits [47:0] and the two
//             multipliers of lanes 0 and 1 give elem_res = (a*b + c*d) >> 8
//             combinationally, with no accumulation (the paper's "two
//             embedded multipliers").
// Broadcasting the activation and giving each lane its own weight is this
// design's reading of "32 additions per clock" (state 1) and "eight
// additions per clock for each gate" (state 3).
//
// Interface and timing: when en (En_MACs) and acc_en are high at a clock
// edge, every lane accumulates; 'first' restarts the sum with this product.
// res[l] is the lane's sum scaled back to 8 fraction bits (arithmetic shift,
// i.e. rounding toward minus infinity, for MAC_FULL) and saturated to 12 bits;
// it is valid the cycle after the last accumulate. The 32-bit accumulator
// width and the truncating rescale are this design's choices.
module tsc_mac_array
  import tsc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,       // En_MACs
  input  logic                 acc_en,   // accumulate this cycle
  input  logic                 first,    // start a new sum
  input  mac_mode_e            mode,
  input  data_t                act,      // broadcast activation
  input  logic [WB_W-1:0]      wword,    // weight word (or ELEM operands)
  output data_t                res [LANES],
  output data_t                elem_res
);

  localparam int unsigned FULL_LANES = WB_W / DW;  // 5 lanes can take 12-bit weights

  logic signed [ACC_W-1:0] acc  [LANES];
  logic signed [ACC_W-1:0] prod [LANES];
  mac_mode_e               mode_q;   // mode of the stored sums (sets the rescale)

  // Lane multipliers. Lanes 0..FULL_LANES-1 have 12x12 multipliers; the other
  // lanes only need +act / 0 / -act for ternary weights.
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    data_t op_a, op_b;
    always_comb begin
      op_a = act;
      op_b = data_t'(tern_val(wword[2*l +: 2]));
      if (l < FULL_LANES) begin
        if (mode == MAC_FULL) op_b = wword[(l < FULL_LANES ? l : 0)*DW +: DW];
        if (mode == MAC_ELEM && l == 0) begin op_a = wword[11:0];  op_b = wword[23:12]; end
        if (mode == MAC_ELEM && l == 1) begin op_a = wword[35:24]; op_b = wword[47:36]; end
        prod[l] = ACC_W'(op_a) * ACC_W'(op_b);
      end else begin
        prod[l] = (op_b == 1)  ? ACC_W'(act) :
                  (op_b == -1) ? -ACC_W'(act) : '0;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) acc[l] <= '0;
      else if (en && acc_en && mode != MAC_ELEM) acc[l] <= first ? prod[l] : acc[l] + prod[l];
    end

    always_comb begin
      if (mode_q == MAC_FULL) res[l] = sat12(acc[l] >>> FRAC);
      else                    res[l] = sat12(acc[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode_q <= MAC_TERN;
    else if (en && acc_en && mode != MAC_ELEM) mode_q <= mode;
  end

  assign elem_res = en ? sat12((prod[0] + prod[1]) >>> FRAC) : '0;

endmodule
