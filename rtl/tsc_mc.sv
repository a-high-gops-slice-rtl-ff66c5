// tsc_mc: master controller (MC) of the time-series classifier.
//
// The paper's classifier is a state machine with one active state at a time;
// the MC walks through it and, each clock, tells every shared unit what to do
// through the bus controls and the enables En_MACs, En_NFs, En_IMs, En_WBs.
// States (S1..S8 are the paper's states 1..8):
//   IDLE  wait for 'start' (a new sequence of q windows)
//   INIT  clear h and c (2*N_h cycles)
//   WAIT  win_ready high; the host writes the window into IM X and pulses
//         win_valid. Goes to S1 when the CNN is enabled, else to S3.
//   S1    convolution layer 1, then layer 2, with ReLU on write-back.
//         Lanes are filters; one input sample is broadcast per clock:
//         n_out * (ch_in * m + f) cycles per layer of up to 32 filters. A
//         layer of 33..63 filters runs as two groups of lanes (filters 0..31,
//         then 32..f-1): 2 * n_out * ch_in * m + n_out * f cycles. The paper's
//         count for this state divides f by 32, i.e. it also works through
//         the filters 32 at a time.
//   S2    CNN fully-connected layer, P = W_fc^T r, four output lanes (four
//         12-bit weights per 64-bit bank read); write-back adds the residual:
//         XIN[j] = x[j] + P[j]. ceil(L/4) * (f2*n2 + 4) cycles, L = M*omega_s.
//   S3    gate sums W^T xx for the four gates, xx = [h, XIN] (or [h, x]
//         without CNN); 8 lanes per gate: ceil(N_h/8) * (N_h + L + 32) cycles
//         (paper: (N_h + omega_s) * N_h / 8, plus write-back here).
//   S4    sigma on f, i, o and tanh on the candidate, 4 NF lanes: N_h cycles.
//   S5    c = hf*c + hc*hi on two multipliers: N_h cycles.
//   S6    tanh(c): N_h cycles.
//   S7    h = ho*tanh(c): N_h cycles.
//   S8    after the q-th window: y = W_y^T h, one MAC per clock, N_h+1 cycles
//         per class, then arg-max; out_valid pulses with the label one cycle
//         after the last score is written. Otherwise (1 cycle) back to WAIT.
//
// Matrix-vector engine (S1, S2, S3, S8): a pass accumulates K inputs into the
// lanes (issue phase, one input per clock), then writes the lanes back one
// per clock. Weight-bank word order, which the loader must follow:
//   CNN layer 1  word g*M*k1 + ch*k1 + a, lane o: W1[32g+o][ch][a] (base 0)
//   CNN layer 2  word B + g*f1*k2 + ch*k2 + a, lane o: W2[32g+o][ch][a]
//                B = M*k1, or 2*M*k1 when layer 1 has more than 32 filters
//                (g is the filter group, 0 for layers of up to 32 filters)
//   FC           word p*K + k,   lane l: W_fc[4p+l][k], K = f2*n2
//   LSTM         word p*K + k,   gate g, lane e: W_g[8p+e][k], K = N_h + L,
//                k < N_h addresses h[k], k >= N_h addresses XIN[k-N_h]
//   Y            word p*N_h + k: W_y[p][k]
// Feature maps are stored filter-major (r[o*n + i]); convolutions are
// "valid" (n = len - m + 1), following the paper's cycle formula.
//
// All outputs are registered. A read is issued at a rising edge, the memories
// read at the falling edge, and the consumer (MACs, or the IM write port)
// acts at the next rising edge using the same registered controls.
module tsc_mc
  import tsc_pkg::*;
#(
  parameter int unsigned WAW = 17,   // weight-bank address width
  parameter int unsigned IAW = 12    // internal-memory address width
)(
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,
  input  logic            start,
  input  logic            win_valid,
  input  data_t           wr_value,    // value being written back (for arg-max)
  output mc_state_e       state,
  output logic            busy,
  output logic            win_ready,
  output logic            out_valid,
  output logic [4:0]      label,
  output logic [7:0]      step,
  // enables
  output logic            en_macs,
  output logic            en_nfs,
  output logic            en_ims,
  output logic            en_wbs,
  // weight bank read
  output wb_bank_e        wb_bank,
  output logic [WAW-1:0]  wb_addr,
  // internal memory reads
  output im_sel_e         act_sel,
  output logic [IAW-1:0]  act_addr,
  output logic [IAW-1:0]  vec_addr,
  // MACs
  output logic            mac_acc_en,
  output logic            mac_first,
  output mac_mode_e       mac_mode,
  // write-back
  output logic            wr_en,
  output im_sel_e         wr_sel,
  output logic [IAW-1:0]  wr_addr,
  output wr_src_e         wr_src,
  output logic [4:0]      wr_lane,
  output nf_func_e        wr_func,
  output logic            wr_addx,
  output logic            vwr_en,
  output logic [IAW-1:0]  vwr_addr
);

  // ---------------- derived sizes ----------------
  logic [15:0] lx;             // LSTM input length M*omega_s
  logic [15:0] n1, n2;         // CNN output lengths
  assign lx = 16'(cfg.m_ch) * 16'(cfg.win);
  assign n1 = 16'(cfg.win) - 16'(cfg.k1) + 16'd1;
  assign n2 = n1 - 16'(cfg.k2) + 16'd1;

  // ---------------- matrix-vector operation descriptor ----------------
  typedef struct packed {
    wb_bank_e    bank;
    mac_mode_e   mode;
    logic [15:0] k;        // inputs per pass
    logic [15:0] passes;
    logic [5:0]  nwb;      // lanes written back per pass
    logic [16:0] wbase;
    logic        conv;     // convolution addressing, weights reused every pass
    logic [2:0]  klen;     // conv: kernel length
    logic [15:0] lin;      // conv: input length per channel
    im_sel_e     in_sel;
  } op_t;

  logic  layer;            // S1: 0 = layer 1, 1 = layer 2
  logic  grp;              // S1: filter group (filters 32*grp .. 32*grp+31)
  op_t   op;

  // S1 filter groups: one lane per filter, so a layer of more than 32 filters
  // is run as two groups of passes, each group with its own weight words.
  logic [15:0] k_l1, k_l2;       // inputs per pass of each layer
  logic [16:0] base_l2;          // first weight word of layer 2
  logic [5:0]  f_cur;            // filters of the current layer
  assign k_l1    = 16'(cfg.m_ch) * 16'(cfg.k1);
  assign k_l2    = 16'(cfg.f1) * 16'(cfg.k2);
  assign base_l2 = (cfg.f1 > 6'(LANES)) ? 17'(k_l1) << 1 : 17'(k_l1);
  assign f_cur   = layer ? cfg.f2 : cfg.f1;
  wire   more_grp = !grp && (f_cur > 6'(LANES));

  always_comb begin
    op = '0;
    op.mode = MAC_TERN;
    op.bank = WB_CNN;
    op.in_sel = IM_X;
    unique case (state)
      ST_S1: begin
        op.bank  = WB_CNN;  op.mode = MAC_TERN; op.conv = 1'b1;
        if (!layer) begin
          op.klen = cfg.k1; op.lin = 16'(cfg.win);
          op.passes = n1; op.in_sel = IM_X; op.k = k_l1;
          op.wbase = grp ? 17'(k_l1) : '0;
        end else begin
          op.klen = cfg.k2; op.lin = n1;
          op.passes = n2; op.in_sel = IM_FM1; op.k = k_l2;
          op.wbase = grp ? base_l2 + 17'(k_l2) : base_l2;
        end
        op.nwb = grp ? f_cur - 6'(LANES) : (more_grp ? 6'(LANES) : f_cur);
      end
      ST_S2: begin
        op.bank = WB_FC; op.mode = MAC_FULL; op.in_sel = IM_FM2;
        op.k = 16'(cfg.f2) * n2; op.passes = (lx + 16'd3) >> 2; op.nwb = 6'(FC_PER_WORD);
      end
      ST_S3: begin
        op.bank = WB_LSTM; op.mode = MAC_TERN; op.in_sel = IM_H;
        op.k = 16'(cfg.nh) + lx; op.passes = (16'(cfg.nh) + 16'd7) >> 3; op.nwb = 6'(LANES);
      end
      ST_S8: begin
        op.bank = WB_Y; op.mode = MAC_FULL; op.in_sel = IM_H;
        op.k = 16'(cfg.nh); op.passes = 16'(cfg.ny); op.nwb = 6'd1;
      end
      default: ;
    endcase
  end

  // ---------------- counters ----------------
  logic        wb_phase;        // 0: accumulate, 1: write back
  logic [15:0] pcnt, kcnt;      // pass, input index
  logic [7:0]  ci;              // conv channel
  logic [2:0]  ai;              // conv tap
  logic [15:0] rowb;            // conv: ci * lin
  logic [16:0] wptr;            // weight address
  logic [5:0]  lcnt;            // write-back lane
  logic [15:0] jcnt;            // element counter (INIT, S4..S7)
  logic        fin_pending;
  data_t       best;

  wire mv_state   = (state == ST_S1) || (state == ST_S2) || (state == ST_S3) ||
                    (state == ST_S8 && step == cfg.q - 8'd1);
  wire last_k     = (kcnt == op.k - 16'd1);
  wire last_l     = (lcnt == op.nwb - 6'd1);
  wire last_p     = (pcnt == op.passes - 16'd1);
  wire last_j     = (jcnt == 16'(cfg.nh) - 16'd1);
  wire xin_src_x  = !cfg.cnn_en;   // without CNN the LSTM reads x directly

  // write-back destination of lane lcnt in pass pcnt
  logic [15:0] wb_j;
  logic        wb_ok;
  im_sel_e     wb_sel;
  always_comb begin
    wb_j = '0; wb_ok = 1'b0; wb_sel = IM_Y;
    unique case (state)
      ST_S1: begin
        wb_j = (16'(lcnt) + (grp ? 16'(LANES) : 16'd0)) * op.passes + pcnt; wb_ok = 1'b1;
        wb_sel = layer ? IM_FM2 : IM_FM1;
      end
      ST_S2: begin
        wb_j = (pcnt << 2) + 16'(lcnt); wb_ok = (wb_j < lx); wb_sel = IM_XIN;
      end
      ST_S3: begin
        wb_j = (pcnt << 3) + 16'(lcnt[2:0]); wb_ok = (wb_j < 16'(cfg.nh));
        wb_sel = im_sel_e'(4'(IM_G0) + 4'(lcnt[4:3]));
      end
      ST_S8: begin
        wb_j = pcnt; wb_ok = 1'b1; wb_sel = IM_Y;
      end
      default: ;
    endcase
  end

  // ---------------- main sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE; layer <= 1'b0; grp <= 1'b0; step <= '0;
      wb_phase <= 1'b0; pcnt <= '0; kcnt <= '0; ci <= '0; ai <= '0; rowb <= '0;
      wptr <= '0; lcnt <= '0; jcnt <= '0;
      out_valid <= 1'b0; label <= '0; fin_pending <= 1'b0; best <= '0;
      wb_bank <= WB_CNN; wb_addr <= '0; act_sel <= IM_X; act_addr <= '0; vec_addr <= '0;
      mac_acc_en <= 1'b0; mac_first <= 1'b0; mac_mode <= MAC_TERN;
      wr_en <= 1'b0; wr_sel <= IM_Y; wr_addr <= '0; wr_src <= WR_ZERO; wr_lane <= '0;
      wr_func <= NF_PASS; wr_addx <= 1'b0; vwr_en <= 1'b0; vwr_addr <= '0;
    end else begin
      // defaults: nothing issued this cycle
      mac_acc_en <= 1'b0; mac_first <= 1'b0;
      wr_en <= 1'b0; wr_addx <= 1'b0; vwr_en <= 1'b0; wr_func <= NF_PASS; wr_src <= WR_ZERO;
      out_valid <= 1'b0;

      // arg-max over the scores as they are written
      if (wr_en && wr_sel == IM_Y) begin
        if (wr_addr == '0 || wr_value > best) begin
          best  <= wr_value;
          label <= 5'(wr_addr);
        end
      end
      if (fin_pending) begin
        fin_pending <= 1'b0;
        out_valid   <= 1'b1;
      end

      if (mv_state) begin
        // ---------- matrix-vector engine ----------
        if (!wb_phase) begin
          wb_bank    <= op.bank;
          wb_addr    <= WAW'(wptr);
          mac_acc_en <= 1'b1;
          mac_first  <= (kcnt == '0);
          mac_mode   <= op.mode;
          if (op.conv) begin
            act_sel  <= op.in_sel;
            act_addr <= IAW'(rowb + pcnt + 16'(ai));
            if (ai == op.klen - 3'd1) begin ai <= '0; ci <= ci + 8'd1; rowb <= rowb + op.lin; end
            else ai <= ai + 3'd1;
          end else if (state == ST_S3 && kcnt >= 16'(cfg.nh)) begin
            act_sel  <= xin_src_x ? IM_X : IM_XIN;
            act_addr <= IAW'(kcnt - 16'(cfg.nh));
          end else begin
            act_sel  <= op.in_sel;
            act_addr <= IAW'(kcnt);
          end
          wptr <= wptr + 17'd1;
          if (last_k) begin
            kcnt <= '0; wb_phase <= 1'b1; lcnt <= '0;
          end else kcnt <= kcnt + 16'd1;
        end else begin
          wr_en   <= wb_ok;
          wr_sel  <= wb_sel;
          wr_addr <= IAW'(wb_j);
          wr_src  <= WR_MAC;
          wr_lane <= 5'(lcnt);
          wr_func <= (state == ST_S1) ? NF_RELU : NF_PASS;
          if (state == ST_S2) begin
            wr_addx  <= 1'b1;
            act_sel  <= IM_X;
            act_addr <= IAW'(wb_j);
          end
          if (last_l) begin
            lcnt <= '0; wb_phase <= 1'b0; ci <= '0; ai <= '0; rowb <= '0;
            if (op.conv) wptr <= op.wbase;     // conv weights are reused every pass
            if (last_p) begin
              pcnt <= '0; wptr <= '0;
              unique case (state)
                ST_S1: if (more_grp) begin grp <= 1'b1; wptr <= op.wbase + 17'(op.k); end
                       else if (!layer) begin layer <= 1'b1; grp <= 1'b0; wptr <= base_l2; end
                       else begin layer <= 1'b0; grp <= 1'b0; state <= ST_S2; end
                ST_S2: state <= ST_S3;
                ST_S3: begin state <= ST_S4; jcnt <= '0; end
                default: begin  // ST_S8
                  state <= ST_IDLE; step <= '0; fin_pending <= 1'b1;
                end
              endcase
            end else pcnt <= pcnt + 16'd1;
          end else lcnt <= lcnt + 6'd1;
        end
      end else begin
        unique case (state)
          ST_IDLE: if (start) begin state <= ST_INIT; jcnt <= '0; step <= '0; end
          ST_INIT: begin
            wr_en   <= 1'b1;
            wr_src  <= WR_ZERO;
            wr_sel  <= (jcnt < 16'(cfg.nh)) ? IM_H : IM_C;
            wr_addr <= IAW'((jcnt < 16'(cfg.nh)) ? jcnt : jcnt - 16'(cfg.nh));
            if (jcnt == (16'(cfg.nh) << 1) - 16'd1) begin jcnt <= '0; state <= ST_WAIT; end
            else jcnt <= jcnt + 16'd1;
          end
          ST_WAIT: if (win_valid) begin
            state <= cfg.cnn_en ? ST_S1 : ST_S3;
            layer <= 1'b0; grp <= 1'b0; pcnt <= '0; kcnt <= '0; lcnt <= '0; wb_phase <= 1'b0;
            ci <= '0; ai <= '0; rowb <= '0; wptr <= '0;
          end
          ST_S4: begin   // sigma(f), sigma(i), sigma(o), tanh(c~), in place
            vec_addr <= IAW'(jcnt);
            vwr_en   <= 1'b1;
            vwr_addr <= IAW'(jcnt);
            if (last_j) begin jcnt <= '0; state <= ST_S5; end else jcnt <= jcnt + 16'd1;
          end
          ST_S5: begin   // c = hf*c + hc*hi
            vec_addr <= IAW'(jcnt);
            act_sel  <= IM_C;  act_addr <= IAW'(jcnt);
            wr_en <= 1'b1; wr_sel <= IM_C; wr_addr <= IAW'(jcnt); wr_src <= WR_CELL;
            if (last_j) begin jcnt <= '0; state <= ST_S6; end else jcnt <= jcnt + 16'd1;
          end
          ST_S6: begin   // tanh(c) into gate bank 3
            act_sel <= IM_C;  act_addr <= IAW'(jcnt);
            wr_en <= 1'b1; wr_sel <= IM_G3; wr_addr <= IAW'(jcnt); wr_src <= WR_ACT;
            wr_func <= NF_TANH;
            if (last_j) begin jcnt <= '0; state <= ST_S7; end else jcnt <= jcnt + 16'd1;
          end
          ST_S7: begin   // h = ho * tanh(c)
            vec_addr <= IAW'(jcnt);
            wr_en <= 1'b1; wr_sel <= IM_H; wr_addr <= IAW'(jcnt); wr_src <= WR_HID;
            if (last_j) begin
              jcnt <= '0; state <= ST_S8;
              pcnt <= '0; kcnt <= '0; lcnt <= '0; wb_phase <= 1'b0; wptr <= '0;
            end else jcnt <= jcnt + 16'd1;
          end
          ST_S8: begin   // not the last window: next window
            step  <= step + 8'd1;
            state <= ST_WAIT;
          end
          default: state <= ST_IDLE;
        endcase
      end
    end
  end

  // Enables: a unit is switched on only in the states that use it. They are
  // registered like the other controls, so they cover the cycle in which the
  // units act on what the state issued.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_wbs <= 1'b0; en_macs <= 1'b0; en_nfs <= 1'b0; en_ims <= 1'b0;
    end else begin
      en_wbs  <= mv_state;
      en_macs <= mv_state || (state == ST_S5) || (state == ST_S7);
      en_nfs  <= (state == ST_S1) || (state == ST_S4) || (state == ST_S6);
      en_ims  <= (state != ST_IDLE) && (state != ST_WAIT);
    end
  end

  assign busy      = (state != ST_IDLE) && (state != ST_WAIT);
  assign win_ready = (state == ST_WAIT);

endmodule
