// tb_tsc_mac_array: random test of the 32-lane MAC block.
//
// Runs sums of random length in ternary mode (all 32 lanes) and in
// full-precision mode (5 lanes), each sum restarted with 'first', and checks
// every lane's 12-bit result the cycle after the last accumulate against a
// reference computed here (sum, shift by 8 in full mode, saturate). Also
// checks the combinational element-wise result (a*b + c*d) >> 8, that
// acc_en low holds the sums, and that En_MACs low freezes them.
module tb_tsc_mac_array;
  import tsc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, acc_en, first;
  mac_mode_e mode;
  data_t act;
  logic [WB_W-1:0] wword;
  data_t res [LANES];
  data_t elem_res;
  int checks = 0, failures = 0;

  tsc_mac_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(longint v); return (v > 2047) ? 2047 : (v < -2048) ? -2048 : int'(v); endfunction
  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp); end
  endtask

  longint ref_acc [LANES];

  task automatic run_sum(mac_mode_e m, int len, int amax);
    for (int l = 0; l < LANES; l++) ref_acc[l] = 0;
    for (int k = 0; k < len; k++) begin
      automatic int a = $urandom_range(0, 2 * amax) - amax;
      @(negedge clk);
      en = 1; acc_en = 1; first = (k == 0); mode = m; act = 12'(a);
      for (int l = 0; l < LANES; l++) begin
        if (m == MAC_TERN) begin
          automatic int r = $urandom_range(0, 3);
          automatic int w = (r == 0) ? -1 : (r == 1) ? 1 : 0;
          wword[2*l +: 2] = (w == 1) ? 2'b01 : (w == -1) ? 2'b11 : (r == 2) ? 2'b00 : 2'b10;
          ref_acc[l] += w * a;
        end else if (l < 5) begin
          automatic int w = $urandom_range(0, 4095) - 2048;
          wword[12*l +: 12] = 12'(w);
          ref_acc[l] += longint'(w) * a;
        end
      end
      if (m == MAC_FULL) wword[63:60] = 4'($urandom);
    end
    @(negedge clk);
    acc_en = 0; first = 0; wword = {2{$urandom}};
    @(negedge clk);   // idle cycle: sums must hold
    for (int l = 0; l < LANES; l++)
      if (m == MAC_TERN)  chk(int'(res[l]), sat(ref_acc[l]), $sformatf("tern lane %0d", l));
      else if (l < 5)     chk(int'(res[l]), sat(ref_acc[l] >>> 8), $sformatf("full lane %0d", l));
  endtask

  initial begin
    en = 0; acc_en = 0; first = 0; mode = MAC_TERN; act = '0; wword = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) run_sum(MAC_TERN, $urandom_range(1, 60), (t < 20) ? 200 : 2047);
    for (int t = 0; t < 40; t++) run_sum(MAC_FULL, $urandom_range(1, 40), (t < 20) ? 300 : 2047);
    // En_MACs low freezes the sums
    @(negedge clk);
    en = 0; acc_en = 1; first = 1; mode = MAC_FULL; act = 12'd100; wword = 64'({5{12'd7}});
    @(negedge clk);
    acc_en = 0;
    for (int l = 0; l < 5; l++) chk(int'(res[l]), sat(ref_acc[l] >>> 8), "frozen while disabled");
    // element-wise mode
    en = 1; mode = MAC_ELEM;
    for (int t = 0; t < 500; t++) begin
      automatic int a = $urandom_range(0, 4095) - 2048, b = $urandom_range(0, 4095) - 2048;
      automatic int c = $urandom_range(0, 4095) - 2048, d = $urandom_range(0, 4095) - 2048;
      wword = {16'h0, 12'(d), 12'(c), 12'(b), 12'(a)};
      #1;
      chk(int'(elem_res), sat((longint'(a) * b + longint'(c) * d) >>> 8), "elem");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
