// tb_tsc_nf: exhaustive test of the non-linear function unit.
//
// Every 12-bit input is applied to the four lanes with four different
// functions (sigmoid, tanh, ReLU, pass). Expected values are computed here
// with real arithmetic: the table address floor((u - u_min)/du) (clamped for
// tanh) and the entry round(256 * f(u_min + (addr + 0.5) du)). The unit is
// combinational; a final check confirms that En_NFs low forces zero outputs.
module tb_tsc_nf;
  import tsc_pkg::*;
  logic     en;
  nf_func_e func [IM_VEC];
  data_t    din  [IM_VEC];
  data_t    dout [IM_VEC];
  int checks = 0, failures = 0;

  tsc_nf dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(real v); return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5)); endfunction
  function automatic int ref_sig(int u);
    int a = int'($floor((real'(u) / 256.0 + 8.0) / 0.25));
    real x = -8.0 + (a + 0.5) * 0.25;
    return rnd(256.0 / (1.0 + $exp(-x)));
  endfunction
  function automatic int ref_tanh(int u);
    int a = int'($floor((real'(u) / 256.0 + 4.0) / 0.125));
    real x;
    if (a < 0) a = 0;
    if (a > 63) a = 63;
    x = -4.0 + (a + 0.5) * 0.125;
    return rnd(256.0 * (1.0 - $exp(-2.0 * x)) / (1.0 + $exp(-2.0 * x)));
  endfunction

  task automatic chk(int got, int exp, string what, int u);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s u=%0d got=%0d exp=%0d", what, u, got, exp);
    end
  endtask

  initial begin
    en = 1'b1;
    func = '{NF_SIG, NF_TANH, NF_RELU, NF_PASS};
    for (int u = -2048; u < 2048; u++) begin
      for (int l = 0; l < IM_VEC; l++) din[l] = 12'(u);
      #1;
      chk(int'(dout[0]), ref_sig(u), "sigmoid", u);
      chk(int'(dout[1]), ref_tanh(u), "tanh", u);
      chk(int'(dout[2]), (u < 0) ? 0 : u, "relu", u);
      chk(int'(dout[3]), u, "pass", u);
    end
    // lanes are independent: rotate the functions
    func = '{NF_TANH, NF_PASS, NF_SIG, NF_RELU};
    for (int l = 0; l < IM_VEC; l++) din[l] = 12'(-300 + 211 * l);
    #1;
    chk(int'(dout[0]), ref_tanh(-300), "tanh lane0", -300);
    chk(int'(dout[1]), -89, "pass lane1", -89);
    chk(int'(dout[2]), ref_sig(122), "sigmoid lane2", 122);
    chk(int'(dout[3]), 333, "relu lane3", 333);
    en = 1'b0; #1;
    for (int l = 0; l < IM_VEC; l++) chk(int'(dout[l]), 0, "disabled", l);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
