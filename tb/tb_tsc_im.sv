// tb_tsc_im: test of the internal memories.
//
// Fills every buffer through the scalar write port (and the input window
// through the external port, the gate banks also through the vector write
// port), keeping a copy here, then reads back through the scalar port and
// the four-bank vector port with falling-edge timing (address after a rising
// edge, data at the next one). Also checks the external score read and that
// reads hold while En_IMs is low.
module tb_tsc_im;
  import tsc_pkg::*;
  localparam int unsigned XD = 40, FMD = 50, NH = 20, NY = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0;
  im_sel_e act_sel = IM_X, wr_sel = IM_X;
  logic [11:0] act_addr = '0, vec_addr = '0, wr_addr = '0, vwr_addr = '0, x_wr_addr = '0;
  data_t act_data, wr_data = '0, x_wr_data = '0, y_rd_data;
  data_t vec_data [IM_VEC], vwr_data [IM_VEC];
  logic wr_en = 0, vwr_en = 0, x_wr_en = 0;
  logic [4:0] y_rd_addr = '0;
  int checks = 0, failures = 0;
  int model [16][64];

  tsc_im #(.X_DEPTH(XD), .FM_DEPTH(FMD), .NH_MAX(NH), .NY_MAX(NY)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int depth(im_sel_e s);
    case (s)
      IM_X, IM_XIN: return XD;
      IM_FM1, IM_FM2: return FMD;
      IM_Y: return NY;
      default: return NH;
    endcase
  endfunction
  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp); end
  endtask

  im_sel_e sels [11] = '{IM_X, IM_FM1, IM_FM2, IM_XIN, IM_H, IM_C, IM_Y, IM_G0, IM_G1, IM_G2, IM_G3};

  initial begin
    vwr_data = '{default: '0};
    @(negedge clk);
    foreach (sels[i]) for (int a = 0; a < depth(sels[i]); a++) begin
      automatic int v = $urandom_range(0, 4095) - 2048;
      model[sels[i]][a] = v;
      if (sels[i] == IM_X && a % 2 == 0) begin   // half of x through the external port
        x_wr_en = 1; x_wr_addr = 12'(a); x_wr_data = 12'(v);
      end else begin
        wr_en = 1; wr_sel = sels[i]; wr_addr = 12'(a); wr_data = 12'(v);
      end
      @(negedge clk);
      wr_en = 0; x_wr_en = 0;
    end
    // overwrite some gate entries through the vector write port
    for (int a = 0; a < NH; a += 3) begin
      vwr_en = 1; vwr_addr = 12'(a);
      for (int g = 0; g < 4; g++) begin
        automatic int v = $urandom_range(0, 4095) - 2048;
        vwr_data[g] = 12'(v); model[int'(IM_G0) + g][a] = v;
      end
      @(negedge clk);
    end
    vwr_en = 0;
    // scalar and vector reads
    for (int i = 0; i < 400; i++) begin
      automatic int s = $urandom_range(0, 10);
      automatic int a = $urandom_range(0, depth(sels[s]) - 1);
      automatic int va = $urandom_range(0, NH - 1);
      @(posedge clk); #1;
      en = 1; act_sel = sels[s]; act_addr = 12'(a); vec_addr = 12'(va);
      @(posedge clk); #1;
      chk(int'(act_data), model[sels[s]][a], $sformatf("scalar sel %0d addr %0d", s, a));
      for (int g = 0; g < 4; g++) chk(int'(vec_data[g]), model[int'(IM_G0) + g][va], $sformatf("vector gate %0d addr %0d", g, va));
    end
    for (int a = 0; a < NY; a++) begin y_rd_addr = 5'(a); #1; chk(int'(y_rd_data), model[IM_Y][a], "score read"); end
    // En_IMs low: reads hold
    begin
      automatic int held = int'(act_data);
      en = 0; act_addr = act_addr + 12'd1;
      @(posedge clk); @(posedge clk); #1;
      chk(int'(act_data), held, "hold while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
