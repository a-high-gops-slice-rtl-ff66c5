// tb_tsc_wb: test of the weight banks.
//
// Writes random words to random addresses of all four banks (keeping a copy
// here), then reads them back in random order: the address is presented just
// after a rising edge and the data must be there at the next rising edge
// (falling-edge read). Checks the word widths of the full-precision banks
// (48 and 12 bits kept), and that with En_WBs low the read data hold.
module tb_tsc_wb;
  import tsc_pkg::*;
  localparam int unsigned CD = 64, FD = 200, LD = 300, YD = 100;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, wr_en = 0;
  wb_bank_e rd_bank = WB_CNN, wr_bank = WB_CNN;
  logic [16:0] rd_addr = '0, wr_addr = '0;
  logic [WB_W-1:0] rd_data, wr_data = '0;
  int checks = 0, failures = 0;
  logic [WB_W-1:0] model [4][int];

  tsc_wb #(.CNN_DEPTH(CD), .FC_DEPTH(FD), .LSTM_DEPTH(LD), .Y_DEPTH(YD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int depth(int b); return (b == 0) ? CD : (b == 1) ? FD : (b == 2) ? LD : YD; endfunction
  function automatic logic [WB_W-1:0] mask(int b, logic [WB_W-1:0] d);
    return (b == 1) ? {16'h0, d[47:0]} : (b == 3) ? {52'h0, d[11:0]} : d;
  endfunction

  initial begin
    @(negedge clk);
    for (int i = 0; i < 600; i++) begin
      automatic int b = $urandom_range(0, 3);
      automatic int a = $urandom_range(0, depth(b) - 1);
      automatic logic [WB_W-1:0] d = {$urandom, $urandom};
      wr_en = 1; wr_bank = wb_bank_e'(b); wr_addr = 17'(a); wr_data = d;
      model[b][a] = mask(b, d);
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 600; i++) begin
      automatic int b = $urandom_range(0, 3);
      automatic int a; automatic int n = 0;
      if (model[b].size() == 0) continue;
      a = $urandom_range(0, model[b].size() - 1);
      foreach (model[b][k]) begin if (n == a) begin a = k; break; end n++; end
      @(posedge clk); #1;
      en = 1; rd_bank = wb_bank_e'(b); rd_addr = 17'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[b][a]) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d addr %0d got %h exp %h", b, a, rd_data, model[b][a]);
      end
    end
    // En_WBs low: the output holds
    begin
      automatic logic [WB_W-1:0] held = rd_data;
      en = 0; rd_addr = rd_addr + 17'd1;
      @(posedge clk); @(posedge clk); #1;
      checks++;
      if (rd_data !== held) begin failures++; $display("FAIL read while disabled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
