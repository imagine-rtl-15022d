// tb_output_reg: writes SAR decisions bit by bit into the masters while the
// slaves hold the previous result, then checks that dout changes only at the
// CS_out edge and then shows the new codes.
module tb_output_reg;
  import imagine_pkg::*;
  logic clk_tg = 0, clk = 0, cs_out = 0;
  ctl_t ctl; logic [N_COLS-1:0] d_adc;
  logic [7:0] dout [N_COLS];
  logic [7:0] code [N_COLS], prev [N_COLS];
  int checks = 0, failures = 0;
  output_reg dut (.*);
  always #1 clk_tg = ~clk_tg;
  always #50 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    ctl = '0; d_adc = '0;
    for (int j = 0; j < N_COLS; j++) prev[j] = 0;
    for (int it = 0; it < 6; it++) begin
      int ro; ro = 1 + $urandom % 8;
      for (int j = 0; j < N_COLS; j++) code[j] = 8'($urandom % (1 << ro));
      @(negedge clk_tg); ctl = '0; ctl.cs_adc = 1;
      for (int b = ro - 1; b >= 0; b--) begin
        @(negedge clk_tg); ctl = '0; ctl.cs_sar[b] = 1;
        for (int j = 0; j < N_COLS; j++) d_adc[j] = code[j][b];
      end
      @(negedge clk_tg); ctl = '0; d_adc = $urandom;
      if (it > 0) begin
        bit ok = 1;
        for (int j = 0; j < N_COLS; j++) ok &= (dout[j] == prev[j]);
        checks++; if (!ok) begin failures++; $display("FAIL slave changed before CS_out"); end
      end
      @(negedge clk); cs_out = 1; @(negedge clk); cs_out = 0;
      for (int j = 0; j < N_COLS; j++) begin
        checks++;
        if (dout[j] !== code[j]) begin failures++; if (failures < 10) $display("FAIL it=%0d col=%0d %h/%h", it, j, dout[j], code[j]); end
        prev[j] = code[j];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
