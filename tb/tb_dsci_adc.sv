// tb_dsci_adc: one ADC column with an SA offset of +7 mV. First runs the
// calibration and checks that the code cancels the offset to within 1.5
// calibration steps; then converts random DPL voltages with random ABN
// offsets, gains and output precisions and compares each code with the ideal
// transfer function (tolerance one code for rounding at code boundaries).
module tb_dsci_adc;
  import imagine_pkg::*;
  import tb_golden_pkg::*;
  localparam real OFF = 7.0e-3;
  logic clk_tg = 0, rst_n = 0, start_tog = 0, cal_tog = 0;
  logic [3:0] r_in, r_out; logic [2:0] r_w, gamma;
  ctl_t ctl; logic busy;
  real v_in, v_step [7];
  logic [4:0] beta; logic d_adc; logic [6:0] cal_code;
  logic [7:0] code;
  int checks = 0, failures = 0, exact = 0;
  time_gen u_tg (.*);
  ref_gen u_ref (.gamma, .v_step);
  dsci_adc #(.SA_OFFSET(OFF)) dut (.*);
  always #1 clk_tg = ~clk_tg;
  always @(posedge clk_tg) begin
    if (ctl.cs_adc) code <= '0;
    for (int b = 0; b < 8; b++) if (ctl.cs_sar[b]) code[b] <= d_adc;
  end
  initial begin #4000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    real res;
    r_in = 1; r_w = 1; r_out = 8; gamma = 0; beta = 0; v_in = VDDL;
    #4 rst_n = 1;
    @(negedge clk_tg); cal_tog = ~cal_tog;
    @(negedge clk_tg); while (busy) @(negedge clk_tg);
    res = OFF + real'($signed(cal_code)) * CAL_LSB;
    checks++;
    if (res > 1.5 * CAL_LSB || res < -1.5 * CAL_LSB) begin failures++; $display("FAIL calibration residue %g", res); end
    for (int it = 0; it < 400; it++) begin
      int ro, g, e; real dv;
      int routs[4] = '{1, 2, 4, 8};
      ro = (it < 200) ? 8 : routs[it % 4]; g = $urandom % 6;
      r_out = 4'(ro); gamma = 3'(g); beta = 5'($urandom);
      v_in = VDDL + (real'($urandom % 20001) - 10000.0) * 4.0e-5 / real'(1 << g);
      @(negedge clk_tg); start_tog = ~start_tog;
      @(negedge clk_tg); while (busy) @(negedge clk_tg);
      dv = v_in - VDDL + real'($signed(beta)) * BETA_LSB + real'($signed(cal_code)) * CAL_LSB + OFF;
      e = adc_code(dv, g, ro);
      checks++;
      if (int'(code) == e) exact++;
      if (int'(code) - e > 1 || e - int'(code) > 1) begin
        failures++; if (failures < 10) $display("FAIL it=%0d ro=%0d g=%0d code=%0d exp=%0d", it, ro, g, code, e);
      end
    end
    checks++;
    if (exact < 390) begin failures++; $display("FAIL only %0d exact codes", exact); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
