// tb_ref_gen: checks the SAR cell steps for every gain code: binary ratios
// between cells, +/- VDDH/2 scaled MSB swing at unity gain and the 1/gamma
// zoom, saturating at gamma = 32.
module tb_ref_gen;
  import imagine_pkg::*;
  logic [2:0] gamma; real v_step [7];
  int checks = 0, failures = 0;
  ref_gen dut (.*);
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int g = 0; g < 8; g++) begin
      real e;
      gamma = 3'(g); #1;
      for (int m = 0; m < 7; m++) begin
        e = ALPHA_ADC * (VDDH / 2.0) / real'(1 << (6 - m)) / real'(1 << (g > 5 ? 5 : g));
        checks++;
        if (v_step[m] > e * 1.000001 || v_step[m] < e * 0.999999) begin
          failures++; $display("FAIL g=%0d m=%0d %g/%g", g, m, v_step[m], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
