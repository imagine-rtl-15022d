// tb_mbiw_unit: drives one MBIW unit with the phase sequence of time_gen and
// random per-bit DP voltages, and compares the MSB-column voltage(s) with the
// closed form: inputs weighted 2^(k-r_in) (none for binary inputs), weight
// bits weighted 2^(k-r_w) (none for 1b weights).
module tb_mbiw_unit;
  import imagine_pkg::*;
  logic clk_tg = 0, rst_n = 0, start_tog = 0, cal_tog = 0;
  logic [3:0] r_in, r_out; logic [2:0] r_w;
  ctl_t ctl; logic busy;
  real v_dp [4], v_dpl [4];
  real dvb [8][4];
  int checks = 0, failures = 0;
  time_gen u_tg (.*);
  mbiw_unit dut (.clk_tg, .ctl, .v_dp, .v_dpl);
  always #1 clk_tg = ~clk_tg;
  always_comb for (int i = 0; i < 4; i++) v_dp[i] = VDDL + dvb[ctl.bit_idx][i];
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    r_in = 1; r_w = 1; r_out = 1;
    for (int b = 0; b < 8; b++) for (int i = 0; i < 4; i++) dvb[b][i] = 0.0;
    #4 rst_n = 1;
    for (int it = 0; it < 64; it++) begin
      int ri, rw; real dvc [4]; real e;
      ri = 1 + it % 8; rw = 1 + (it / 8) % 4;
      for (int b = 0; b < 8; b++) for (int i = 0; i < 4; i++)
        dvb[b][i] = (real'($urandom % 2001) - 1000.0) * 1.0e-4;
      @(negedge clk_tg);
      r_in = 4'(ri); r_w = 3'(rw); r_out = 4'd1;
      start_tog = ~start_tog;
      @(negedge clk_tg);
      while (!ctl.cs_adc) @(negedge clk_tg);
      for (int i = 0; i < 4; i++) begin
        dvc[i] = 0.0;
        if (ri == 1) dvc[i] = dvb[0][i];
        else for (int b = 0; b < ri; b++) dvc[i] += dvb[b][i] / real'(1 << (ri - b));
      end
      for (int g = 0; g < 4; g++) begin
        int msb; real dv;
        if (rw == 3 && g > 0) break;
        if (rw == 4 && g > 0) break;
        if (rw == 2 && g > 1) break;
        msb = (rw == 1) ? g : (rw == 2) ? 2*g + 1 : rw - 1;
        dv = 0.0;
        if (rw == 1) dv = dvc[g];
        else for (int k = 0; k < rw; k++) dv += dvc[msb - rw + 1 + k] / real'(1 << (rw - k));
        e = VDDL + dv;
        checks++;
        if (v_dpl[msb] - e > 1e-9 || e - v_dpl[msb] > 1e-9) begin
          failures++; $display("FAIL ri=%0d rw=%0d col=%0d %g/%g", ri, rw, msb, v_dpl[msb], e);
        end
      end
      while (busy) @(negedge clk_tg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
