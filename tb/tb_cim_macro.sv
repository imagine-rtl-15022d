// tb_cim_macro: the full 1152 x 256 macro model. Random weights and ABN
// offsets are written through the R/W port, the SA offsets are given a 5 mV
// spread and calibrated, then for several precision / channel / gain
// configurations random inputs are shifted in, a CIM operation is run and
// every valid output column is compared with the closed-form transfer
// function (tolerance one code). It also checks that the outputs change only
// at CS_out, one clock after the request (N_cim = 1).
module tb_cim_macro;
  import imagine_pkg::*;
  import tb_golden_pkg::*;
  logic clk = 0, clk_tg = 0, rst_n = 0;
  logic sr_load = 0, cim_start = 0, cal_start = 0, cs_out = 0;
  logic [31:0] ch; logic [2:0] cs_k; sr_din_t din;
  logic [3:0] r_in, r_out; logic [2:0] r_w, gamma; logic [7:0] c_in;
  logic rw_en = 0, rw_we = 0; logic [13:0] rw_addr; logic [31:0] rw_wdata, rw_rdata;
  logic [7:0] dout [N_COLS]; logic busy;
  logic [N_COLS-1:0] wbit [N_ROWS];
  logic [7:0] xin [N_ROWS];
  logic signed [4:0] bref [N_COLS];
  int checks = 0, failures = 0, exact = 0, total = 0;

  cim_macro #(.SA_SIGMA(5.0e-3)) dut (.*);
  always #1 clk_tg = ~clk_tg;
  always #64 clk = ~clk;
  initial begin #400000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic rw_write(input int a, input logic [31:0] d);
    @(negedge clk); rw_en = 1; rw_we = 1; rw_addr = 14'(a); rw_wdata = d;
    @(negedge clk); rw_en = 0; rw_we = 0;
  endtask

  task automatic run_cfg(input int ri, input int rw, input int ro, input int ci, input int g);
    int nu, cout; logic [7:0] prev_out [N_COLS];
    r_in = 4'(ri); r_w = 3'(rw); r_out = 4'(ro); c_in = 8'(ci); gamma = 3'(g);
    nu = ci / 4;
    // shift in three random kernel columns into every group
    for (int l = 0; l < 3; l++) begin
      @(negedge clk);
      sr_load = 1; ch = '1; cs_k = '1;
      for (int u = 0; u < 32; u++) for (int k = 0; k < 3; k++) for (int c = 0; c < 4; c++) begin
        int r0; r0 = u*36 + k*12 + c*3;
        din[u][k][c] = 8'($urandom % (1 << ri));
        xin[r0+2] = xin[r0+1]; xin[r0+1] = xin[r0]; xin[r0] = din[u][k][c];
      end
    end
    @(negedge clk); sr_load = 0; cim_start = 1;
    @(negedge clk); cim_start = 0;
    prev_out = dout;
    cs_out = 1;
    checks++;
    if (dout != prev_out) begin failures++; $display("FAIL dout changed prev_out CS_out"); end
    @(negedge clk); cs_out = 0;
    cout = n_cout(rw);
    for (int o = 0; o < cout; o++) begin
      real dvc [4]; real dv; int msb, first, e;
      msb = (rw == 1) ? o : (rw == 2) ? 2*o + 1 : 4*o + rw - 1;
      first = msb - rw + 1;
      for (int k = 0; k < 4; k++) begin
        int s; s = 0;
        if (k < rw)
          for (int i = 0; i < 36*nu; i++) s += int'(xin[i]) * (wbit[i][first + k] ? 1 : -1);
        dvc[k] = (k < rw) ? dv_inputs(s, nu, ri) : 0.0;
      end
      dv = dv_weights(dvc, rw) + real'(bref[msb]) * BETA_LSB;
      e = adc_code(dv, g, ro);
      checks++; total++;
      if (int'(dout[msb]) == e) exact++;
      if (int'(dout[msb]) - e > 1 || e - int'(dout[msb]) > 1) begin
        failures++;
        if (failures < 10) $display("FAIL ri=%0d rw=%0d ro=%0d ci=%0d g=%0d o=%0d got=%0d exp=%0d", ri, rw, ro, ci, g, o, dout[msb], e);
      end
    end
  endtask

  initial begin
    r_in = 1; r_w = 1; r_out = 1; c_in = 4; gamma = 0; ch = '0; cs_k = '0; din = '0;
    for (int i = 0; i < N_ROWS; i++) xin[i] = 0;
    #10 rst_n = 1;
    for (int i = 0; i < N_ROWS; i++) begin
      for (int w = 0; w < 8; w++) begin
        logic [31:0] d; d = $urandom;
        wbit[i][32*w +: 32] = d;
        @(negedge clk); rw_en = 1; rw_we = 1; rw_addr = 14'(i*8 + w); rw_wdata = d;
      end
    end
    @(negedge clk); rw_en = 0; rw_we = 0;
    for (int a = 0; a < 64; a++) begin
      logic [31:0] d; d = 0;
      for (int i = 0; i < 4; i++) begin
        bref[4*a + i] = 5'(int'($urandom % 9) - 4);
        d[8*i +: 5] = bref[4*a + i];
      end
      rw_write(9216 + a, d);
    end
    // read back one weight word and one offset word
    @(negedge clk); rw_en = 1; rw_addr = 14'(8*5 + 3);
    @(negedge clk); rw_en = 0; checks++;
    if (rw_rdata != wbit[5][96 +: 32]) begin failures++; $display("FAIL weight readback"); end
    @(negedge clk); rw_en = 1; rw_addr = 14'(9216 + 7);
    @(negedge clk); rw_en = 0; checks++;
    if (rw_rdata[4:0] != bref[28] || rw_rdata[12:8] != bref[29]) begin failures++; $display("FAIL offset readback"); end
    // calibration
    @(negedge clk); cal_start = 1; @(negedge clk); cal_start = 0; @(negedge clk);
    run_cfg(8, 4, 8, 128, 0);
    run_cfg(8, 1, 8, 128, 2);
    run_cfg(4, 2, 4, 16, 1);
    run_cfg(1, 1, 8, 4, 0);
    run_cfg(2, 3, 2, 64, 1);
    run_cfg(1, 4, 8, 32, 2);
    run_cfg(8, 2, 8, 8, 0);
    checks++;
    if (exact * 10 < total * 8) begin failures++; $display("FAIL only %0d of %0d codes exact", exact, total); end
    $display("exact codes: %0d of %0d", exact, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
