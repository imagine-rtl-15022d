// tb_dp_array: writes random weights through the R/W port, reads part of them
// back, then drives random DP-IN patterns for several numbers of connected
// DP units and compares every column voltage with the charge equation
// evaluated from the testbench's own copy of the weights.
module tb_dp_array;
  import imagine_pkg::*;
  logic clk = 0, rw_en = 0, rw_we = 0;
  logic [13:0] rw_addr; logic [31:0] rw_wdata, rw_rdata;
  logic [N_ROWS-1:0] dp_in; logic [5:0] n_units;
  real v_dp [N_COLS];
  logic [31:0] wref [N_ROWS*8];
  int checks = 0, failures = 0;
  dp_array dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    dp_in = '0; n_units = 32;
    for (int a = 0; a < N_ROWS*8; a++) begin
      @(negedge clk); rw_en = 1; rw_we = 1; rw_addr = 14'(a); rw_wdata = $urandom; wref[a] = rw_wdata;
    end
    for (int n = 0; n < 50; n++) begin
      int a; a = $urandom % (N_ROWS*8);
      @(negedge clk); rw_en = 1; rw_we = 0; rw_addr = 14'(a);
      @(negedge clk); rw_en = 0;
      checks++; if (rw_rdata !== wref[a]) begin failures++; $display("FAIL readback %0d", a); end
    end
    for (int it = 0; it < 12; it++) begin
      int nu; real a;
      nu = (it < 6) ? (1 << it) : 1 + $urandom % 32;
      n_units = 6'(nu);
      for (int i = 0; i < N_ROWS; i++) dp_in[i] = (i < 36*nu) && ($urandom % 2 == 1);
      if (it == 0) begin  // all driven rows store 1: maximal positive swing
        for (int i = 0; i < N_ROWS; i++) dp_in[i] = (i < 36*nu);
      end
      #1;
      a = CC / (36.0*nu*CC + nu*CP_LOC + C_L);
      for (int j = 0; j < N_COLS; j++) begin
        int s; real e;
        s = 0;
        for (int i = 0; i < N_ROWS; i++) if (dp_in[i]) s += wref[i*8 + j/32][j%32] ? 1 : -1;
        e = VDDL + VDDL * a * s;
        checks++;
        if (v_dp[j] - e > 1e-9 || e - v_dp[j] > 1e-9) begin
          failures++; if (failures < 10) $display("FAIL it=%0d col=%0d %g/%g", it, j, v_dp[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
