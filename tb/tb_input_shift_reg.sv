// tb_input_shift_reg: random group-enabled loads checked against a reference
// of per-row values: an enabled group shifts its kernel columns and takes the
// new column, other groups keep their contents.
module tb_input_shift_reg;
  import imagine_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  logic [31:0] ch; logic [2:0] cs_k;
  sr_din_t din;
  xval_t x [N_ROWS];
  logic [7:0] ref_x [N_ROWS];
  int checks = 0, failures = 0;
  input_shift_reg dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < N_ROWS; i++) ref_x[i] = 0;
    ch = '0; cs_k = '0; din = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      load = ($urandom % 4 != 0); ch = $urandom; cs_k = 3'($urandom);
      for (int u = 0; u < 32; u++) for (int k = 0; k < 3; k++) for (int c = 0; c < 4; c++) din[u][k][c] = 8'($urandom);
      if (load)
        for (int u = 0; u < 32; u++) for (int k = 0; k < 3; k++) if (ch[u] && cs_k[k])
          for (int c = 0; c < 4; c++) begin
            int r0; r0 = u*36 + k*12 + c*3;
            ref_x[r0+2] = ref_x[r0+1]; ref_x[r0+1] = ref_x[r0]; ref_x[r0] = din[u][k][c];
          end
      @(posedge clk); #1;
      for (int i = 0; i < N_ROWS; i++) begin
        checks++;
        if (x[i] !== ref_x[i]) begin failures++; if (failures < 10) $display("FAIL it=%0d row=%0d", it, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
