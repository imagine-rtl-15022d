// tb_bitseq_driver: random inputs, bit indices and unit counts; each DP-IN
// must equal the selected input bit for rows of connected units during the
// DP phase and be idle otherwise.
module tb_bitseq_driver;
  import imagine_pkg::*;
  xval_t x [N_ROWS];
  logic [2:0] bit_idx; logic cs_dp; logic [5:0] n_units;
  logic [N_ROWS-1:0] dp_in;
  int checks = 0, failures = 0;
  bitseq_driver dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int it = 0; it < 40; it++) begin
      for (int i = 0; i < N_ROWS; i++) x[i] = 8'($urandom);
      bit_idx = 3'($urandom); cs_dp = (it % 5 != 0); n_units = 6'(1 + $urandom % 32);
      #1;
      for (int i = 0; i < N_ROWS; i++) begin
        logic e;
        e = cs_dp && (i < 36 * n_units) && x[i][bit_idx];
        checks++;
        if (dp_in[i] !== e) begin failures++; if (failures < 10) $display("FAIL it=%0d row=%0d", it, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
