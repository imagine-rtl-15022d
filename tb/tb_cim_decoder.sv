// tb_cim_decoder: checks the CH / CS_K enables for every supported r_in and
// C_in and every transfer of a kernel column against an enumeration of the
// bit positions of all (kernel row, channel) values.
module tb_cim_decoder;
  import imagine_pkg::*;
  logic [3:0] r_in; logic [7:0] c_in, xfer;
  logic [31:0] ch; logic [2:0] cs_k;
  int checks = 0, failures = 0;
  cim_decoder dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int rins[4] = '{1, 2, 4, 8};
    for (int a = 0; a < 4; a++)
      for (int cl = 2; cl <= 7; cl++) begin
        int nx;
        r_in = 4'(rins[a]); c_in = 8'(1 << cl);
        nx = (3 * rins[a] * (1 << cl) + 127) / 128;
        for (int t = 0; t < nx; t++) begin
          logic [31:0] ech; logic [2:0] ek;
          ech = '0; ek = '0;
          for (int k = 0; k < 3; k++)
            for (int c = 0; c < (1 << cl); c++)
              if (((k * (1 << cl) + c) * rins[a]) / 128 == t) begin ech[c/4] = 1; ek[k] = 1; end
          xfer = 8'(t); #1;
          checks++;
          if (ch !== ech || cs_k !== ek) begin
            failures++; $display("FAIL r_in=%0d c_in=%0d t=%0d ch=%h/%h k=%b/%b", r_in, c_in, t, ch, ech, cs_k, ek);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
