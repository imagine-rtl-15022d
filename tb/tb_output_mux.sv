// tb_output_mux: random macro outputs; for every r_w and r_out the packed
// words are unpacked again and each field compared with the MSB column of
// its weight group (with and without signed conversion).
module tb_output_mux;
  import imagine_pkg::*;
  logic [7:0] dout [N_COLS];
  logic [2:0] r_w; logic [3:0] r_out; logic out_signed; logic [7:0] xfer;
  logic [127:0] word;
  int checks = 0, failures = 0;
  output_mux dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int routs[4] = '{1, 2, 4, 8};
    for (int it = 0; it < 32; it++) begin
      int rw, ro, cout, nw;
      for (int j = 0; j < N_COLS; j++) dout[j] = 8'($urandom);
      rw = 1 + it % 4; ro = routs[(it / 4) % 4]; out_signed = it[4];
      r_w = 3'(rw); r_out = 4'(ro);
      cout = (rw == 1) ? 256 : (rw == 2) ? 128 : 64;
      nw = (ro * cout + 127) / 128;
      for (int t = 0; t < nw; t++) begin
        xfer = 8'(t); #1;
        for (int f = 0; f < 128 / ro; f++) begin
          int o, col; logic [7:0] e, g;
          o = t * (128 / ro) + f;
          col = (rw == 1) ? o : (rw == 2) ? 4*(o/2) + 2*(o%2) + 1 : 4*o + rw - 1;
          e = 0;
          if (o < cout) begin
            e = dout[col] & 8'((1 << ro) - 1);
            if (out_signed) e[ro-1] = ~e[ro-1];
          end
          g = 8'((word >> (f * ro)) & 128'((1 << ro) - 1));
          checks++;
          if (g !== e) begin failures++; if (failures < 10) $display("FAIL rw=%0d ro=%0d o=%0d %h/%h", rw, ro, o, g, e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
