// tb_im2col_unit: loads random 128b words into the data buffer and checks
// every routed shift-register input against values re-assembled bit by bit
// from the word, for all r_in / C_in combinations, with signed conversion
// and padding.
module tb_im2col_unit;
  import imagine_pkg::*;
  logic clk = 0, buf_we = 0;
  logic [127:0] word_in;
  logic [3:0] r_in; logic [7:0] c_in, xfer;
  logic pad_col; logic [2:0] pad_row; logic in_signed;
  sr_din_t din;
  int checks = 0, failures = 0;
  im2col_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int rins[4] = '{1, 2, 4, 8};
    pad_col = 0; pad_row = 0; in_signed = 0;
    for (int it = 0; it < 60; it++) begin
      int a, cl, nx, t;
      logic [127:0] w;
      a = $urandom % 4; cl = 2 + $urandom % 6;
      r_in = 4'(rins[a]); c_in = 8'(1 << cl);
      nx = (3 * rins[a] * (1 << cl) + 127) / 128;
      t = $urandom % nx;
      w = {$urandom, $urandom, $urandom, $urandom};
      in_signed = (it % 3 == 1); pad_col = (it % 7 == 3); pad_row = (it % 5 == 2) ? 3'b001 : 3'b000;
      @(negedge clk); word_in = w; buf_we = 1; xfer = 8'(t);
      @(negedge clk); buf_we = 0; word_in = '0;
      for (int u = 0; u < 32; u++) for (int k = 0; k < 3; k++) for (int c = 0; c < 4; c++) begin
        int p; logic [7:0] e;
        p = (k * (1 << cl) + 4*u + c) * rins[a] - 128 * t;
        e = 0;
        if (p >= 0 && p < 128 && 4*u + c < (1 << cl))
          for (int b = 0; b < rins[a]; b++) e[b] = w[p + b];
        if (in_signed) e[rins[a]-1] = ~e[rins[a]-1];
        if (pad_col || pad_row[k]) e = in_signed ? 8'(1 << (rins[a]-1)) : 8'd0;
        // entries of channels beyond C_in are don't-care for the macro
        if (4*u + c < (1 << cl) && p >= 0 && p < 128 || pad_col || pad_row[k]) begin
          checks++;
          if (din[u][k][c] !== e) begin failures++;
            if (failures < 10) $display("FAIL it=%0d u=%0d k=%0d c=%0d %h/%h", it, u, k, c, din[u][k][c], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
