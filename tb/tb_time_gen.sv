// tb_time_gen: runs the phase sequence for many (r_in, r_w, r_out)
// combinations and a calibration, and checks the number and order of DP,
// accumulation, weight-sharing, SAR decision and update phases, the SAR cell
// order, the absence of CS_DP / ACC_in overlap and the sequence length.
module tb_time_gen;
  import imagine_pkg::*;
  logic clk_tg = 0, rst_n = 0, start_tog = 0, cal_tog = 0;
  logic [3:0] r_in, r_out; logic [2:0] r_w;
  ctl_t ctl; logic busy;
  int checks = 0, failures = 0;
  time_gen dut (.*);
  always #1 clk_tg = ~clk_tg;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    r_in = 1; r_w = 1; r_out = 1;
    #4 rst_n = 1;
    for (int ri = 1; ri <= 8; ri++) for (int rw = 1; rw <= 4; rw++) for (int ro = 1; ro <= 8; ro += (ro < 2 ? 1 : 3)) begin
      int n_dp, n_acc, n_pre, n_lsb, n_w, n_dec, n_upd, cyc, n_done, exp_cyc, nst;
      int nxt_bit, nxt_dec, nxt_cell;
      bit ovl;
      @(negedge clk_tg);
      r_in = 4'(ri); r_w = 3'(rw); r_out = 4'(ro);
      start_tog = ~start_tog;
      n_dp = 0; n_acc = 0; n_pre = 0; n_lsb = 0; n_w = 0; n_dec = 0; n_upd = 0; cyc = 0; n_done = 0;
      nxt_bit = 0; nxt_dec = ro - 1; nxt_cell = 6; ovl = 0;
      @(negedge clk_tg);
      while (busy) begin
        cyc++;
        if (ctl.pre) n_pre++;
        if (ctl.cs_dp) begin chk(ctl.bit_idx == 3'(nxt_bit), "bit order"); nxt_bit++; n_dp++; end
        if (ctl.acc_in) n_acc++;
        if (ctl.cs_dp && ctl.acc_in) ovl = 1;
        if (ctl.acc_lsb != 0) n_lsb++;
        if (ctl.acc_w != 0) n_w++;
        if (ctl.cs_sar != 0) begin chk(ctl.cs_sar == 8'(1 << nxt_dec), "sar bit order"); nxt_dec--; n_dec++; end
        if (ctl.sar_upd) begin chk(ctl.sar_cell == 3'(nxt_cell), "sar cell order"); nxt_cell--; n_upd++; end
        if (ctl.done) n_done++;
        @(negedge clk_tg);
      end
      nst = (rw == 1) ? 0 : (rw == 2) ? 1 : rw - 1;
      exp_cyc = ri * (ri > 1 ? 3 : 2) + (rw > 1 ? 2 + nst : 0) + 1 + 2 * ro - 1;
      chk(n_dp == ri && n_pre == ri, $sformatf("dp/pre count ri=%0d", ri));
      chk(n_acc == (ri > 1 ? ri : 0), "acc count");
      chk(n_lsb == (rw > 1 ? 1 : 0) && n_w == nst, $sformatf("weight phases rw=%0d", rw));
      chk(n_dec == ro && n_upd == ro - 1, "sar phases");
      chk(n_done == 1 && !ovl, "done / overlap");
      chk(cyc == exp_cyc, $sformatf("length %0d/%0d", cyc, exp_cyc));
    end
    // calibration
    begin
      int cyc, idx; bit ok;
      @(negedge clk_tg); cal_tog = ~cal_tog;
      @(negedge clk_tg);
      cyc = 0; idx = 0; ok = 1;
      while (busy) begin
        if (cyc == 0) ok &= ctl.cal_pre;
        else begin ok &= ctl.cal_step && ctl.cal_idx == 3'(idx); idx++; end
        cyc++;
        @(negedge clk_tg);
      end
      chk(ok && cyc == 8, "calibration sequence");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
