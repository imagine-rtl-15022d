// tb_control_unit: runs the layer FSM alone for an input-dominated, an
// output-dominated, a serial and a zero-padded layer. It checks the fetch
// addresses (kernel-column bands), the number of CIM operations, the store
// addresses, the steady-state cycles per output pixel against
// N_in = ceil(3*r_in*C_in/128) and N_out = ceil(r_out*C_out/128), that the
// output-dominated case stalls, that serial mode never fetches a new column
// while outputs are pending, and that CIM never fires onto unstored results.
module tb_control_unit;
  import imagine_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic rd_en, buf_we, sr_load, cim_start, cs_out, wr_en, s_pad_col, busy, done;
  logic [10:0] rd_addr, wr_addr; logic [7:0] s_xfer, st_xfer; logic [2:0] s_pad_row;
  logic [31:0] n_cycles, n_cim, n_stall, n_pad;
  int checks = 0, failures = 0;
  int cim_t [$]; int wr_list [$]; int rd_list [$];
  int cyc = 0; bit serial_viol;
  control_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    cyc++;
    if (cim_start) cim_t.push_back(cyc);
    if (wr_en) wr_list.push_back(int'(wr_addr));
    if (rd_en) rd_list.push_back(int'(rd_addr));
    if (!cfg.pipelined && sr_load && s_xfer == 0 && wr_en && cim_t.size() > 0 && !cim_start) serial_viol = 1;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic run(input int ri, input int ci, input int rw, input int ro, input int h, input int w,
                     input bit pad, input bit pipe, input string name);
    int nin, nout, hout, wout, ncols, per, k;
    cfg = '0;
    cfg.r_in = 4'(ri); cfg.c_in = 8'(ci); cfg.r_w = 3'(rw); cfg.r_out = 4'(ro);
    cfg.img_h = 7'(h); cfg.img_w = 7'(w); cfg.pad = pad; cfg.pipelined = pipe;
    cfg.in_base = 11'd16; cfg.out_base = 11'd1000;
    nin = (3*ri*ci + 127) / 128; nout = (ro * n_cout(rw) + 127) / 128;
    hout = h + (pad ? 2 : 0) - 2; wout = w + (pad ? 2 : 0) - 2; ncols = w + (pad ? 2 : 0);
    cim_t.delete(); wr_list.delete(); rd_list.delete(); serial_viol = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(n_cim == 32'(hout * wout) && cim_t.size() == hout * wout, {name, ": CIM count"});
    chk(wr_list.size() == hout * wout * nout, {name, ": store count"});
    k = 0;
    for (int p = 0; p < hout * wout; p++) for (int t = 0; t < nout; t++) begin
      if (k < wr_list.size()) chk(wr_list[k] == 1000 + p * nout + t, {name, ": store address"});
      k++;
    end
    chk(rd_list.size() == hout * ncols * nin, {name, ": fetch count"});
    k = 0;
    for (int y = 0; y < hout; y++) for (int j = 0; j < ncols; j++) for (int t = 0; t < nin; t++) begin
      int x; x = j - (pad ? 1 : 0);
      if (x >= 0 && x < w && k < rd_list.size())
        chk(rd_list[k] == 16 + (y * w + x) * nin + t, {name, ": fetch address"});
      k++;
    end
    // steady state within the first output row
    per = (wout >= 3) ? cim_t[wout-1] - cim_t[wout-2] : 0;
    if (wout < 3) ;
    else if (pipe) chk(per == (nin > nout ? nin : nout), $sformatf("%s: period %0d, N_in %0d, N_out %0d", name, per, nin, nout));
    else      chk(per == 2 + nout && nin == 1 && !serial_viol, $sformatf("%s: serial period %0d", name, per));
    if (pipe && nout > nin && wout >= 3) chk(n_stall > 0, {name, ": output-dominated stalls"});
    if (pad) chk(n_pad > 0, {name, ": padding applied"});
    $display("%s: %0d cycles, %0d CIM, period %0d, stalls %0d, padded %0d", name, n_cycles, n_cim, per, n_stall, n_pad);
  endtask

  initial begin
    cfg = '0;
    #12 rst_n = 1;
    run(8, 128, 4, 8, 3, 6, 0, 1, "input-dominated");
    run(1, 16, 1, 8, 3, 8, 0, 1, "output-dominated");
    run(1, 16, 1, 8, 3, 8, 0, 0, "serial");
    run(2, 32, 2, 4, 4, 5, 1, 1, "padded");
    run(8, 64, 1, 8, 3, 3, 0, 1, "fully-connected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
