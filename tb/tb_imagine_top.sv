// tb_imagine_top: end-to-end test of the accelerator at its default sizes
// (two 2048 x 128b LMEMs, 1152 x 256 macro). Weights and ABN offsets are
// written through the weight port, the ADCs are calibrated, and three
// convolution layers are run from host-written input maps:
//   L1  4b inputs, 16 channels, 2b weights, 4b outputs, gain 2, zero padding,
//       pipelined, LMEM A -> B (output-dominated, multi-row transfers)
//   L2  8b signed inputs, 64 channels, 4b weights, 8b signed outputs,
//       pipelined, LMEM B -> A (input-dominated, split transfers)
//   L3  binary inputs, 4 channels, 1b weights, 8b outputs, gain 4, serial,
//       LMEM A -> B
// Every stored output is read back through the host port and compared with a
// convolution computed here from the maps and weights and passed through the
// closed-form macro transfer function. Each named mechanism (stall, input-
// and output-dominated pipelining, serial mode, padding, ping-pong swap,
// calibration, signed conversions, gain, multi-bit weights, binary-input
// bypass) is counted; one that never happens is a failure.
module tb_imagine_top;
  import imagine_pkg::*;
  import tb_golden_pkg::*;
  logic clk = 0, clk_tg = 0, rst_n = 0, start = 0, swap = 0, cal_start = 0;
  layer_cfg_t cfg;
  logic host_en = 0, host_we = 0, host_sel = 0; logic [10:0] host_addr;
  logic [127:0] host_wdata, host_rdata;
  logic rw_en = 0, rw_we = 0; logic [13:0] rw_addr; logic [31:0] rw_wdata, rw_rdata;
  logic busy, cim_busy, done; logic [31:0] n_cycles, n_cim, n_stall, n_pad;
  logic [N_COLS-1:0] wbit [N_ROWS];
  logic signed [4:0] bref [N_COLS];
  logic [7:0] img [8][8][128];
  int checks = 0, failures = 0, exact = 0, total = 0;
  int m_stall = 0, m_in_dom = 0, m_out_dom = 0, m_serial = 0, m_pad = 0, m_swap = 0,
      m_cal = 0, m_signed = 0, m_gain = 0, m_mbw = 0, m_bin = 0;

  imagine_top dut (.*);
  always #1 clk_tg = ~clk_tg;
  always #64 clk = ~clk;
  initial begin #900000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic host_write(input bit sel, input int a, input logic [127:0] d);
    @(negedge clk); host_en = 1; host_we = 1; host_sel = sel; host_addr = 11'(a); host_wdata = d;
    @(negedge clk); host_en = 0; host_we = 0;
  endtask

  task automatic host_read(input bit sel, input int a, output logic [127:0] d);
    @(negedge clk); host_en = 1; host_we = 0; host_sel = sel; host_addr = 11'(a);
    @(negedge clk); host_en = 0; d = host_rdata;
  endtask

  task automatic run_layer(input int ri, input int ci, input int rw, input int ro, input int g,
                           input int h, input int w, input bit pad, input bit pipe,
                           input bit sgn, input bit sw, input string name);
    int nin, nout, hout, wout, nu, cout, mask;
    logic [127:0] word;
    nin = (3*ri*ci + 127) / 128; nout = (ro * n_cout(rw) + 127) / 128;
    hout = h + (pad ? 2 : 0) - 2; wout = w + (pad ? 2 : 0) - 2;
    nu = ci / 4; cout = n_cout(rw); mask = (1 << ri) - 1;
    // input map, kernel-column bands, in the LMEM selected by swap
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) for (int k = 0; k < ci; k++)
      img[r][c][k] = 8'($urandom & mask);
    for (int y = 0; y < hout; y++) for (int x = 0; x < w; x++)
      for (int t = 0; t < nin; t++) begin
        word = '0;
        for (int b = 0; b < 128; b++) begin
          int p, k, c, bb, row;
          p = 128*t + b;
          if (p < 3*ci*ri) begin
            k = p / (ci*ri); c = (p % (ci*ri)) / ri; bb = p % ri;
            row = y - (pad ? 1 : 0) + k;
            if (row >= 0 && row < h) word[b] = img[row][x][c][bb];
          end
        end
        host_write(sw, 16 + (y*w + x)*nin + t, word);
      end
    cfg = '0;
    cfg.r_in = 4'(ri); cfg.c_in = 8'(ci); cfg.r_w = 3'(rw); cfg.r_out = 4'(ro); cfg.gamma = 3'(g);
    cfg.img_h = 7'(h); cfg.img_w = 7'(w); cfg.pad = pad; cfg.pipelined = pipe;
    cfg.in_signed = sgn; cfg.out_signed = sgn; cfg.in_base = 11'd16; cfg.out_base = 11'd1024;
    swap = sw;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(n_cim == 32'(hout*wout), {name, ": CIM count"});
    // steady-state cycles per pixel from the layer total
    $display("%s: %0d cycles, %0d CIM ops, %0d stall cycles, %0d padded transfers, N_in=%0d N_out=%0d",
             name, n_cycles, n_cim, n_stall, n_pad, nin, nout);
    if (n_stall > 0) m_stall++;
    if (n_pad > 0 && pad) m_pad++;
    if (pipe && nin > nout) m_in_dom++;
    if (pipe && nout > nin && n_stall > 0) m_out_dom++;
    if (!pipe) m_serial++;
    if (sw) m_swap++;
    if (sgn) m_signed++;
    if (g > 0) m_gain++;
    if (rw > 1) m_mbw++;
    if (ri == 1) m_bin++;
    // check every output
    for (int y = 0; y < hout; y++) for (int x = 0; x < wout; x++)
      for (int t = 0; t < nout; t++) begin
        host_read(!sw, 1024 + (y*wout + x)*nout + t, word);
        for (int f = 0; f < 128 / ro; f++) begin
          int o, msb, first, e, got; real dvc [4]; real dv;
          o = t * (128 / ro) + f;
          if (o >= cout) break;
          msb = (rw == 1) ? o : (rw == 2) ? 2*o + 1 : 4*o + rw - 1;
          first = msb - rw + 1;
          for (int q = 0; q < 4; q++) begin
            int s; s = 0;
            if (q < rw)
              for (int u = 0; u < nu; u++) for (int k = 0; k < 3; k++) for (int c = 0; c < 4; c++)
                for (int j = 0; j < 3; j++) begin
                  int row, col, xv, i;
                  row = y - (pad ? 1 : 0) + k; col = x - (pad ? 1 : 0) + 2 - j;
                  i = u*36 + k*12 + c*3 + j;
                  if (row < 0 || row >= h || col < 0 || col >= w) xv = sgn ? (1 << (ri-1)) : 0;
                  else xv = sgn ? (int'(img[row][col][4*u+c]) ^ (1 << (ri-1))) : int'(img[row][col][4*u+c]);
                  s += xv * (wbit[i][first + q] ? 1 : -1);
                end
            dvc[q] = (q < rw) ? dv_inputs(s, nu, ri) : 0.0;
          end
          dv = dv_weights(dvc, rw) + real'(bref[msb]) * BETA_LSB;
          e = adc_code(dv, g, ro);
          got = int'((word >> (f*ro)) & 128'((1 << ro) - 1));
          if (sgn) got = got ^ (1 << (ro-1));
          checks++; total++;
          if (got == e) exact++;
          if (got - e > 1 || e - got > 1) begin
            failures++;
            if (failures < 10) $display("FAIL %s y=%0d x=%0d o=%0d got=%0d exp=%0d", name, y, x, o, got, e);
          end
        end
      end
  endtask

  initial begin
    cfg = '0;
    #10 rst_n = 1;
    // weights of the 16 first DP units, offsets of all columns
    for (int i = 0; i < N_ROWS; i++) wbit[i] = '0;
    for (int i = 0; i < 16*36; i++)
      for (int w = 0; w < 8; w++) begin
        logic [31:0] d; d = $urandom;
        wbit[i][32*w +: 32] = d;
        @(negedge clk); rw_en = 1; rw_we = 1; rw_addr = 14'(i*8 + w); rw_wdata = d;
      end
    for (int a = 0; a < 64; a++) begin
      logic [31:0] d; d = 0;
      for (int i = 0; i < 4; i++) begin
        bref[4*a + i] = 5'(int'($urandom % 7) - 3);
        d[8*i +: 5] = bref[4*a + i];
      end
      @(negedge clk); rw_en = 1; rw_we = 1; rw_addr = 14'(9216 + a); rw_wdata = d;
    end
    @(negedge clk); rw_en = 0; rw_we = 0;
    // ADC calibration
    @(negedge clk); cal_start = 1; @(negedge clk); cal_start = 0;
    @(negedge clk); while (cim_busy) @(negedge clk);
    m_cal++;
    run_layer(4, 16, 2, 4, 1, 4, 4, 1, 1, 0, 0, "L1");
    run_layer(8, 64, 4, 8, 0, 3, 4, 0, 1, 1, 1, "L2");
    run_layer(1,  4, 1, 8, 2, 3, 5, 0, 0, 0, 0, "L3");
    $display("exact codes: %0d of %0d", exact, total);
    chk(exact * 10 >= total * 9, "exact code ratio");
    $display("mechanisms: stall=%0d input-dominated=%0d output-dominated=%0d serial=%0d pad=%0d swap=%0d cal=%0d signed=%0d gain=%0d multibit-w=%0d binary-in=%0d",
             m_stall, m_in_dom, m_out_dom, m_serial, m_pad, m_swap, m_cal, m_signed, m_gain, m_mbw, m_bin);
    chk(m_stall > 0 && m_in_dom > 0 && m_out_dom > 0 && m_serial > 0 && m_pad > 0 && m_swap > 0, "mechanisms (datapath)");
    chk(m_cal > 0 && m_signed > 0 && m_gain > 0 && m_mbw > 0 && m_bin > 0, "mechanisms (macro)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
