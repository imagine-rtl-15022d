// cim_macro: behavioural model of the 1152 x 256 charge-domain CIM-SRAM
// macro, assembled from its blocks.
//
// Data path: input_shift_reg -> bitseq_driver (DP-IN, bit-serial) ->
// dp_array (split-DPL dot products) -> 64 mbiw_unit (input and weight
// accumulation on the same DPL) -> 256 dsci_adc (ABN offset + calibration,
// SAR with gain zoom from ref_gen) -> output_reg (dual-control). time_gen
// sequences the analog phases on clk_tg.
// Interface (system clock clk):
//   sr_load/ch/cs_k/din  shift-register write, see input_shift_reg
//   cim_start            one-cycle request: starts a CIM operation on the
//                        shift-register contents present after this edge;
//                        these must stay unchanged for one clock cycle
//   cal_start            one-cycle request: runs SA offset calibration
//   cs_out               copies the finished results to dout (earliest one
//                        cycle after cim_start, so N_cim = 1)
//   r_in/r_w/r_out/c_in/gamma  precisions, channels (n_units = c_in/4), gain
//   rw_*                 32b weight/offset write port: word addresses
//                        0..9215 are weights (row*8 + col/32), 9216..9279 hold
//                        the 5b ABN offsets of columns 4a..4a+3 in bytes
// clk_tg must be synchronous to clk and at least 46x faster so that an
// 8b/4b/8b operation (45 phases) ends within one clock cycle.
// SA_SIGMA sets a deterministic per-column SA offset spread (uniform, this
// standard deviation) for calibration studies; 0 gives ideal comparators.
// Behavioural model (kind: behavioural model) because the analog core is
// modelled with real-valued voltages; the shift register, time generator and
// output register inside are synthesizable RTL.
//
// From the published design: array size, 32 split DP units, 64 four-column
// MBIW blocks, 256 column ADCs, gain and offset in the ADC, dual-control
// output registers. Own choices: the R/W word map (weights 0..9215, ABN
// offsets 9216..9279), the toggle handshake between clk and clk_tg, and the
// hashed per-column SA offset used to exercise calibration.
module cim_macro
  import imagine_pkg::*;
#(
  parameter real SA_SIGMA = 0.0
) (
  input  logic               clk,
  input  logic               clk_tg,
  input  logic               rst_n,
  input  logic               sr_load,
  input  logic [N_UNITS-1:0] ch,
  input  logic [KSIZE-1:0]   cs_k,
  input  sr_din_t            din,
  input  logic               cim_start,
  input  logic               cal_start,
  input  logic               cs_out,
  input  logic [3:0]         r_in,
  input  logic [2:0]         r_w,
  input  logic [3:0]         r_out,
  input  logic [7:0]         c_in,
  input  logic [2:0]         gamma,
  input  logic               rw_en,
  input  logic               rw_we,
  input  logic [13:0]        rw_addr,
  input  logic [31:0]        rw_wdata,
  output logic [31:0]        rw_rdata,
  output logic [7:0]         dout [N_COLS],
  output logic               busy
);
  localparam int unsigned W_WORDS = N_ROWS * N_COLS / 32;   // 9216

  xval_t             x [N_ROWS];
  logic [N_ROWS-1:0] dp_in;
  real               v_dp  [N_COLS];
  real               v_dpl [N_COLS];
  real               v_step [7];
  logic [N_COLS-1:0] d_adc;
  logic [4:0]        beta [N_COLS];
  logic [31:0]       w_rdata;
  logic              start_tog, cal_tog, rd_beta;
  logic [5:0]        n_units;
  ctl_t              ctl;

  assign n_units = 6'(c_in >> 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_tog <= 1'b0;
      cal_tog   <= 1'b0;
    end else begin
      if (cim_start) start_tog <= ~start_tog;
      if (cal_start) cal_tog   <= ~cal_tog;
    end
  end

  // ABN offset storage (in-situ bitcells of the ADC offset units).
  always_ff @(posedge clk) begin
    rd_beta <= 32'(rw_addr) >= W_WORDS;
    if (rw_en && 32'(rw_addr) >= W_WORDS && 32'(rw_addr) < W_WORDS + N_COLS / 4) begin
      for (int i = 0; i < 4; i++) begin
        if (rw_we) beta[(32'(rw_addr) - W_WORDS) * 4 + i] <= rw_wdata[8*i +: 5];
      end
    end
  end
  always_comb begin
    int unsigned a;
    a = (32'(rw_addr) - W_WORDS) % (N_COLS / 4);
    rw_rdata = w_rdata;
    if (rd_beta)
      for (int i = 0; i < 4; i++) rw_rdata[8*i +: 8] = {3'b000, beta[a * 4 + i]};
  end

  input_shift_reg u_sr (
    .clk, .rst_n, .load(sr_load), .ch, .cs_k, .din, .x
  );

  time_gen u_tg (
    .clk_tg, .rst_n, .start_tog, .cal_tog, .r_in, .r_w, .r_out, .ctl, .busy
  );

  bitseq_driver u_drv (
    .x, .bit_idx(ctl.bit_idx), .cs_dp(ctl.cs_dp), .n_units, .dp_in
  );

  dp_array u_array (
    .clk, .rw_en, .rw_we, .rw_addr, .rw_wdata, .rw_rdata(w_rdata),
    .dp_in, .n_units, .v_dp
  );

  ref_gen u_ref (.gamma, .v_step);

  for (genvar g = 0; g < N_BLOCKS; g++) begin : g_mbiw
    real vi [4];
    real vo [4];
    for (genvar i = 0; i < 4; i++) begin : g_c
      assign vi[i] = v_dp[4*g + i];
      assign v_dpl[4*g + i] = vo[i];
    end
    mbiw_unit u_mbiw (.clk_tg, .ctl, .v_dp(vi), .v_dpl(vo));
  end

  // Deterministic pseudo-random SA offset of column j, uniform with std SA_SIGMA.
  function automatic real sa_off(input int unsigned j);
    int unsigned h;
    h = (j * 32'd1103515245 + 32'd12345) >> 8;
    return SA_SIGMA * 1.7320508 * (2.0 * real'(h % 65536) / 65536.0 - 1.0);
  endfunction

  for (genvar j = 0; j < N_COLS; j++) begin : g_adc
    logic [6:0] cal_code;
    dsci_adc #(.SA_OFFSET(sa_off(j))) u_adc (
      .clk_tg, .ctl, .v_in(v_dpl[j]), .beta(beta[j]), .v_step,
      .d_adc(d_adc[j]), .cal_code
    );
  end

  output_reg u_oreg (.clk_tg, .ctl, .d_adc, .clk, .cs_out, .dout);
endmodule
