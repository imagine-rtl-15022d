// imagine_top: the IMAGINE compute-in-memory CNN accelerator.
//
// Two 32 kB LMEMs hold the input and output feature maps and swap roles
// between layers (ping-pong, selected by swap: 0 = LMEM A is the input).
// The control_unit walks a 3x3 convolution or fully-connected layer: 128b
// words are fetched from the input LMEM into the data buffer of im2col_unit,
// which, with cim_decoder, reshapes them into the CIM input shift register;
// the cim_macro computes all 256 columns (1-to-8b inputs, 1-to-4b weights,
// 1-to-8b outputs, ABN gain and offset in the ADC); output_mux packs the
// results into 128b words written to the output LMEM.
// Interfaces:
//   start/cfg    run one layer (cfg must stay stable while busy); done pulses
//                at the end; n_* are the layer's performance counters
//   cal_start    one-cycle request for ADC offset calibration (when idle)
//   host_*       128b access to either LMEM while the accelerator is idle
//                (host_sel: 0 = A, 1 = B; read data the next cycle)
//   rw_*         32b weight / ABN-offset port of the macro (when idle)
//   cim_busy     the macro's time generator is running a sequence
//   clk_tg       timing clock of the macro's time generator, synchronous to
//                clk and at least 46x faster
// The host CPU, SPI and off-chip memory of the surrounding MCU are not part
// of this design; their accesses arrive through the host_* and rw_* ports.
//
// From the published design: two ping-pong LMEMs, the four-stage 128b
// datapath and the macro. Own choices: the host and weight ports, the
// two-clock scheme and the performance counters.
module imagine_top
  import imagine_pkg::*;
#(
  parameter real SA_SIGMA = 0.0
) (
  input  logic          clk,
  input  logic          clk_tg,
  input  logic          rst_n,
  input  logic          start,
  input  layer_cfg_t    cfg,
  input  logic          swap,
  input  logic          cal_start,
  input  logic          host_en,
  input  logic          host_we,
  input  logic          host_sel,
  input  logic [10:0]   host_addr,
  input  logic [BW-1:0] host_wdata,
  output logic [BW-1:0] host_rdata,
  input  logic          rw_en,
  input  logic          rw_we,
  input  logic [13:0]   rw_addr,
  input  logic [31:0]   rw_wdata,
  output logic [31:0]   rw_rdata,
  output logic          busy,
  output logic          cim_busy,
  output logic          done,
  output logic [31:0]   n_cycles,
  output logic [31:0]   n_cim,
  output logic [31:0]   n_stall,
  output logic [31:0]   n_pad
);
  logic          rd_en, buf_we, sr_load, cim_start, cs_out, wr_en, pad_col;
  logic [10:0]   rd_addr, wr_addr;
  logic [7:0]    s_xfer, st_xfer;
  logic [2:0]    pad_row;
  logic [N_UNITS-1:0] ch;
  logic [KSIZE-1:0]   cs_k;
  sr_din_t       din;
  logic [7:0]    dout [N_COLS];
  logic [BW-1:0] st_word, rdata_a, rdata_b, rdata_in;
  logic          en_a, we_a, en_b, we_b, host_sel_q;
  logic [10:0]   addr_a, addr_b;
  logic [BW-1:0] wdata_a, wdata_b;

  control_unit u_ctrl (
    .clk, .rst_n, .start, .cfg, .rd_en, .rd_addr, .buf_we, .s_xfer,
    .s_pad_col(pad_col), .s_pad_row(pad_row), .sr_load, .cim_start, .cs_out,
    .wr_en, .wr_addr, .st_xfer, .busy, .done, .n_cycles, .n_cim, .n_stall, .n_pad
  );

  // Ping-pong LMEM port multiplexing.
  always_comb begin
    if (busy) begin
      en_a = swap ? wr_en : rd_en;   we_a = swap;
      addr_a = swap ? wr_addr : rd_addr;
      en_b = swap ? rd_en : wr_en;   we_b = !swap;
      addr_b = swap ? rd_addr : wr_addr;
      wdata_a = st_word; wdata_b = st_word;
    end else begin
      en_a = host_en && !host_sel; we_a = host_we;
      en_b = host_en &&  host_sel; we_b = host_we;
      addr_a = host_addr; addr_b = host_addr;
      wdata_a = host_wdata; wdata_b = host_wdata;
    end
  end

  lmem u_lmem_a (.clk, .en(en_a), .we(we_a), .addr(addr_a), .wdata(wdata_a), .rdata(rdata_a));
  lmem u_lmem_b (.clk, .en(en_b), .we(we_b), .addr(addr_b), .wdata(wdata_b), .rdata(rdata_b));

  assign rdata_in = swap ? rdata_b : rdata_a;
  always_ff @(posedge clk) if (host_en) host_sel_q <= host_sel;
  assign host_rdata = host_sel_q ? rdata_b : rdata_a;

  im2col_unit u_im2col (
    .clk, .buf_we, .word_in(rdata_in), .r_in(cfg.r_in), .c_in(cfg.c_in),
    .xfer(s_xfer), .pad_col, .pad_row, .in_signed(cfg.in_signed), .din
  );

  cim_decoder u_dec (.r_in(cfg.r_in), .c_in(cfg.c_in), .xfer(s_xfer), .ch, .cs_k);

  cim_macro #(.SA_SIGMA(SA_SIGMA)) u_macro (
    .clk, .clk_tg, .rst_n, .sr_load, .ch, .cs_k, .din, .cim_start, .cal_start,
    .cs_out, .r_in(cfg.r_in), .r_w(cfg.r_w), .r_out(cfg.r_out), .c_in(cfg.c_in),
    .gamma(cfg.gamma), .rw_en, .rw_we, .rw_addr, .rw_wdata, .rw_rdata, .dout,
    .busy(cim_busy)
  );

  output_mux u_omux (
    .dout, .r_w(cfg.r_w), .r_out(cfg.r_out), .out_signed(cfg.out_signed),
    .xfer(st_xfer), .word(st_word)
  );
endmodule
