// control_unit: main FSM of the accelerator; runs one 3x3 convolution (or
// fully-connected) layer from the input LMEM through the CIM macro to the
// output LMEM with the four pipelined phases fetch / im2col / CIM / store.
//
// Walk: for every output row y, kernel columns j = 0 .. W+2*pad-1 are loaded,
// each in N_in = ceil(3*r_in*C_in/128) transfers; once three columns are in
// the shift register, the last transfer of every further column fires the
// macro (so a new row costs 3*N_in transfers, a step along the row N_in).
// Input map layout (kernel-last bands): word in_base + ((y*W + x)*N_in + t)
// holds transfer t of the kernel column of image column x for output row y
// (image rows y-pad .. y-pad+2). Columns and rows outside the image are
// zero-padded by im2col. Outputs are stored pixel by pixel: word
// out_base + ((y*W_out + x)*N_out + t), N_out = ceil(r_out*C_out/128).
// A fully-connected layer of 9*C_in inputs is the case H = W = 3, pad = 0.
// Pipeline: fetch (LMEM read, 1 cycle) -> data buffer -> shift-register load.
// The SRAM output holds its data, so each stage can stall. A column's last
// load and the CIM request share an edge; the macro needs one cycle
// (N_cim = 1) and its results move to the output registers with CS_out, once
// the previous results have been stored. In pipelined mode fetches continue
// meanwhile: steady state is max(N_in, N_out) cycles per output pixel
// (input- or output-dominated). In serial mode (pipelined = 0) a new
// column is fetched only after all outputs are stored.
// Counters report cycles, CIM operations, stalled load cycles (output
// dominated) and padded transfers. The phases, the pipelining and the cycle
// equations follow the published dataflow; the FSM, the LMEM layout and the
// handshakes are this implementation's choices.
//
// From the published design: the four stages, N_in/N_out transfer counts,
// input- and output-dominated pipelining, the serial-mode penalty and N_cim =
// 1. Own choices: the band layout of the input map, the pixel-major output
// layout, stride 1 and pad 1 only, FC as a 3x3 map, and the layer
// configuration struct.
module control_unit
  import imagine_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  layer_cfg_t    cfg,
  // input LMEM read
  output logic          rd_en,
  output logic [10:0]   rd_addr,
  // data buffer and im2col tags (stage 2)
  output logic          buf_we,
  output logic [7:0]    s_xfer,
  output logic          s_pad_col,
  output logic [2:0]    s_pad_row,
  // macro
  output logic          sr_load,
  output logic          cim_start,
  output logic          cs_out,
  // output LMEM write
  output logic          wr_en,
  output logic [10:0]   wr_addr,
  output logic [7:0]    st_xfer,
  // status
  output logic          busy,
  output logic          done,
  output logic [31:0]   n_cycles,
  output logic [31:0]   n_cim,
  output logic [31:0]   n_stall,
  output logic [31:0]   n_pad
);
  typedef struct packed {
    logic [7:0] t;
    logic       last;     // last transfer of a column
    logic       fire;     // completes a window: request the macro
    logic       first;    // first transfer of a column that is not in the first window
    logic       pad_col;
    logic [2:0] pad_row;
    logic [13:0] pix;     // output pixel index of the window
  } tag_t;

  logic [7:0]  n_in_x, n_out_x;
  logic [7:0]  ncols, h_out, w_out;
  logic [7:0]  y, j, t;
  logic        issuing;
  logic        r_valid, b_valid;
  tag_t        r_tag, b_tag, i_tag;
  logic        m_full;
  logic [13:0] m_pix, st_pix;
  logic [7:0]  st_cnt, st_t;
  logic        can_load, consume, b_adv, r_adv, issue, fire_ok, st_idle_next;

  assign n_in_x  = 8'(n_in_xfers(32'(cfg.r_in), 32'(cfg.c_in)));
  assign n_out_x = 8'(n_out_xfers(32'(cfg.r_out), 32'(cfg.r_w)));
  assign ncols   = 8'(cfg.img_w) + (cfg.pad ? 8'd2 : 8'd0);
  assign w_out   = ncols - 8'd2;
  assign h_out   = 8'(cfg.img_h) + (cfg.pad ? 8'd2 : 8'd0) - 8'd2;

  // ---------------------------------------------------------- issue stage
  always_comb begin
    int signed x, row;
    x   = int'(j) - (cfg.pad ? 1 : 0);
    i_tag         = '0;
    i_tag.t       = t;
    i_tag.last    = (t == n_in_x - 8'd1);
    i_tag.fire    = i_tag.last && (j >= 8'd2);
    i_tag.first   = (t == 8'd0) && (j >= 8'd3);
    i_tag.pad_col = (x < 0) || (x >= int'(cfg.img_w));
    for (int k = 0; k < KSIZE; k++) begin
      row = int'(y) - (cfg.pad ? 1 : 0) + k;
      i_tag.pad_row[k] = (row < 0) || (row >= int'(cfg.img_h));
    end
    i_tag.pix     = 14'(32'(y) * 32'(w_out) + 32'(j) - 2);
    rd_addr = 11'(32'(cfg.in_base) +
                  (32'(y) * 32'(cfg.img_w) + (i_tag.pad_col ? 0 : 32'(x))) * 32'(n_in_x) + 32'(t));
  end

  // ----------------------------------------------------- stage handshakes
  assign st_idle_next = (st_cnt == 8'd0) || (st_cnt == 8'd1);
  assign cs_out   = m_full && st_idle_next;
  assign fire_ok  = !m_full || cs_out;
  always_comb begin
    can_load = 1'b1;
    if (b_tag.fire && !fire_ok) can_load = 1'b0;
    if (!cfg.pipelined && b_tag.first && (m_full || st_cnt != 8'd0)) can_load = 1'b0;
  end
  assign consume  = b_valid && can_load;
  assign b_adv    = consume || !b_valid;
  assign r_adv    = r_valid && b_adv;
  assign issue    = issuing && (!r_valid || r_adv);

  assign rd_en     = issue;
  assign buf_we    = r_adv;
  assign sr_load   = consume;
  assign cim_start = consume && b_tag.fire;
  assign s_xfer    = b_tag.t;
  assign s_pad_col = b_tag.pad_col;
  assign s_pad_row = b_tag.pad_row;

  assign wr_en   = (st_cnt != 8'd0);
  assign st_xfer = st_t;
  assign wr_addr = 11'(32'(cfg.out_base) + 32'(st_pix) * 32'(n_out_x) + 32'(st_t));

  assign busy = issuing || r_valid || b_valid || m_full || (st_cnt != 8'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; y <= '0; j <= '0; t <= '0;
      r_valid <= 1'b0; b_valid <= 1'b0; r_tag <= '0; b_tag <= '0;
      m_full <= 1'b0; m_pix <= '0; st_pix <= '0; st_cnt <= '0; st_t <= '0;
      done <= 1'b0; n_cycles <= '0; n_cim <= '0; n_stall <= '0; n_pad <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing <= 1'b1; y <= '0; j <= '0; t <= '0;
        n_cycles <= '0; n_cim <= '0; n_stall <= '0; n_pad <= '0;
      end
      if (busy) n_cycles <= n_cycles + 32'd1;
      // issue counters
      if (issue) begin
        if (t + 8'd1 < n_in_x) t <= t + 8'd1;
        else begin
          t <= '0;
          if (j + 8'd1 < ncols) j <= j + 8'd1;
          else begin
            j <= '0;
            if (y + 8'd1 < h_out) y <= y + 8'd1;
            else issuing <= 1'b0;
          end
        end
      end
      // pipeline registers
      if (issue) begin r_valid <= 1'b1; r_tag <= i_tag; end
      else if (r_adv) r_valid <= 1'b0;
      if (r_adv) begin b_valid <= 1'b1; b_tag <= r_tag; end
      else if (consume) b_valid <= 1'b0;
      if (b_valid && !can_load) n_stall <= n_stall + 32'd1;
      if (consume && (b_tag.pad_col || b_tag.pad_row != 3'd0)) n_pad <= n_pad + 32'd1;
      // macro and output registers
      if (cim_start) begin
        m_full <= 1'b1; m_pix <= b_tag.pix; n_cim <= n_cim + 32'd1;
      end else if (cs_out) m_full <= 1'b0;
      if (cs_out) begin
        st_cnt <= n_out_x; st_t <= '0; st_pix <= m_pix;
      end else if (st_cnt != 8'd0) begin
        st_cnt <= st_cnt - 8'd1; st_t <= st_t + 8'd1;
      end
      if (busy && !issuing && !r_valid && !b_valid && !m_full && st_cnt == 8'd1) done <= 1'b1;
    end
  end

  a_fire_free: assert property (@(posedge clk) disable iff (!rst_n)
    cim_start |-> (!m_full || cs_out));
endmodule
