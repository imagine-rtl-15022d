// time_gen: internal time generator of the CIM-SRAM macro.
//
// It turns one CIM request into the published sequence of analog phases,
// one phase per cycle of the timing clock clk_tg:
//   for each input bit k = 0 .. r_in-1 (LSB first):
//     PRE  precharge the DPL to VDDL (k = 0 also precharges C_acc)
//     DP   drive DP-IN with bit k (CS_DP)
//     ACC  share C_acc with the DPL (ACC_in), skipped for binary inputs;
//          DP and ACC are separate phases, so CS_DP and ACC_in never overlap
//   if r_w > 1:
//     WINIT precharge C_acc to VDDL, LSB share the LSB column(s) with it,
//     ACCW  pairwise inter-column sharing from LSB to MSB (ACC_w[i])
//   ADC  add ABN offset and calibration (CS_ADC)
//   for output bit b = r_out-1 .. 0: DEC (CS_SAR[b]), then UPD (b > 0)
// A calibration request runs CPRE and seven CSTEP phases instead.
// Requests arrive as toggles of start_tog / cal_tog, sampled on clk_tg, which
// is assumed synchronous to and much faster than the system clock (the chip
// uses a configurable self-timed pulse generator; a counted clock stands in
// for it here). A full 8b/4b/8b operation takes 45 timing cycles. ctl is
// registered; ctl.done marks the last phase; busy is high during a sequence.
// The phase order is the published one (Fig. 5(c), 9(b), 11(d)); the
// one-cycle-per-phase timing is this implementation's choice.
//
// From the published design: the order of the phases (precharge, DP,
// accumulate per input bit; LSB self-weighting and pairwise sharing; offset,
// decide and update per output bit; calibration). Own choices: one phase per
// clk_tg cycle and the number of cycles per phase.
module time_gen
  import imagine_pkg::*;
(
  input  logic       clk_tg,
  input  logic       rst_n,
  input  logic       start_tog,
  input  logic       cal_tog,
  input  logic [3:0] r_in,
  input  logic [2:0] r_w,
  input  logic [3:0] r_out,
  output ctl_t       ctl,
  output logic       busy
);
  typedef enum logic [3:0] {
    S_IDLE, S_PRE, S_DP, S_ACC, S_WINIT, S_LSB, S_ACCW, S_ADC, S_DEC, S_UPD,
    S_CPRE, S_CSTEP
  } st_t;

  st_t        st;
  logic [2:0] k, s, b;
  logic       start_q, cal_q;
  logic [2:0] nsteps;

  assign nsteps = (r_w == 3'd2) ? 3'd1 : 3'(r_w - 3'd1);
  assign busy   = (st != S_IDLE);

  always_ff @(posedge clk_tg or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; k <= '0; s <= '0; b <= '0;
      start_q <= 1'b0; cal_q <= 1'b0;
    end else begin
      start_q <= start_tog;
      cal_q   <= cal_tog;
      unique case (st)
        S_IDLE: begin
          if (start_tog != start_q) begin st <= S_PRE; k <= '0; end
          else if (cal_tog != cal_q) begin st <= S_CPRE; s <= '0; end
        end
        S_PRE: st <= S_DP;
        S_DP: begin
          if (r_in > 4'd1) st <= S_ACC;
          else if (r_w > 3'd1) st <= S_WINIT;
          else st <= S_ADC;
        end
        S_ACC: begin
          if (4'(k) + 4'd1 < r_in) begin st <= S_PRE; k <= k + 3'd1; end
          else if (r_w > 3'd1) st <= S_WINIT;
          else st <= S_ADC;
        end
        S_WINIT: st <= S_LSB;
        S_LSB: begin st <= S_ACCW; s <= '0; end
        S_ACCW: begin
          if (s + 3'd1 < nsteps) s <= s + 3'd1;
          else st <= S_ADC;
        end
        S_ADC: begin st <= S_DEC; b <= 3'(r_out - 4'd1); end
        S_DEC: st <= (b == 3'd0) ? S_IDLE : S_UPD;
        S_UPD: begin st <= S_DEC; b <= b - 3'd1; end
        S_CPRE: begin st <= S_CSTEP; s <= '0; end
        S_CSTEP: begin
          if (s == 3'd6) st <= S_IDLE;
          else s <= s + 3'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Phase control word of the current state.
  always_comb begin
    ctl = '0;
    unique case (st)
      S_PRE: begin ctl.pre = 1'b1; ctl.acc_rst = (k == 3'd0); end
      S_DP:  begin ctl.cs_dp = 1'b1; ctl.bit_idx = k; end
      S_ACC: ctl.acc_in = 1'b1;
      S_WINIT: ctl.acc_rst = 1'b1;
      S_LSB: ctl.acc_lsb = (r_w == 3'd2) ? 4'b0101 : 4'b0001;
      S_ACCW: ctl.acc_w = (r_w == 3'd2) ? 3'b101 : 3'(3'd1 << s);
      S_ADC: ctl.cs_adc = 1'b1;
      S_DEC: begin ctl.cs_sar[b] = 1'b1; ctl.done = (b == 3'd0); end
      S_UPD: begin
        ctl.sar_upd  = 1'b1;
        ctl.sar_cell = 3'(4'd6 - (r_out - 4'd1 - 4'(b)));
      end
      S_CPRE: ctl.cal_pre = 1'b1;
      S_CSTEP: begin ctl.cal_step = 1'b1; ctl.cal_idx = s; ctl.done = (s == 3'd6); end
      default: ;
    endcase
  end

  // A new request must not arrive while a sequence runs.
  a_no_overrun: assert property (@(posedge clk_tg) disable iff (!rst_n)
    busy |-> (start_tog == start_q && cal_tog == cal_q));
  // DP and accumulation switches never close together.
  a_no_overlap: assert property (@(posedge clk_tg) !(ctl.cs_dp && ctl.acc_in));
endmodule
