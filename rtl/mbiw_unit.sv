// mbiw_unit: behavioural model of one multi-bit input-and-weight (MBIW)
// accumulation unit, serving a block of four adjacent columns.
//
// Each column has an accumulation capacitor C_acc sized equal to the rest of
// its DPL load, so every charge sharing between the two averages them.
//   Inputs (time): after the DP of input bit k the DPL holds V_DP,k; sharing
//     it with C_acc gives V_acc,k = a_mb*V_DP,k + (1-a_mb)*V_acc,k-1 with
//     a_mb = 1/2 and V_acc,-1 = VDDL, so bit k is weighted by 2^(k-r_in).
//     With binary inputs the sharing is skipped and the DP swing is kept.
//   Weights (space): C_acc is re-precharged to VDDL and shared with the LSB
//     column (self-weighting by 1/2), then neighbouring DPLs are shared in
//     pairs from LSB to MSB, so weight bit k is weighted by 2^(k-r_w) on the
//     MSB column. r_w = 2 uses two independent pairs per block.
// State changes at the clk_tg edge of each active phase of ctl (see time_gen);
// v_dpl is the column voltage handed to the ADC.
// Behavioural model (kind: behavioural model) of an analog circuit: ideal
// charge sharing, no leakage or switch charge injection. The sharing scheme
// is the published one; a_mb is the published nominal 1/2.
//
// From the published design: alpha_mb = 1/2, LSB-first temporal accumulation,
// LSB self-weighting and pairwise sharing of up to 4 weight bits. Own
// choices: how r_w = 2 and 3 use the four columns and the bypasses at 1b.
module mbiw_unit
  import imagine_pkg::*;
(
  input  logic clk_tg,
  input  ctl_t ctl,
  input  real  v_dp  [4],
  output real  v_dpl [4]
);
  real v_acc [4];

  always_ff @(posedge clk_tg) begin
    real d [4];
    d = v_dpl;
    if (ctl.acc_rst) for (int i = 0; i < 4; i++) v_acc[i] <= VDDL;
    if (ctl.pre)     for (int i = 0; i < 4; i++) d[i] = VDDL;
    if (ctl.cs_dp)   for (int i = 0; i < 4; i++) d[i] = v_dp[i];
    if (ctl.acc_in)
      for (int i = 0; i < 4; i++) begin
        d[i] = ALPHA_MB * v_dpl[i] + (1.0 - ALPHA_MB) * v_acc[i];
        v_acc[i] <= d[i];
      end
    for (int i = 0; i < 4; i++)
      if (ctl.acc_lsb[i]) begin
        d[i] = 0.5 * (v_dpl[i] + v_acc[i]);
        v_acc[i] <= d[i];
      end
    for (int i = 0; i < 3; i++)
      if (ctl.acc_w[i]) begin
        d[i]   = 0.5 * (v_dpl[i] + v_dpl[i+1]);
        d[i+1] = d[i];
      end
    v_dpl <= d;
  end
endmodule
