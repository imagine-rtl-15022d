// dsci_adc: behavioural model of one distribution-shaping charge-injection
// (DSCI) SAR ADC column.
//
// Conversion (after DP and MBIW): at CS_ADC the ADC takes the DPL voltage and
// its offset cells inject the ABN offset (5b signed code beta, 30/16 mV per
// step, +/-30 mV) and the stored calibration (7b signed, 0.47 mV per step).
// Then, for each output bit from the MSB, the StrongArm SA decides
// D = (V_DPL + V_os >= VDDL) (d_adc, captured by the output register on
// CS_SAR[b]) and, except after the last bit, the SAR DAC updates the residue
// by -/+ v_step[cell] (the cell stores not(D)). With the steps of ref_gen this
// yields D_out = floor(2^(r-1) + gamma*dV/(alpha_adc*VDDH/2^(r-1))), clipped to
// r bits, with dV the DPL deviation from VDDL plus offsets.
// Calibration: the DPL is set to VDDL and seven decide/update steps (32, 16,
// 8, 4, 2, 1, 1 calibration LSBs) drive the code towards cancelling the SA
// offset V_os, which is the SA_OFFSET parameter of this model.
// State changes at clk_tg edges of the phases of ctl; d_adc is combinational.
// Behavioural model (kind: behavioural model) of an analog circuit. Offset and
// calibration ranges, SAR scheme and decision rule are published (the figure
// gives +/-20 mV for the ABN offset, the text +/-30 mV; the text is followed);
// the calibration step sizes and code format are this model's choices.
//
// From the published design: 5b offset (+/-30 mV), 7b calibration with 0.47
// mV resolution, SAR with gain by reduced S-IN swing, calibration by the same
// decide/update cycle. Own choices: alpha_adc = 0.5, the exact search order
// of the calibration and the ideal comparator.
module dsci_adc
  import imagine_pkg::*;
#(
  parameter real SA_OFFSET = 0.0
) (
  input  logic        clk_tg,
  input  ctl_t        ctl,
  input  real         v_in,
  input  logic [4:0]  beta,
  input  real         v_step [7],
  output logic        d_adc,
  output logic [6:0]  cal_code
);
  real v;
  int  cal;

  assign d_adc    = (v + SA_OFFSET >= VDDL);
  assign cal_code = 7'(cal);

  always_ff @(posedge clk_tg) begin
    int st;
    if (ctl.cal_pre) begin
      cal <= 0;
      v   <= VDDL;
    end else if (ctl.cal_step) begin
      st = (ctl.cal_idx < 3'd6) ? (32 >> ctl.cal_idx) : 1;
      st = (VDDL + real'(cal) * CAL_LSB + SA_OFFSET >= VDDL) ? cal - st : cal + st;
      if (st > 63) st = 63;
      if (st < -64) st = -64;
      cal <= st;
      v   <= VDDL + real'(st) * CAL_LSB;
    end else if (ctl.cs_adc) begin
      v <= v_in + real'($signed(beta)) * BETA_LSB + real'(cal) * CAL_LSB;
    end else if (ctl.sar_upd) begin
      v <= d_adc ? v - v_step[ctl.sar_cell] : v + v_step[ctl.sar_cell];
    end
  end
endmodule
