// ref_gen: behavioural model of the gain-adaptive reference that feeds the
// S-IN(b) lines of the SAR charge-injection DAC.
//
// ABN gain gamma = 2^g (g = 0..5, i.e. 1..32) is applied without a gain stage:
// all SAR injection swings are divided by gamma, which zooms the ADC range
// onto the DP distribution. This model returns, for each SAR cell S_m
// (m = 6 .. 0), the DPL step its update causes:
//     v_step[m] = alpha_adc * VDDH * 2^(m-7) / gamma,
// i.e. +/- VDDH/2 swing on the five binary-weighted MSB cells and the reduced
// VDDH/4, VDDH/8 swings of the two unit-capacitance LSB cells, all scaled by
// alpha_adc and 1/gamma. Codes g > 5 are treated as 5. Combinational.
// Behavioural model (kind: behavioural model): in silicon the levels come
// from a double-sided resistive ladder through multiplexers; ladder mismatch
// and settling are not modelled. The gain range and the 1/gamma zoom are
// published; alpha_adc = 0.5 is this model's choice.
//
// From the published design: gain by scaling the S-IN swing, gains 1 to 32.
// Own choices: alpha_adc = 0.5 and exact 1/gamma steps (the ladder's V_DDH/32
// granularity and mismatch are not modelled).
module ref_gen
  import imagine_pkg::*;
(
  input  logic [2:0] gamma,
  output real        v_step [7]
);
  always_comb begin
    int unsigned g;
    g = (gamma > 3'd5) ? 5 : 32'(gamma);
    for (int m = 0; m < 7; m++)
      v_step[m] = ALPHA_ADC * VDDH * real'(1 << m) / 128.0 / real'(1 << g);
  end
endmodule
