// tb_golden_pkg: closed-form reference of the CIM macro transfer function,
// used by the testbenches to check the phase-by-phase behavioural models.
//
// For column c and input bit b the DP deviation is VDDL*a*S_bc with
// S_bc = sum_i X_i[b]*(2*W_ic-1) and a = Cc/(36*n*Cc + n*Cp_loc + C_L).
// Input accumulation weights bit b by 2^(b-r_in) (no weighting for r_in=1),
// weight accumulation weights weight bit k by 2^(k-r_w) (none for r_w=1),
// and the ADC returns clip(floor(2^(r-1) + gamma*dV/(alpha_adc*VDDH/2^(r-1)))).
package tb_golden_pkg;
  import imagine_pkg::*;

  // Ideal ADC code for a DPL deviation dv (V) from VDDL.
  function automatic int adc_code(input real dv, input int gamma_lg, input int r_out);
    real x;
    int  d;
    x = real'(1 << gamma_lg) * dv / (ALPHA_ADC * VDDH / real'(1 << (r_out - 1)));
    x = x + real'(1 << (r_out - 1));
    if (x < 0.0) return 0;
    d = int'($floor(x));
    if (d > (1 << r_out) - 1) d = (1 << r_out) - 1;
    return d;
  endfunction

  // DPL deviation after input accumulation for one column, given the signed
  // sum over rows of X_i*(2W-1) (for r_in > 1) or of X_i[0]*(2W-1) (r_in = 1).
  function automatic real dv_inputs(input int signed s, input int n_units, input int r_in);
    real a;
    a = alpha_eff(n_units);
    if (r_in == 1) return VDDL * a * real'(s);
    return VDDL * a * real'(s) / real'(1 << r_in);
  endfunction

  // Weight accumulation of r_w column deviations (index 0 = LSB).
  function automatic real dv_weights(input real dv [4], input int r_w);
    real acc;
    if (r_w == 1) return dv[0];
    acc = 0.0;
    for (int k = 0; k < r_w; k++) acc += dv[k] / real'(1 << (r_w - k));
    return acc;
  endfunction
endpackage
