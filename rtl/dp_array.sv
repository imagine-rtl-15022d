// dp_array: behavioural model of the 1152 x 256 10T1C charge-based
// dot-product array with its serial-split dot-product lines (DPL).
//
// Storage: one binary weight per bitcell, written and read through a 32b SRAM
// port (word address = row*8 + column/32). A stored 1 acts as +1, a 0 as -1.
// Compute: for one input bit, every row whose DP-IN is driven injects charge
// through its coupling capacitance Cc onto the column's DPL, precharged to
// VDDL, so that
//     V_DP,j = VDDL * (1 + a_eff * sum_i dp_in_i * (2*W_ij - 1)),
//     a_eff  = Cc / (36*n_units*Cc + n_units*Cp_loc + C_L).
// The DPL is split in series between the 32 DP units of 36 rows; only the
// n_units units needed by the layer's input channels are connected, which
// shrinks the load and widens the swing (about 0.15 V at 4 channels, 0.35 V
// at 128 channels, full +/- injection). v_dp is combinational in dp_in.
// This is a behavioural model (kind: behavioural model): the array is a
// memory plus a charge equation, not transistor-level. Equation, sizes, Cc
// and C_L are published; Cp_loc = 2 fF and the R/W word format are this
// model's choices. Settling errors, kT/C noise and mismatch are not modelled.
//
// From the published design: 1152 x 256 binary cells, 32 units of 36 rows,
// C_c = 0.7 fF, C_L = 40 fF, VDDL = 0.4 V. Own choices: the local parasitic
// Cp_loc = 2 fF, the ideal (noise- and leakage-free) charge equation, and the
// 32b R/W word map.
module dp_array
  import imagine_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS
) (
  input  logic            clk,
  input  logic            rw_en,
  input  logic            rw_we,
  input  logic [13:0]     rw_addr,
  input  logic [31:0]     rw_wdata,
  output logic [31:0]     rw_rdata,
  input  logic [ROWS-1:0] dp_in,
  input  logic [5:0]      n_units,
  output real             v_dp [COLS]
);
  localparam int unsigned WPR = COLS / 32;   // 32b words per row

  logic [COLS-1:0] w [ROWS];

  always_ff @(posedge clk) begin
    if (rw_en && 32'(rw_addr) < ROWS * WPR) begin
      if (rw_we) w[32'(rw_addr) / WPR][(32'(rw_addr) % WPR) * 32 +: 32] <= rw_wdata;
      else       rw_rdata <= w[32'(rw_addr) / WPR][(32'(rw_addr) % WPR) * 32 +: 32];
    end
  end

  always_comb begin
    int signed acc [COLS];
    real a;
    a = alpha_eff(32'(n_units));
    for (int j = 0; j < COLS; j++) acc[j] = 0;
    for (int i = 0; i < ROWS; i++)
      if (dp_in[i])
        for (int j = 0; j < COLS; j++) acc[j] += w[i][j] ? 1 : -1;
    for (int j = 0; j < COLS; j++) v_dp[j] = VDDL * (1.0 + a * real'(acc[j]));
  end
endmodule
