// imagine_pkg: shared sizes, types and analog constants of the IMAGINE
// compute-in-memory CNN accelerator.
//
// The array sizes (1152 rows x 256 columns, 32 DP units of 36 rows, 64 blocks
// of 4 columns, 128b LMEM bandwidth, 2 x 32 kB LMEMs) and the electrical
// numbers (VDDH/VDDL 0.8/0.4 V, Cc = 0.7 fF, 40 fF column load, C_sar = 33 Cc,
// 5b ABN offset of +/-30 mV, 7b calibration of 0.47 mV steps) are the
// published ones. The local parasitic per DP unit (2 fF) and the SAR parasitic
// ratio (alpha_adc = 0.5, which makes the 8b LSB 3.125 mV at unity gain) are
// this implementation's choices. The macro's time-generator control word
// (ctl_t) is also this implementation's encoding of the published phase
// sequence.
//
// Numbers that are published: array size, units, kernel size, LMEM size and
// width, C_c, C_L, VDDL/VDDH, alpha_mb, offset range and calibration step.
// Own choices: CP_LOC, ALPHA_ADC and the packed layouts of the structs.
package imagine_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_ROWS      = 1152;  // DP array rows
  localparam int unsigned N_COLS      = 256;   // DP array columns
  localparam int unsigned N_UNITS     = 32;    // serial-split DP units
  localparam int unsigned UNIT_ROWS   = 36;    // rows per DP unit (3x3x4)
  localparam int unsigned CH_PER_UNIT = 4;     // input channels per unit
  localparam int unsigned KSIZE       = 3;     // kernel size
  localparam int unsigned XW          = 8;     // input register width
  localparam int unsigned N_BLOCKS    = 64;    // 4-column analog blocks
  localparam int unsigned BW          = 128;   // LMEM I/O bandwidth [bit]
  localparam int unsigned LMEM_WORDS  = 2048;  // 32 kB / 16 B

  typedef logic [XW-1:0] xval_t;
  // Data for the newest kernel column of every (unit, kernel row, channel).
  typedef xval_t [N_UNITS-1:0][KSIZE-1:0][CH_PER_UNIT-1:0] sr_din_t;

  // ---------------------------------------------------- layer configuration
  typedef struct packed {
    logic [3:0] r_in;       // input precision 1,2,4,8 (datapath)
    logic [2:0] r_w;        // weight precision 1..4
    logic [3:0] r_out;      // output precision 1,2,4,8 (datapath)
    logic [7:0] c_in;       // input channels: 4,8,16,32,64,128
    logic [2:0] gamma;      // ABN gain = 2**gamma, 1..32
    logic       pad;        // 1: zero padding of one pixel ('same' conv)
    logic       pipelined;  // 1: pipelined phases, 0: fully serial
    logic       in_signed;  // signed-to-unsigned conversion at im2col
    logic       out_signed; // unsigned-to-signed conversion at store
    logic [6:0] img_h;      // input map height
    logic [6:0] img_w;      // input map width
    logic [10:0] in_base;   // first word of the input map
    logic [10:0] out_base;  // first word of the output map
  } layer_cfg_t;

  // --------------------------------------------- macro phase control word
  // One phase is active per timing-clock cycle; the analog models act on it.
  typedef struct packed {
    logic       pre;       // precharge DPL to VDDL
    logic       acc_rst;   // precharge C_acc to VDDL (DPL disconnected)
    logic       cs_dp;     // DP phase: DP array drives the DPL
    logic [2:0] bit_idx;   // input bit driven on DP-IN
    logic       acc_in;    // input accumulation: C_acc shared with DPL
    logic [3:0] acc_lsb;   // LSB amortization on these columns of a block
    logic [2:0] acc_w;     // inter-column sharing between col i and i+1
    logic       cs_adc;    // add ABN offset and calibration to the DPL
    logic [7:0] cs_sar;    // SA decision for output bit b (one-hot)
    logic       sar_upd;   // SAR residue update
    logic [2:0] sar_cell;  // SAR DAC cell S_k used by the update
    logic       cal_pre;   // calibration: DPL to VDDL, code cleared
    logic       cal_step;  // calibration decision + code update
    logic [2:0] cal_idx;   // calibration step 0..6
    logic       done;      // last phase of the operation
  } ctl_t;

  // ------------------------------------------------------ analog constants
  localparam real VDDH     = 0.8;      // V
  localparam real VDDL     = 0.4;      // V
  localparam real CC       = 0.7e-15;  // bitcell coupling capacitance
  localparam real CP_LOC   = 2.0e-15;  // local DPL parasitic per DP unit
  localparam real C_L      = 40.0e-15; // MBIW + ADC load per column
  localparam real ALPHA_MB = 0.5;      // multi-bit sharing factor
  localparam real ALPHA_ADC = 0.5;     // C_sar / (C_sar + C_p,sar)
  localparam real BETA_LSB = 30.0e-3 / 16.0; // 5b ABN offset, +/-30 mV
  localparam real CAL_LSB  = 0.47e-3;  // 7b calibration resolution

  // Attenuation of the serial-split DP operator with n connected units.
  function automatic real alpha_eff(input int unsigned n_units);
    return CC / (real'(n_units * UNIT_ROWS) * CC + real'(n_units) * CP_LOC + C_L);
  endfunction

  // Transfers per kernel column: ceil(K * r_in * C_in / BW).
  function automatic int unsigned n_in_xfers(input int unsigned r_in, input int unsigned c_in);
    return (KSIZE * r_in * c_in + BW - 1) / BW;
  endfunction

  // Output channels stored for a weight precision (4-column blocks).
  function automatic int unsigned n_cout(input int unsigned r_w);
    return (r_w == 1) ? 256 : (r_w == 2) ? 128 : 64;
  endfunction

  // Transfers per output pixel: ceil(r_out * C_out / BW).
  function automatic int unsigned n_out_xfers(input int unsigned r_out, input int unsigned r_w);
    return (r_out * n_cout(r_w) + BW - 1) / BW;
  endfunction

endpackage
