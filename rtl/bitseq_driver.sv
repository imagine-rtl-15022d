// bitseq_driver: bit-sequential DP-IN row drivers of the CIM-SRAM.
//
// The macro processes an r_in-bit input one bit at a time, LSB first. During
// a DP phase (cs_dp) this block drives DP-IN of row i with bit bit_idx of its
// 8b input; rows of DP units that are not connected to the split DPL
// (unit index >= n_units, set by the layer's input-channel count) stay idle,
// as do all rows outside the DP phase. A driven row injects +/-1 through its
// bitcell depending on the stored weight, an idle row injects nothing.
// Purely combinational. The bit-serial, DAC-free input scheme is the
// published one; the driver circuit itself is not described and is reduced
// here to its logic function.
//
// From the published design: LSB-first bit-serial input drive and idle units
// for unused channels. Own choice: the gating by unit index is plain logic
// here (the chip uses R-S drivers).
module bitseq_driver
  import imagine_pkg::*;
(
  input  xval_t       x [N_ROWS],
  input  logic [2:0]  bit_idx,
  input  logic        cs_dp,
  input  logic [5:0]  n_units,
  output logic [N_ROWS-1:0] dp_in
);
  always_comb
    for (int i = 0; i < N_ROWS; i++)
      dp_in[i] = cs_dp && (i / UNIT_ROWS < 32'(n_units)) && x[i][bit_idx];
endmodule
