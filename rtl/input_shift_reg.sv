// input_shift_reg: the CIM-SRAM input register with channel- and
// kernel-wise write enables.
//
// It holds one 8b input per DP row: 32 sub-blocks (one per DP unit) of
// 3 kernel rows x 4 channels x 3 kernel columns = 36 values. A load with
// CH_i and CS_K,j both set shifts group (i, j) by one kernel column
// (X_{c,2} <= X_{c,1} <= X_{c,0}) and writes the new column into X_{c,0}, so
// sliding the convolution window by one pixel reuses 2/3 of the inputs and
// only one kernel column is fetched. Groups not enabled keep their values;
// in silicon this is done with clock-gating latches per group, here with an
// enable on the same flops. Row mapping: DP row = u*36 + k*12 + c*3 + j, j=0
// being the newest (rightmost) kernel column. Reset clears all values.
// The block split and the CH/CS_K enables are the published structure; the
// row mapping is this implementation's choice.
//
// From the published design: 32 sub-blocks, 8b registers, kernel-column shift
// with CH/CS_K enables (clock gating on chip). Own choices: load enables
// instead of gated clocks, the asynchronous reset and the register-to-row
// order.
module input_shift_reg
  import imagine_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [N_UNITS-1:0] ch,
  input  logic [KSIZE-1:0]   cs_k,
  input  sr_din_t            din,
  output xval_t              x [N_ROWS]
);
  // One register group per (unit, kernel row, channel): three 8b stages.
  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    for (genvar k = 0; k < KSIZE; k++) begin : g_row
      for (genvar c = 0; c < CH_PER_UNIT; c++) begin : g_ch
        xval_t r [KSIZE];
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            r[0] <= '0; r[1] <= '0; r[2] <= '0;
          end else if (load && ch[u] && cs_k[k]) begin
            r[2] <= r[1];
            r[1] <= r[0];
            r[0] <= din[u][k][c];
          end
        end
        for (genvar j = 0; j < KSIZE; j++) begin : g_col
          assign x[u*UNIT_ROWS + k*12 + c*3 + j] = r[j];
        end
      end
    end
  end
endmodule
