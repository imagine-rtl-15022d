// im2col_unit: stage 2 of the datapath, between the input LMEM and the CIM
// input shift register.
//
// It holds the last fetched 128b word in the data buffer (loaded by buf_we)
// and routes its r_in-bit values through a channel crossbar and a precision
// crossbar to the 8b inputs of the shift register. Value (kernel row k,
// channel c) of a kernel column sits at bit (k*C_in + c)*r_in of the column's
// bit stream, of which this word (index xfer) holds bits [128*xfer, +128).
// Each value is zero-extended to 8b; with in_signed set, an r_in-bit two's
// complement value becomes unsigned by inverting its MSB (offset binary).
// pad_col zeroes the whole column and pad_row[k] one kernel row (zero-padding
// of the convolution); the zero written is the code for 0 in the selected
// input type. din is combinational from the buffer and the tag inputs; the
// shift register samples it at the next edge. The buffer size (one 128b word)
// follows the published design; the bit packing and the MSB-inversion
// conversion are this implementation's choices.
//
// From the published design: the 128b data buffer, im2col on one fetched word
// at a time, zero padding and the signed-to-unsigned conversion. Own choices:
// the word layout, padding only at width 1, and MSB inversion as the
// conversion.
module im2col_unit
  import imagine_pkg::*;
(
  input  logic          clk,
  input  logic          buf_we,
  input  logic [BW-1:0] word_in,
  input  logic [3:0]    r_in,
  input  logic [7:0]    c_in,
  input  logic [7:0]    xfer,
  input  logic          pad_col,
  input  logic [2:0]    pad_row,
  input  logic          in_signed,
  output sr_din_t       din
);
  logic [BW-1:0] buf_q;

  always_ff @(posedge clk) if (buf_we) buf_q <= word_in;

  always_comb begin
    int unsigned p, lo;
    logic [XW-1:0] mask, v, zero_code;
    mask      = XW'((9'd1 << r_in) - 9'd1);
    zero_code = in_signed ? XW'(9'd1 << (r_in - 4'd1)) : '0;
    lo        = 32'(xfer) << 7;
    for (int u = 0; u < N_UNITS; u++)
      for (int k = 0; k < KSIZE; k++)
        for (int c = 0; c < CH_PER_UNIT; c++) begin
          p = (k * 32'(c_in) + u * CH_PER_UNIT + c) * 32'(r_in);
          v = '0;
          if (p >= lo && p < lo + BW)
            v = XW'(buf_q >> (p - lo)) & mask;
          if (in_signed) v = v ^ zero_code;
          if (pad_col || pad_row[k]) v = zero_code;
          din[u][k][c] = v;
        end
  end
endmodule
