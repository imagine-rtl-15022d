// output_mux: stage 4 of the datapath, packing CIM outputs into 128b words
// for the output LMEM.
//
// With r_w-bit weights, each 4-column analog block produces 4/r_w results
// (r_w = 1, 2, 4) or one (r_w = 3) and the result of a weight lies on the
// column of its MSB: output channel o is column o (r_w=1), 2o+1 (r_w=2),
// 4o+2 (r_w=3) or 4o+3 (r_w=4). Channel o's r_out-bit code is placed at bit
// o*r_out of the output stream, of which word xfer holds bits
// [128*xfer, +128). With out_signed set, the ADC's offset-binary code is
// turned into two's complement by inverting its MSB. Purely combinational.
// The precision-dependent selection is published (Fig. 15(a) 'Mux'); the
// column/channel mapping and the packing are this implementation's choices.
//
// From the published design: the precision multiplexer and the
// unsigned-to-signed conversion of stage (iv). Own choices: the column that
// carries each result and the packing order within a word.
module output_mux
  import imagine_pkg::*;
(
  input  logic [7:0]    dout [N_COLS],
  input  logic [2:0]    r_w,
  input  logic [3:0]    r_out,
  input  logic          out_signed,
  input  logic [7:0]    xfer,
  output logic [BW-1:0] word
);
  always_comb begin
    int unsigned n, o0, col, pos;
    logic [7:0] v, mask;
    n    = BW / 32'(r_out);            // channels per word
    o0   = 32'(xfer) * n;
    mask = 8'((9'd1 << r_out) - 9'd1);
    word = '0;
    for (int i = 0; i < BW; i++) begin
      if (i < n && o0 + i < n_cout(32'(r_w))) begin
        case (r_w)
          3'd1:    col = o0 + i;
          3'd2:    col = 2 * (o0 + i) + 1;
          3'd3:    col = 4 * (o0 + i) + 2;
          default: col = 4 * (o0 + i) + 3;
        endcase
        v = dout[col[7:0]] & mask;
        if (out_signed) v = v ^ 8'(9'd1 << (r_out - 4'd1));
        pos = i * 32'(r_out);
        word = word | (BW'(v) << pos);
      end
    end
  end
endmodule
