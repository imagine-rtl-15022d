// cim_decoder: write-enable decoder of the CIM input shift register.
//
// A kernel column (the K=3 vertically adjacent pixels of one image column,
// each C_in channels of r_in bits, packed bit-first, channel-second,
// kernel-row-last) is transferred in ceil(3*r_in*C_in/128) words. For the
// transfer with index xfer this block returns which of the 32 four-channel
// blocks (CH_31:0) and which of the three kernel rows (CS_K,2:0) the word
// carries, so that only those shift-register groups are clocked.
//   * r_in*C_in >= 128 (large layers): one word holds 128/r_in channels of a
//     single kernel row, so one CS_K bit and a contiguous CH range are set.
//   * r_in*C_in <  128 (small layers): one word holds 128/(r_in*C_in) whole
//     kernel rows, so several CS_K bits and all used channel blocks are set.
// Purely combinational. The CH/CS_K interface is the published one; the
// packing order and the restriction of the datapath to r_in in {1,2,4,8} and
// C_in in {4,...,128} (powers of two, so a word never splits a value or a
// CH x CS_K product) are this implementation's choices.
//
// From the published design: the CH_31:0 / CS_K,2:0 enable names and the two
// transfer situations (several kernel rows per word, or one kernel row split
// over words). Own choice: the bit layout of a word and the restriction to
// power-of-two r_in and C_in that makes it a shift-only decoder.
module cim_decoder
  import imagine_pkg::*;
(
  input  logic [3:0]  r_in,
  input  logic [7:0]  c_in,
  input  logic [7:0]  xfer,
  output logic [N_UNITS-1:0] ch,
  output logic [KSIZE-1:0]   cs_k
);
  function automatic int unsigned lg2(input int unsigned v);
    int unsigned r = 0;
    for (int i = 0; i < 8; i++) if (v > (1 << i)) r = i + 1;
    return r;
  endfunction

  always_comb begin
    int unsigned lr_lg, bitpos, k0, c0, nch, rows;
    ch   = '0;
    cs_k = '0;
    k0 = 0; c0 = 0; nch = 0; rows = 0;
    lr_lg  = lg2(32'(r_in)) + lg2(32'(c_in));
    bitpos = 32'(xfer) << 7;
    if (lr_lg >= 7) begin
      k0  = bitpos >> lr_lg;
      c0  = (bitpos - (k0 << lr_lg)) >> lg2(32'(r_in));
      nch = 128 >> lg2(32'(r_in));
      if (k0 < KSIZE) cs_k[k0] = 1'b1;
      for (int u = 0; u < N_UNITS; u++)
        if (u * CH_PER_UNIT >= c0 && u * CH_PER_UNIT < c0 + nch) ch[u] = 1'b1;
    end else begin
      rows = 1 << (7 - lr_lg);
      k0   = 32'(xfer) * rows;
      for (int k = 0; k < KSIZE; k++)
        if (k >= k0 && k < k0 + rows) cs_k[k] = 1'b1;
      for (int u = 0; u < N_UNITS; u++)
        if (u * CH_PER_UNIT < 32'(c_in)) ch[u] = 1'b1;
    end
  end
endmodule
