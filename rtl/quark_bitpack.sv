// quark_bitpack -- bit-plane packing of one 64-bit lane word (the datapath
// of the vbitpack instruction).
//
// The source word holds eight 8-bit elements (SEW = 8) of which the low
// `prec` bits are significant.  The 64-bit destination word is split into
// prec planes of 64/prec bits: plane p occupies bits [p*64/prec +: 64/prec].
// One call takes bit p of each of the eight source elements (element j
// gives bit j of the slice), shifts plane p of the destination left by
// eight and places the 8-bit slice in its low end.  Repeating the call on
// successive source words therefore accumulates a bit-stream per plane:
// with prec = 2 the two planes are bits [31:0] and [63:32] and four calls
// fill them, matching the bit positions 0, 8, 32 and 40 of the worked
// example in the paper.  Supported precisions are 1, 2, 4 and 8; for 8 the
// plane is exactly one slice wide, so the old contents are shifted out.
// byte_valid_i masks source elements that lie beyond vl (their slice bits
// read as 0).  Purely combinational.
//
// The ordering of a new slice below the older ones follows the paper's
// description of the instruction ("shifts the target register to the left
// and then performs the packing"); its figure colours the second slice
// above the first, which this design does not follow.
module quark_bitpack
  import quark_pkg::*;
(
  input  logic [ELEN-1:0] dst_i,         // old destination word
  input  logic [ELEN-1:0] src_i,         // eight 8-bit source elements
  input  logic [7:0]      byte_valid_i,  // source element j lies within vl
  input  logic [3:0]      prec_i,        // 1, 2, 4 or 8 bit planes
  output logic [ELEN-1:0] dst_o
);

  logic [7:0] slice [8];  // slice[p][j] = bit p of source element j

  always_comb begin
    for (int p = 0; p < 8; p++)
      for (int j = 0; j < 8; j++)
        slice[p][j] = src_i[8*j+p] & byte_valid_i[j];

    dst_o = dst_i;
    unique case (prec_i)
      4'd1: dst_o = {dst_i[55:0], slice[0]};
      4'd2:
        for (int p = 0; p < 2; p++)
          dst_o[32*p +: 32] = {dst_i[32*p +: 24], slice[p]};
      4'd4:
        for (int p = 0; p < 4; p++)
          dst_o[16*p +: 16] = {dst_i[16*p +: 8], slice[p]};
      4'd8:
        for (int p = 0; p < 8; p++)
          dst_o[8*p +: 8] = slice[p];
      default: dst_o = dst_i;
    endcase
  end

endmodule
