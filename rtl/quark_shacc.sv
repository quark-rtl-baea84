// quark_shacc -- per-element fused shift-and-accumulate over one 64-bit lane
// word (the datapath of the vshacc instruction).
//
// The bit-serial dot product sums popcount(w_m & a_n) * 2^(n+m) over all
// pairs of bit planes.  vshacc fuses the weighting shift and the sum:
//   acc_o[e] = acc_i[e] + (val_i[e] << shamt_i[e])      (modulo 2^SEW)
// for every element e of width SEW.  As for the standard RVV shifts, only
// the low log2(SEW) bits of each shift amount are used.  The exact operand
// order and shift-amount source (vector, scalar or immediate) are this
// design's choice; the paper states only that shift and accumulation are
// fused.  Purely combinational.
module quark_shacc
  import quark_pkg::*;
(
  input  logic [ELEN-1:0] acc_i,    // old destination (accumulator)
  input  logic [ELEN-1:0] val_i,    // value to weight (e.g. popcounts)
  input  logic [ELEN-1:0] shamt_i,  // per-element shift amounts
  input  sew_e            sew_i,
  output logic [ELEN-1:0] acc_o
);

  always_comb begin
    acc_o = '0;
    unique case (sew_i)
      SEW8:
        for (int e = 0; e < 8; e++)
          acc_o[8*e +: 8] = acc_i[8*e +: 8] + (val_i[8*e +: 8] << shamt_i[8*e +: 3]);
      SEW16:
        for (int e = 0; e < 4; e++)
          acc_o[16*e +: 16] = acc_i[16*e +: 16] + (val_i[16*e +: 16] << shamt_i[16*e +: 4]);
      SEW32:
        for (int e = 0; e < 2; e++)
          acc_o[32*e +: 32] = acc_i[32*e +: 32] + (val_i[32*e +: 32] << shamt_i[32*e +: 5]);
      default:
        acc_o = acc_i + (val_i << shamt_i[5:0]);
    endcase
  end

endmodule
