// quark_popcnt -- per-element population count over one 64-bit lane word
// (the datapath of the vpopcnt instruction).
//
// Standard RVV only counts the set bits of a whole mask vector; vpopcnt
// instead replaces every element by the number of bits at 1 in it.  The
// unit counts the bits of each byte first and then adds byte counts in a
// tree for 16-, 32- and 64-bit elements; sew_i selects which level is
// returned.  Each element's count is zero-extended to the element width.
// Purely combinational: the result is valid in the same cycle.
// The operation itself comes from the paper; the adder-tree structure is
// this design's choice.
module quark_popcnt
  import quark_pkg::*;
(
  input  logic [ELEN-1:0] a_i,
  input  sew_e            sew_i,
  output logic [ELEN-1:0] cnt_o
);

  logic [3:0] c8  [8];  // 0..8
  logic [4:0] c16 [4];  // 0..16
  logic [5:0] c32 [2];  // 0..32
  logic [6:0] c64;      // 0..64

  always_comb begin
    for (int b = 0; b < 8; b++) begin
      c8[b] = '0;
      for (int i = 0; i < 8; i++) c8[b] = c8[b] + 4'(a_i[8*b+i]);
    end
    for (int h = 0; h < 4; h++) c16[h] = 5'(c8[2*h]) + 5'(c8[2*h+1]);
    for (int w = 0; w < 2; w++) c32[w] = 6'(c16[2*w]) + 6'(c16[2*w+1]);
    c64 = 7'(c32[0]) + 7'(c32[1]);

    cnt_o = '0;
    unique case (sew_i)
      SEW8:    for (int b = 0; b < 8; b++) cnt_o[8*b  +: 8]  = 8'(c8[b]);
      SEW16:   for (int h = 0; h < 4; h++) cnt_o[16*h +: 16] = 16'(c16[h]);
      SEW32:   for (int w = 0; w < 2; w++) cnt_o[32*w +: 32] = 32'(c32[w]);
      default: cnt_o = 64'(c64);
    endcase
  end

endmodule
