// quark_valu -- integer SIMD vector ALU of one Quark lane.
//
// Quark's lanes keep only integer arithmetic: the vector floating-point unit
// of the original engine is removed, and the ALU gains the three sub-byte
// operations needed by bit-serial convolution: vpopcnt (per-element
// popcount), vshacc (fused shift and accumulate) and vbitpack (bit-plane
// packing).  Each call processes one 64-bit word of a vector register,
// i.e. 8, 4, 2 or 1 elements depending on SEW.
//
// Operands:  a_i = vs1 word or the splatted scalar/immediate,
//            b_i = vs2 word, d_i = old vd word (used by vshacc, vbitpack).
// Result:    res_o, and be_o, the bytes of the vd word to write.  For
// element-wise operations be_o equals byte_valid_i (bytes of elements
// inside vl; tail bytes keep their old value).  vbitpack writes the whole
// destination word.  Purely combinational; the lane registers around it.
//
// The paper gives the custom operations' function; the set of standard
// operations kept here (add, sub, and, or, xor, sll, srl, move) is this
// design's selection of what a bit-serial kernel needs.
module quark_valu
  import quark_pkg::*;
(
  input  vop_e            op_i,
  input  sew_e            sew_i,
  input  logic [ELEN-1:0] a_i,
  input  logic [ELEN-1:0] b_i,
  input  logic [ELEN-1:0] d_i,
  input  logic [7:0]      byte_valid_i,
  output logic [ELEN-1:0] res_o,
  output logic [7:0]      be_o
);

  logic [ELEN-1:0] popcnt_res, shacc_res, bitpack_res;
  logic [ELEN-1:0] add_res, sub_res, sll_res, srl_res;

  quark_popcnt u_popcnt (
    .a_i   (b_i),
    .sew_i (sew_i),
    .cnt_o (popcnt_res)
  );

  quark_shacc u_shacc (
    .acc_i   (d_i),
    .val_i   (b_i),
    .shamt_i (a_i),
    .sew_i   (sew_i),
    .acc_o   (shacc_res)
  );

  quark_bitpack u_bitpack (
    .dst_i        (d_i),
    .src_i        (b_i),
    .byte_valid_i (byte_valid_i),
    .prec_i       (a_i[3:0]),
    .dst_o        (bitpack_res)
  );

  // Element-wise add, subtract and shifts at the selected SEW.
  always_comb begin
    add_res = '0;
    sub_res = '0;
    sll_res = '0;
    srl_res = '0;
    unique case (sew_i)
      SEW8:
        for (int e = 0; e < 8; e++) begin
          add_res[8*e +: 8] = b_i[8*e +: 8] + a_i[8*e +: 8];
          sub_res[8*e +: 8] = b_i[8*e +: 8] - a_i[8*e +: 8];
          sll_res[8*e +: 8] = b_i[8*e +: 8] << a_i[8*e +: 3];
          srl_res[8*e +: 8] = b_i[8*e +: 8] >> a_i[8*e +: 3];
        end
      SEW16:
        for (int e = 0; e < 4; e++) begin
          add_res[16*e +: 16] = b_i[16*e +: 16] + a_i[16*e +: 16];
          sub_res[16*e +: 16] = b_i[16*e +: 16] - a_i[16*e +: 16];
          sll_res[16*e +: 16] = b_i[16*e +: 16] << a_i[16*e +: 4];
          srl_res[16*e +: 16] = b_i[16*e +: 16] >> a_i[16*e +: 4];
        end
      SEW32:
        for (int e = 0; e < 2; e++) begin
          add_res[32*e +: 32] = b_i[32*e +: 32] + a_i[32*e +: 32];
          sub_res[32*e +: 32] = b_i[32*e +: 32] - a_i[32*e +: 32];
          sll_res[32*e +: 32] = b_i[32*e +: 32] << a_i[32*e +: 5];
          srl_res[32*e +: 32] = b_i[32*e +: 32] >> a_i[32*e +: 5];
        end
      default: begin
        add_res = b_i + a_i;
        sub_res = b_i - a_i;
        sll_res = b_i << a_i[5:0];
        srl_res = b_i >> a_i[5:0];
      end
    endcase
  end

  always_comb begin
    be_o = byte_valid_i;
    unique case (op_i)
      VADD:     res_o = add_res;
      VSUB:     res_o = sub_res;
      VAND:     res_o = b_i & a_i;
      VOR:      res_o = b_i | a_i;
      VXOR:     res_o = b_i ^ a_i;
      VSLL:     res_o = sll_res;
      VSRL:     res_o = srl_res;
      VMV:      res_o = a_i;
      VPOPCNT:  res_o = popcnt_res;
      VSHACC:   res_o = shacc_res;
      VBITPACK: begin
        res_o = bitpack_res;
        be_o  = '1;
      end
      default:  res_o = '0;
    endcase
  end

endmodule
