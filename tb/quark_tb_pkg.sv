// quark_tb_pkg -- instruction encoders shared by the Quark testbenches.
// They build 32-bit RVV instructions (OP-V, vsetvl*) and the sub-byte
// extension instructions (custom-2 opcode) with the field layout
// funct6 | vm | vs2 | rs1/vs1/imm | funct3 | vd | opcode.
package quark_tb_pkg;
  import quark_pkg::*;

  function automatic logic [31:0] enc_v(logic [6:0] opcode, logic [5:0] f6, logic [2:0] f3,
                                        int vd, int vs2, int rs1, bit vm = 1'b1);
    return {f6, vm, 5'(vs2), 5'(rs1), f3, 5'(vd), opcode};
  endfunction

  // vtype immediate: vsew (0..3 = 8..64 bits), vlmul (0..3 = 1..8)
  function automatic logic [10:0] vtypei(int sew, int lmul);
    return {3'b000, 1'b0, 1'b0, 3'(sew), 3'(lmul)};
  endfunction

  function automatic logic [31:0] enc_vsetvli(int rd, int rs1, int sew, int lmul);
    return {1'b0, vtypei(sew, lmul), 5'(rs1), F3CFG, 5'(rd), OpcodeOpV};
  endfunction

  function automatic logic [31:0] enc_vsetivli(int rd, int uimm, int sew, int lmul);
    logic [10:0] vt = vtypei(sew, lmul);
    return {2'b11, vt[9:0], 5'(uimm), F3CFG, 5'(rd), OpcodeOpV};
  endfunction

  function automatic logic [31:0] enc_vsetvl(int rd, int rs1, int rs2);
    return {7'b1000000, 5'(rs2), 5'(rs1), F3CFG, 5'(rd), OpcodeOpV};
  endfunction

  function automatic logic [31:0] enc_vpopcnt(int vd, int vs2);
    return enc_v(OpcodeCustom2, F6Popcnt, F3IVV, vd, vs2, 0);
  endfunction

  function automatic logic [31:0] enc_vshacc_vi(int vd, int vs2, int sh);
    return enc_v(OpcodeCustom2, F6Shacc, F3IVI, vd, vs2, sh);
  endfunction

  function automatic logic [31:0] enc_vshacc_vx(int vd, int vs2, int rs1);
    return enc_v(OpcodeCustom2, F6Shacc, F3IVX, vd, vs2, rs1);
  endfunction

  function automatic logic [31:0] enc_vbitpack(int vd, int vs2, int prec);
    return enc_v(OpcodeCustom2, F6Bitpack, F3IVI, vd, vs2, prec);
  endfunction
endpackage
