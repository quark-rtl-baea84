// quark_pkg -- types and constants shared by the Quark integer vector engine.
//
// The default machine follows the configuration of the main implementation:
// four lanes and 4096-bit vector registers, i.e. a 16 KiB vector register
// file split evenly over the lanes, with 64-bit lane datapaths.  The
// instruction encoding of the three sub-byte instructions (vpopcnt, vshacc,
// vbitpack) is this design's own choice: they live in the RISC-V custom-2
// major opcode and reuse the OP-V field layout (funct6 / vm / vs2 / vs1 /
// funct3 / vd).  Standard vector instructions use the RVV 1.0 encodings.
package quark_pkg;

  // Lane datapath width (ELEN of the RV64 vector engine).
  localparam int unsigned ELEN      = 64;
  localparam int unsigned NrVRegs   = 32;

  // Major opcodes.
  localparam logic [6:0] OpcodeOpV     = 7'b1010111;  // RVV OP-V
  localparam logic [6:0] OpcodeCustom2 = 7'b1011011;  // sub-byte extension

  // OP-V funct3 categories.
  localparam logic [2:0] F3IVV = 3'b000;
  localparam logic [2:0] F3IVI = 3'b011;
  localparam logic [2:0] F3IVX = 3'b100;
  localparam logic [2:0] F3CFG = 3'b111;

  // RVV 1.0 funct6 values of the supported integer operations.
  localparam logic [5:0] F6Add = 6'b000000;
  localparam logic [5:0] F6Sub = 6'b000010;
  localparam logic [5:0] F6And = 6'b001001;
  localparam logic [5:0] F6Or  = 6'b001010;
  localparam logic [5:0] F6Xor = 6'b001011;
  localparam logic [5:0] F6Mv  = 6'b010111;
  localparam logic [5:0] F6Sll = 6'b100101;
  localparam logic [5:0] F6Srl = 6'b101000;

  // custom-2 funct6 values of the sub-byte instructions.
  localparam logic [5:0] F6Popcnt  = 6'b000000;  // vpopcnt.v   vd, vs2
  localparam logic [5:0] F6Shacc   = 6'b000001;  // vshacc.v{v,x,i} vd, vs2, shamt
  localparam logic [5:0] F6Bitpack = 6'b000010;  // vbitpack.vi vd, vs2, prec

  // Operation executed by the lane VALU.
  typedef enum logic [3:0] {
    VADD, VSUB, VAND, VOR, VXOR, VSLL, VSRL, VMV,
    VPOPCNT, VSHACC, VBITPACK
  } vop_e;

  // Selected element width (vtype.vsew encoding).
  typedef enum logic [1:0] {
    SEW8  = 2'd0,
    SEW16 = 2'd1,
    SEW32 = 2'd2,
    SEW64 = 2'd3
  } sew_e;

  // Request from the scalar core: the raw instruction and its scalar operands.
  typedef struct packed {
    logic [31:0]     insn;
    logic [ELEN-1:0] rs1;
    logic [ELEN-1:0] rs2;
  } acc_req_t;

  // Answer to the scalar core.
  typedef struct packed {
    logic [ELEN-1:0] result;     // new vl for vsetvl*, zero otherwise
    logic            exception;  // illegal instruction
  } acc_resp_t;

  // Decoded vector instruction as broadcast to the lanes.  vl counts
  // elements of width sew; its width covers VLMAX at LMUL = 8, SEW = 8 for
  // vector lengths up to 65536 bits.
  typedef struct packed {
    vop_e            op;
    sew_e            sew;
    logic [4:0]      vd;
    logic [4:0]      vs1;
    logic [4:0]      vs2;
    logic            use_scalar;  // operand A is the splatted scalar
    logic [ELEN-1:0] scalar;
    logic [16:0]     vl;
  } vinsn_t;

  // Replicate the low SEW bits of a scalar over a 64-bit lane word.
  function automatic logic [ELEN-1:0] splat(input logic [ELEN-1:0] s, input sew_e sew);
    unique case (sew)
      SEW8:    splat = {8{s[7:0]}};
      SEW16:   splat = {4{s[15:0]}};
      SEW32:   splat = {2{s[31:0]}};
      default: splat = s;
    endcase
  endfunction

endpackage
