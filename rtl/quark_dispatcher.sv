// quark_dispatcher -- front end of the vector engine facing the scalar core.
//
// The scalar core fetches all instructions and forwards each vector
// instruction, with its scalar operands rs1/rs2, once it is no longer
// speculative.  The dispatcher decodes it and answers in the cycle after
// acceptance:
//   * vsetvli / vsetivli / vsetvl are executed here: vl and vtype are
//     updated and the new vl is returned as the result;
//   * an arithmetic instruction is checked for every exception it could
//     raise (unsupported encoding, masked form, illegal vtype, misaligned
//     register group, bad vbitpack precision).  If it is legal it is put
//     into the instruction queue and acknowledged at once, without waiting
//     for its execution ("fire-and-forget"); otherwise it is answered with
//     exception = 1 and dropped.
// req_ready_o is low while the instruction queue is full.  The decoded
// instruction carries the vl in force when it was dispatched, so later
// vsetvl instructions never wait for the lanes.
//
// The acknowledge-after-check protocol follows the paper.  The field
// layout of the request/response and the encodings of vpopcnt, vshacc and
// vbitpack (custom-2 opcode, see quark_pkg) are this design's choice.
// Supported: vsetvl*, vadd, vsub, vand, vor, vxor, vsll, vsrl, vmv.v and
// the three custom instructions, unmasked, SEW 8..64, LMUL 1..8.
module quark_dispatcher
  import quark_pkg::*;
#(
  parameter int unsigned VLEN    = 4096,
  parameter int unsigned IQDepth = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // Scalar core side
  input  logic      req_valid_i,
  output logic      req_ready_o,
  input  acc_req_t  req_i,
  output logic      resp_valid_o,
  output acc_resp_t resp_o,
  // Towards the lanes
  output logic      insn_valid_o,
  input  logic      insn_ready_i,
  output vinsn_t    insn_o,
  // Current configuration
  output logic [16:0] vl_o,
  output sew_e      sew_o,
  output logic      vill_o
);

  localparam int unsigned VlenB = VLEN / 8;

  // Configuration state
  logic [16:0] vl_q;
  sew_e        sew_q;
  logic [1:0]  lmul_q;
  logic        vill_q;

  assign vl_o   = vl_q;
  assign sew_o  = sew_q;
  assign vill_o = vill_q;

  // Instruction fields
  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [5:0] funct6;
  logic [4:0] rd, rs1, rs2;
  logic       vm;

  assign opcode = req_i.insn[6:0];
  assign rd     = req_i.insn[11:7];
  assign funct3 = req_i.insn[14:12];
  assign rs1    = req_i.insn[19:15];
  assign rs2    = req_i.insn[24:20];
  assign vm     = req_i.insn[25];
  assign funct6 = req_i.insn[31:26];

  // Decode results
  logic        is_cfg, legal;
  vinsn_t      dec;
  logic [16:0] cfg_vl;
  sew_e        cfg_sew;
  logic [1:0]  cfg_lmul;
  logic        cfg_vill;

  logic [ELEN-1:0] simm5, uimm5;
  assign simm5 = {{(ELEN-5){rs1[4]}}, rs1};
  assign uimm5 = ELEN'(rs1);

  // Register-group alignment for the current LMUL.
  function automatic logic aligned(input logic [4:0] r, input logic [1:0] lmul);
    logic [4:0] msk;
    msk = 5'((1 << lmul) - 1);
    aligned = (r & msk) == 5'd0;
  endfunction

  always_comb begin
    logic [ELEN-1:0] vtype, avl;
    logic [17:0]     vlmax;

    is_cfg   = 1'b0;
    legal    = 1'b0;
    cfg_vl   = vl_q;
    cfg_sew  = sew_q;
    cfg_lmul = lmul_q;
    cfg_vill = vill_q;
    vtype    = '0;
    avl      = '0;
    vlmax    = '0;

    dec            = '0;
    dec.op         = VADD;
    dec.sew        = sew_q;
    dec.vd         = rd;
    dec.vs1        = rs1;
    dec.vs2        = rs2;
    dec.vl         = vl_q;
    dec.use_scalar = (funct3 == F3IVX) || (funct3 == F3IVI);
    dec.scalar     = (funct3 == F3IVX) ? req_i.rs1 : simm5;

    if (opcode == OpcodeOpV && funct3 == F3CFG) begin
      // ---------------- vsetvli / vsetivli / vsetvl ----------------
      is_cfg = 1'b1;
      legal  = 1'b1;
      if (!req_i.insn[31]) begin                         // vsetvli
        vtype = ELEN'(req_i.insn[30:20]);
        avl   = (rs1 != 5'd0) ? req_i.rs1 : (rd != 5'd0) ? '1 : ELEN'(vl_q);
      end else if (req_i.insn[30]) begin                 // vsetivli
        vtype = ELEN'(req_i.insn[29:20]);
        avl   = ELEN'(rs1);
      end else if (req_i.insn[31:25] == 7'b1000000) begin // vsetvl
        vtype = req_i.rs2;
        avl   = (rs1 != 5'd0) ? req_i.rs1 : (rd != 5'd0) ? '1 : ELEN'(vl_q);
      end else begin
        legal = 1'b0;
      end
      // Only integer LMUL 1..8 and SEW 8..64; no reserved bits set.
      cfg_vill = (vtype[2] != 1'b0) || (vtype[5] != 1'b0) || (vtype[ELEN-1:8] != '0);
      cfg_sew  = sew_e'(vtype[4:3]);
      cfg_lmul = vtype[1:0];
      vlmax    = 18'((VlenB >> cfg_sew) << cfg_lmul);
      if (cfg_vill) begin
        cfg_vl   = '0;
        cfg_sew  = SEW8;
        cfg_lmul = '0;
      end else begin
        cfg_vl = (avl > ELEN'(vlmax)) ? 17'(vlmax) : 17'(avl);
      end
    end else if (opcode == OpcodeOpV
                 && (funct3 == F3IVV || funct3 == F3IVX || funct3 == F3IVI)) begin
      // ---------------- standard integer operations ----------------
      legal = vm;
      unique case (funct6)
        F6Add: dec.op = VADD;
        F6Sub: begin
          dec.op = VSUB;
          if (funct3 == F3IVI) legal = 1'b0;   // no vsub.vi in RVV
        end
        F6And: dec.op = VAND;
        F6Or:  dec.op = VOR;
        F6Xor: dec.op = VXOR;
        F6Sll: begin dec.op = VSLL; if (funct3 == F3IVI) dec.scalar = uimm5; end
        F6Srl: begin dec.op = VSRL; if (funct3 == F3IVI) dec.scalar = uimm5; end
        F6Mv:  begin
          dec.op = VMV;
          if (rs2 != 5'd0) legal = 1'b0;       // vmv.v.* needs vs2 = v0
        end
        default: legal = 1'b0;
      endcase
    end else if (opcode == OpcodeCustom2) begin
      // ---------------- sub-byte extension ----------------
      legal = vm;
      unique case (funct6)
        F6Popcnt: begin
          dec.op = VPOPCNT;
          if (funct3 != F3IVV || rs1 != 5'd0) legal = 1'b0;
        end
        F6Shacc: begin
          dec.op = VSHACC;
          if (funct3 == F3IVI) dec.scalar = uimm5;
          else if (funct3 != F3IVV && funct3 != F3IVX) legal = 1'b0;
        end
        F6Bitpack: begin
          dec.op     = VBITPACK;
          dec.scalar = uimm5;
          if (funct3 != F3IVI || sew_q != SEW8
              || !(rs1 == 5'd1 || rs1 == 5'd2 || rs1 == 5'd4 || rs1 == 5'd8))
            legal = 1'b0;
        end
        default: legal = 1'b0;
      endcase
    end

    if (!is_cfg) begin
      if (vill_q) legal = 1'b0;
      if (!aligned(rd, lmul_q) || !aligned(rs2, lmul_q)) legal = 1'b0;
      if (funct3 == F3IVV && !aligned(rs1, lmul_q)) legal = 1'b0;
    end
  end

  // Instruction queue towards the lanes
  logic iq_push_ready, accept;

  quark_fifo #(
    .Width ($bits(vinsn_t)),
    .Depth (IQDepth)
  ) u_iq (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .push_valid_i (accept && legal && !is_cfg),
    .push_ready_o (iq_push_ready),
    .push_data_i  (dec),
    .pop_valid_o  (insn_valid_o),
    .pop_ready_i  (insn_ready_i),
    .pop_data_o   (insn_o),
    .count_o      ()
  );

  assign req_ready_o = iq_push_ready;
  assign accept      = req_valid_i && req_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q         <= '0;
      sew_q        <= SEW8;
      lmul_q       <= '0;
      vill_q       <= 1'b1;
      resp_valid_o <= 1'b0;
      resp_o       <= '0;
    end else begin
      resp_valid_o <= accept;
      if (accept) begin
        resp_o.exception <= !legal;
        resp_o.result    <= (is_cfg && legal) ? ELEN'(cfg_vl) : '0;
        if (is_cfg && legal) begin
          vl_q   <= cfg_vl;
          sew_q  <= cfg_sew;
          lmul_q <= cfg_lmul;
          vill_q <= cfg_vill;
        end
      end
    end
  end

endmodule
