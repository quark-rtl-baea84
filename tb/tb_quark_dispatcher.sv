// tb_quark_dispatcher -- self-checking test of the dispatcher.
// Plays the scalar core: sends vsetvli/vsetivli/vsetvl and checks the
// returned vl against min(AVL, VLEN*LMUL/SEW); sends legal and illegal
// arithmetic instructions and checks the exception flag, that every
// answer comes exactly one cycle after acceptance, that legal
// instructions appear decoded (operation, registers, SEW, vl, scalar) at
// the queue output in order, that illegal ones never do, and that the
// dispatcher stops accepting while the instruction queue is full.
module tb_quark_dispatcher;
  import quark_pkg::*;
  import quark_tb_pkg::*;
  localparam int VL = 4096;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, insn_valid, insn_ready;
  acc_req_t req;
  acc_resp_t resp;
  vinsn_t insn;
  logic [16:0] vl;
  sew_e sew;
  logic vill;
  int checks = 0, failures = 0;
  vinsn_t expq [$];

  quark_dispatcher #(.VLEN(VL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_i(req), .resp_valid_o(resp_valid), .resp_o(resp), .insn_valid_o(insn_valid),
    .insn_ready_i(insn_ready), .insn_o(insn), .vl_o(vl), .sew_o(sew), .vill_o(vill));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Consumer of the decoded-instruction queue
  always @(posedge clk) if (rst_n && insn_valid && insn_ready) begin
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL unexpected instruction %p", insn);
    end else begin
      vinsn_t e;
      e = expq.pop_front();
      if (insn !== e) begin
        failures++;
        $display("FAIL decoded %p exp %p", insn, e);
      end
    end
  end

  task automatic send(logic [31:0] ins, logic [63:0] rs1, logic [63:0] rs2,
                      bit exp_exc, logic [63:0] exp_res);
    @(negedge clk);
    req_valid = 1; req.insn = ins; req.rs1 = rs1; req.rs2 = rs2;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid || resp.exception !== exp_exc || resp.result !== exp_res) begin
      failures++;
      $display("FAIL resp insn=%h valid=%b exc=%b res=%0d exp exc=%b res=%0d",
               ins, resp_valid, resp.exception, resp.result, exp_exc, exp_res);
    end
  endtask

  function automatic vinsn_t mk(vop_e op, sew_e s, int vd, int vs1, int vs2, bit us,
                                logic [63:0] sc, int vlen);
    vinsn_t v = '0;
    v.op = op; v.sew = s; v.vd = 5'(vd); v.vs1 = 5'(vs1); v.vs2 = 5'(vs2);
    v.use_scalar = us; v.scalar = sc; v.vl = 17'(vlen);
    return v;
  endfunction

  initial begin
    int full_seen = 0;
    req_valid = 0; req = '0; insn_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // vill after reset: arithmetic is illegal
    send(enc_v(OpcodeOpV, F6Add, F3IVV, 1, 2, 3), 0, 0, 1, 0);
    // vsetvli with AVL from rs1, SEW=8 LMUL=1: VLMAX = 512
    send(enc_vsetvli(5, 6, 0, 0), 100, 0, 0, 100);
    send(enc_vsetvli(5, 6, 0, 0), 1000, 0, 0, 512);
    // rs1 = x0, rd != x0: VLMAX; SEW=16 LMUL=8 -> 2048
    send(enc_vsetvli(5, 0, 1, 3), 0, 0, 0, 2048);
    // vsetivli uimm=17 SEW=64 LMUL=2
    send(enc_vsetivli(1, 17, 3, 1), 0, 0, 0, 17);
    // vsetvl with vtype from rs2: SEW=32, LMUL=4 -> VLMAX 512
    send(enc_vsetvl(1, 2, 3), 9999, 64'h0000_0012, 0, 512);
    // illegal vtype (fractional LMUL) sets vill, vl = 0
    send(enc_vsetvl(1, 2, 3), 10, 64'h0000_0005, 0, 0);
    send(enc_v(OpcodeOpV, F6And, F3IVV, 4, 8, 12), 0, 0, 1, 0);
    // SEW=8, LMUL=2, vl=300
    send(enc_vsetvli(5, 6, 0, 1), 300, 0, 0, 300);
    expq.push_back(mk(VAND, SEW8, 4, 12, 8, 0, 64'(12), 300));
    send(enc_v(OpcodeOpV, F6And, F3IVV, 4, 8, 12), 0, 0, 0, 0);
    expq.push_back(mk(VADD, SEW8, 2, 25, 6, 1, 64'hFFFF_FFFF_FFFF_FFF9, 300));
    send(enc_v(OpcodeOpV, F6Add, F3IVI, 2, 6, 5'b11001), 0, 0, 0, 0);   // simm5 = -7
    expq.push_back(mk(VSLL, SEW8, 2, 3, 6, 1, 64'd3, 300));
    send(enc_v(OpcodeOpV, F6Sll, F3IVI, 2, 6, 3), 0, 0, 0, 0);
    expq.push_back(mk(VSUB, SEW8, 2, 9, 6, 1, 64'h1234, 300));
    send(enc_v(OpcodeOpV, F6Sub, F3IVX, 2, 6, 9), 64'h1234, 0, 0, 0);
    expq.push_back(mk(VPOPCNT, SEW8, 10, 0, 14, 0, 64'd0, 300));
    send(enc_vpopcnt(10, 14), 0, 0, 0, 0);
    expq.push_back(mk(VSHACC, SEW8, 10, 5, 14, 1, 64'd5, 300));
    send(enc_vshacc_vi(10, 14, 5), 0, 0, 0, 0);
    expq.push_back(mk(VBITPACK, SEW8, 16, 2, 18, 1, 64'd2, 300));
    send(enc_vbitpack(16, 18, 2), 0, 0, 0, 0);
    expq.push_back(mk(VMV, SEW8, 20, 7, 0, 1, 64'd7, 300));
    send(enc_v(OpcodeOpV, F6Mv, F3IVI, 20, 0, 7), 0, 0, 0, 0);
    // illegal: masked, misaligned group, bad precision, vsub.vi, unknown funct6
    send(enc_v(OpcodeOpV, F6Add, F3IVV, 2, 4, 6, 1'b0), 0, 0, 1, 0);
    send(enc_v(OpcodeOpV, F6Add, F3IVV, 3, 4, 6), 0, 0, 1, 0);
    send(enc_vbitpack(16, 18, 3), 0, 0, 1, 0);
    send(enc_v(OpcodeOpV, F6Sub, F3IVI, 2, 4, 1), 0, 0, 1, 0);
    send(enc_v(OpcodeCustom2, 6'b111111, F3IVV, 2, 4, 6), 0, 0, 1, 0);
    send(enc_vpopcnt(10, 14) | (32'd3 << 15), 0, 0, 1, 0);
    // vbitpack needs SEW = 8
    send(enc_vsetvli(5, 6, 1, 0), 64, 0, 0, 64);
    send(enc_vbitpack(16, 18, 2), 0, 0, 1, 0);
    expq.push_back(mk(VSHACC, SEW16, 10, 3, 14, 1, 64'd11, 64));
    send(enc_vshacc_vx(10, 14, 3), 64'd11, 0, 0, 0);
    // back-pressure: stop consuming, fill the queue
    repeat (3) @(posedge clk);
    @(negedge clk);
    insn_ready = 0;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      req_valid = 1; req.insn = enc_v(OpcodeOpV, F6Xor, F3IVV, 1, 2, 3); req.rs1 = 0; req.rs2 = 0;
      @(posedge clk);
      if (req_ready) expq.push_back(mk(VXOR, SEW16, 1, 3, 2, 0, 64'd3, 64));
      else full_seen++;
    end
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (full_seen != 2) begin
      failures++;
      $display("FAIL expected 2 refused pushes, got %0d", full_seen);
    end
    insn_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d instructions never left the queue", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
