// tb_quark_valu -- self-checking test of the lane VALU.
// Every operation is applied at every SEW to random operands; expected
// results are computed element by element from 64-bit integer arithmetic
// in the testbench, and the byte enables are checked for tail handling
// (element-wise operations write only valid bytes, vbitpack the whole word).
module tb_quark_valu;
  import quark_pkg::*;

  vop_e        op;
  sew_e        sew;
  logic [63:0] a, b, d, res;
  logic [7:0]  bv, be;
  int checks = 0, failures = 0;

  quark_valu dut (.op_i(op), .sew_i(sew), .a_i(a), .b_i(b), .d_i(d),
                  .byte_valid_i(bv), .res_o(res), .be_o(be));

  function automatic logic [63:0] field(logic [63:0] x, int e, int ew);
    return (x >> (e * ew)) & ((ew == 64) ? '1 : ((64'd1 << ew) - 1));
  endfunction

  function automatic logic [63:0] ref_op(vop_e o, int ew, logic [63:0] x, logic [63:0] y, logic [63:0] z);
    logic [63:0] r = '0, m = (ew == 64) ? '1 : ((64'd1 << ew) - 1);
    for (int e = 0; e < 64 / ew; e++) begin
      logic [63:0] xa = field(x, e, ew), yb = field(y, e, ew), zd = field(z, e, ew), t;
      int sh = int'(xa % ew);
      case (o)
        VADD:    t = yb + xa;
        VSUB:    t = yb - xa;
        VAND:    t = yb & xa;
        VOR:     t = yb | xa;
        VXOR:    t = yb ^ xa;
        VSLL:    t = yb << sh;
        VSRL:    t = yb >> sh;
        VMV:     t = xa;
        VPOPCNT: t = 64'($countones(yb));
        VSHACC:  t = zd + (yb << sh);
        default: t = '0;
      endcase
      r |= (t & m) << (e * ew);
    end
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o <= int'(VSHACC); o++)
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < 100; i++) begin
          logic [63:0] exp;
          op = vop_e'(o); sew = sew_e'(s);
          a = {$urandom, $urandom}; b = {$urandom, $urandom}; d = {$urandom, $urandom};
          bv = 8'($urandom);
          #1;
          exp = ref_op(op, 8 << s, a, b, d);
          checks++;
          if (res !== exp || be !== bv) begin
            failures++;
            $display("FAIL %s sew=%0d a=%h b=%h d=%h got %h/%h exp %h/%h",
                     op.name(), 8 << s, a, b, d, res, be, exp, bv);
          end
        end
    // vbitpack: precision 2 from the scalar operand, whole word written
    op = VBITPACK; sew = SEW8; a = {8{8'd2}}; b = {8{8'h02}}; d = 64'h0000_0001_0000_0001; bv = 8'hFF;
    #1;
    checks++;
    if (res !== 64'h0000_01FF_0000_0100 || be !== 8'hFF) begin
      failures++;
      $display("FAIL VBITPACK got %h be %h", res, be);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
