// tb_quark_popcnt -- self-checking test of the per-element popcount unit.
// Random and corner words are applied at every SEW; the expected count of
// each element is computed bit by bit in the testbench.
module tb_quark_popcnt;
  import quark_pkg::*;

  logic [63:0] a, cnt;
  sew_e        sew;
  int checks = 0, failures = 0;

  quark_popcnt dut (.a_i(a), .sew_i(sew), .cnt_o(cnt));

  function automatic logic [63:0] ref_popcnt(logic [63:0] x, int ew);
    logic [63:0] r = '0;
    for (int e = 0; e < 64 / ew; e++) begin
      int n = 0;
      for (int i = 0; i < ew; i++) n += x[e*ew + i];
      r |= 64'(n) << (e * ew);
    end
    return r;
  endfunction

  task automatic check(logic [63:0] x, sew_e s);
    logic [63:0] exp;
    a = x; sew = s;
    #1;
    exp = ref_popcnt(x, 8 << s);
    checks++;
    if (cnt !== exp) begin
      failures++;
      $display("FAIL popcnt a=%h sew=%0d got %h exp %h", x, 8 << s, cnt, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) begin
      check('0, sew_e'(s));
      check('1, sew_e'(s));
      check(64'h8000_0000_0000_0001, sew_e'(s));
      for (int i = 0; i < 200; i++) check({$urandom, $urandom}, sew_e'(s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
