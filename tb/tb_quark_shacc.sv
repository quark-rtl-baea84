// tb_quark_shacc -- self-checking test of the shift-and-accumulate unit.
// For every SEW, random accumulators, values and shift amounts are applied
// and each element is compared with acc + (val << (shamt mod SEW)) computed
// element by element in the testbench.
module tb_quark_shacc;
  import quark_pkg::*;

  logic [63:0] acc, val, sh, res;
  sew_e        sew;
  int checks = 0, failures = 0;

  quark_shacc dut (.acc_i(acc), .val_i(val), .shamt_i(sh), .sew_i(sew), .acc_o(res));

  task automatic check(logic [63:0] ac, logic [63:0] v, logic [63:0] s, sew_e sw);
    int ew = 8 << sw;
    logic [63:0] exp = '0;
    acc = ac; val = v; sh = s; sew = sw;
    #1;
    for (int e = 0; e < 64 / ew; e++) begin
      logic [63:0] ae = '0, ve = '0, r;
      int          n  = 0;
      for (int i = 0; i < ew; i++) begin
        ae[i] = ac[e*ew + i];
        ve[i] = v[e*ew + i];
      end
      for (int i = 0; i < $clog2(ew); i++) n += int'(s[e*ew + i]) << i;
      r = ae + (ve << n);
      for (int i = 0; i < ew; i++) exp[e*ew + i] = r[i];
    end
    checks++;
    if (res !== exp) begin
      failures++;
      $display("FAIL shacc sew=%0d acc=%h val=%h sh=%h got %h exp %h", ew, ac, v, s, res, exp);
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
      check(64'd5, 64'd3, 64'd2, sew_e'(s));   // 5 + 3*4 = 17 in element 0
      for (int i = 0; i < 300; i++)
        check({$urandom, $urandom}, {$urandom, $urandom}, {$urandom, $urandom}, sew_e'(s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
