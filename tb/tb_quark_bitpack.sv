// tb_quark_bitpack -- self-checking test of the bit-plane packing unit.
// First the worked example with 2-bit precision: element j of a source
// word carries values whose bit 0 and bit 1 must land at bit j of plane 0
// (bits 0..7) and plane 1 (bits 32..39); a second call moves them up by 8
// and inserts the new slices at bits 0..7 and 32..39.  Then random words,
// precisions and validity masks against a bit-level model.
module tb_quark_bitpack;
  import quark_pkg::*;

  logic [63:0] dst, src, res;
  logic [7:0]  bv;
  logic [3:0]  prec;
  int checks = 0, failures = 0;

  quark_bitpack dut (.dst_i(dst), .src_i(src), .byte_valid_i(bv), .prec_i(prec), .dst_o(res));

  function automatic logic [63:0] ref_pack(logic [63:0] d, logic [63:0] s, logic [7:0] v, int p);
    int pw = 64 / p;
    logic [63:0] r = d;
    for (int pl = 0; pl < p; pl++) begin
      // shift plane left by 8
      for (int i = pw - 1; i >= 0; i--)
        r[pl*pw + i] = (i >= 8) ? d[pl*pw + i - 8] : (s[8*i + pl] & v[i]);
    end
    return r;
  endfunction

  task automatic check(logic [63:0] d, logic [63:0] s, logic [7:0] v, int p, logic [63:0] exp);
    dst = d; src = s; bv = v; prec = 4'(p);
    #1;
    checks++;
    if (res !== exp) begin
      failures++;
      $display("FAIL bitpack p=%0d d=%h s=%h v=%h got %h exp %h", p, d, s, v, res, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w1, w2, r1;
    int ps [4] = '{1, 2, 4, 8};
    // Worked example, 2-bit precision, all elements = 3 (both bits set)
    w1 = {8{8'h03}};
    check(64'h0, w1, 8'hFF, 2, 64'h0000_00FF_0000_00FF);
    // Second call: elements = 1 (only bit 0): plane 0 gets FF, plane 1 gets 00
    r1 = 64'h0000_00FF_0000_00FF;
    w2 = {8{8'h01}};
    check(r1, w2, 8'hFF, 2, 64'h0000_FF00_0000_FFFF);
    // Element j goes to bit j of the slice
    check(64'h0, 64'h0000_0000_0000_0100, 8'hFF, 1, 64'h2);
    // Invalid elements read as zero
    check(64'h0, {8{8'h01}}, 8'h0F, 1, 64'h0F);
    // Precision 8 replaces the word by the transposed byte matrix
    check('1, 64'h0000_0000_0000_0080, 8'hFF, 8, 64'h0100_0000_0000_0000);
    for (int i = 0; i < 400; i++) begin
      logic [63:0] d, s;
      logic [7:0]  v;
      int          p;
      d = {$urandom, $urandom};
      s = {$urandom, $urandom};
      v = 8'($urandom);
      p = ps[$urandom % 4];
      check(d, s, v, p, ref_pack(d, s, v, p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
