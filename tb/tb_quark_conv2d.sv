// tb_quark_conv2d -- 3x3 bit-serial convolution of 1x128x8x8 and
// 1x128x16x16 inputs, 1-bit and 2-bit, on the engine with its default
// parameters: 4 lanes, 4096-bit vector registers.  The checking is done in
// quark_conv2d_bench; this module ends the run when both benches are done.
module tb_quark_conv2d;
  logic [1:0] done;
  int         checks [2], failures [2];

  // 8 x 8 and 16 x 16 inputs, each on its own engine, run side by side.
  quark_conv2d_bench #(.NL(4), .VL(4096), .H(8), .WD(8)) bench8 (
    .done_o(done[0]), .checks_o(checks[0]), .failures_o(failures[0]));
  quark_conv2d_bench #(.NL(4), .VL(4096), .H(16), .WD(16)) bench16 (
    .done_o(done[1]), .checks_o(checks[1]), .failures_o(failures[1]));

  // Watchdog: 2,000,000 cycles of the benches' 10-time-unit clock.
  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1],
             failures[0] + failures[1] + 1);
    $finish;
  end

  initial begin
    wait (done === 2'b11);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1],
             failures[0] + failures[1]);
    $finish;
  end
endmodule
