// tb_quark -- end-to-end test of the Quark vector engine at its default
// size (4 lanes, 4096-bit registers).
//
// The testbench plays the scalar core (sending encoded instructions and
// checking the answers) and the load/store unit (moving data in and out of
// the lanes' register-file slices).  It runs a 2-bit bit-serial dot-product
// kernel, the core of a sub-byte convolution: 64 output pixels, each the
// dot product of 32 unsigned 2-bit activations with 32 unsigned 2-bit
// weights.
//   1. Activations and weights are loaded as bytes (SEW = 8) into four
//      source registers each (8 channels per register per pixel word).
//   2. Four vbitpack (precision 2) calls per operand pack them into bit
//      planes: plane 0 in bits [31:0], plane 1 in bits [63:32].
//   3. Weight planes are swapped (vsll/vsrl by 32, vor) for the cross
//      terms; vand forms the plane products; vpopcnt counts them.
//   4. vshacc weights the counts by 2^(n+m) (vector shift amounts 0/2 for
//      the straight terms, immediate 1 for the cross terms) and accumulates.
//   5. vsrl/vand/vadd fold the two 32-bit partial sums of each pixel.
// The 64 results are read back and compared with the integer dot products
// computed directly in the testbench.  Besides, the test makes these
// mechanisms happen and counts them: vsetvl answers, illegal-instruction
// exceptions, a full instruction queue refusing a request, operand-queue
// stalls caused by load/store writes, and a tail (vl not a multiple of the
// word) that must leave the bytes past vl intact.  A mechanism that never
// happened counts as a failure.
module tb_quark;
  import quark_pkg::*;
  import quark_tb_pkg::*;
  localparam int NL = 4, VL = 4096;
  localparam int WPR = VL / 64 / NL;
  localparam int AW = $clog2(NrVRegs * WPR);
  localparam int NPIX = VL / 64;     // pixels = 64-bit words per register
  localparam int NCH  = 32;          // channels per dot product

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, busy;
  acc_req_t req;
  acc_resp_t resp;
  logic [NL-1:0] ls_wvalid, ls_rvalid, ls_rdv, oq_stall, lane_done;
  logic [NL-1:0][AW-1:0] ls_waddr, ls_raddr;
  logic [NL-1:0][63:0] ls_wdata, ls_rdata;
  logic [NL-1:0][7:0] ls_wbe;

  int checks = 0, failures = 0, cyc = 0;
  int n_vsetvl = 0, n_exc = 0, n_qfull = 0, n_stall = 0, n_tail = 0;

  quark dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_i(req), .resp_valid_o(resp_valid), .resp_o(resp), .busy_o(busy),
    .ls_wvalid_i(ls_wvalid), .ls_waddr_i(ls_waddr), .ls_wdata_i(ls_wdata), .ls_wbe_i(ls_wbe),
    .ls_rvalid_i(ls_rvalid), .ls_raddr_i(ls_raddr), .ls_rdata_o(ls_rdata),
    .ls_rdata_valid_o(ls_rdv), .oq_stall_o(oq_stall), .lane_done_o(lane_done));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (|oq_stall) n_stall++;
    if (req_valid && !req_ready) n_qfull++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scalar core side ----------------
  task automatic issue(logic [31:0] ins, logic [63:0] rs1 = 0, logic [63:0] rs2 = 0,
                       bit exp_exc = 0);
    @(negedge clk);
    req_valid = 1; req.insn = ins; req.rs1 = rs1; req.rs2 = rs2;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid || resp.exception !== exp_exc) begin
      failures++;
      $display("FAIL answer to %h: valid=%b exception=%b", ins, resp_valid, resp.exception);
    end
    if (resp.exception) n_exc++;
  endtask

  task automatic setvl(int avl, int sew, int lmul, int exp_vl);
    issue(enc_vsetvli(5, 6, sew, lmul), 64'(avl));
    n_vsetvl++;
    checks++;
    if (resp.result !== 64'(exp_vl)) begin
      failures++;
      $display("FAIL vsetvli avl=%0d got %0d exp %0d", avl, resp.result, exp_vl);
    end
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // ---------------- load/store unit side ----------------
  task automatic vrf_write(int vreg, int g, logic [63:0] data);
    int l = g % NL;
    @(negedge clk);
    ls_wvalid = '0; ls_wvalid[l] = 1'b1;
    ls_waddr[l] = AW'(vreg * WPR + g / NL); ls_wdata[l] = data; ls_wbe[l] = 8'hFF;
    @(negedge clk);
    ls_wvalid = '0;
  endtask

  task automatic vrf_read(int vreg, int g, output logic [63:0] data);
    int l = g % NL;
    @(negedge clk);
    ls_rvalid = '0; ls_rvalid[l] = 1'b1; ls_raddr[l] = AW'(vreg * WPR + g / NL);
    @(negedge clk);
    ls_rvalid = '0;
    data = ls_rdata[l];
  endtask

  // Register allocation
  localparam int VA0 = 1, VW0 = 5, VAP = 9, VWP = 10, VWS = 11, VT = 12, VT2 = 13;
  localparam int VSH = 14, VACC = 15, VP = 16, VMSK = 17, VRES = 18, VJUNK = 31;

  logic [1:0] act [NPIX][NCH];
  logic [1:0] wgt [NCH];

  initial begin
    logic [63:0] d;
    int t0, kernel_cycles;
    req_valid = 0; req = '0;
    ls_wvalid = '0; ls_rvalid = '0; ls_waddr = '0; ls_raddr = '0; ls_wdata = '0; ls_wbe = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Data: activations per pixel, one weight vector shared by all pixels.
    foreach (wgt[c]) wgt[c] = 2'($urandom);
    foreach (act[p, c]) act[p][c] = 2'($urandom);
    for (int j = 0; j < 4; j++)
      for (int g = 0; g < NPIX; g++) begin
        logic [63:0] aw, ww;
        aw = '0;
        ww = '0;
        for (int b = 0; b < 8; b++) begin
          aw[8*b +: 8] = 8'(act[g][8*j + b]);
          ww[8*b +: 8] = 8'(wgt[8*j + b]);
        end
        vrf_write(VA0 + j, g, aw);
        vrf_write(VW0 + j, g, ww);
      end

    // An instruction before any vsetvl is illegal (vill after reset).
    issue(enc_v(OpcodeOpV, F6And, F3IVV, VT, VAP, VWP), 0, 0, 1);

    t0 = cyc;
    // ---- step 2: bit packing, SEW = 8, vl = 512 bytes ----
    setvl(NPIX * 8, 0, 0, NPIX * 8);
    issue(enc_v(OpcodeOpV, F6Mv, F3IVI, VAP, 0, 0));      // clear destinations
    issue(enc_v(OpcodeOpV, F6Mv, F3IVI, VWP, 0, 0));
    for (int j = 0; j < 4; j++) begin
      issue(enc_vbitpack(VAP, VA0 + j, 2));
      issue(enc_vbitpack(VWP, VW0 + j, 2));
    end
    // ---- step 3: plane products, SEW = 64 then 32 ----
    setvl(NPIX, 3, 0, NPIX);
    issue(enc_v(OpcodeOpV, F6Sll, F3IVX, VT, VWP, 7), 64'd32);
    issue(enc_v(OpcodeOpV, F6Srl, F3IVX, VT2, VWP, 7), 64'd32);
    issue(enc_v(OpcodeOpV, F6Or,  F3IVV, VWS, VT, VT2));
    issue(enc_v(OpcodeOpV, F6Mv,  F3IVX, VSH, 0, 7), 64'h0000_0002_0000_0000);
    issue(enc_v(OpcodeOpV, F6Mv,  F3IVI, VACC, 0, 0));
    setvl(2 * NPIX, 2, 0, 2 * NPIX);
    issue(enc_v(OpcodeOpV, F6And, F3IVV, VT, VAP, VWP));   // n = m
    issue(enc_vpopcnt(VP, VT));
    issue(enc_v(OpcodeCustom2, F6Shacc, F3IVV, VACC, VP, VSH)); // << 0 / << 2
    issue(enc_v(OpcodeOpV, F6And, F3IVV, VT, VAP, VWS));   // n != m
    issue(enc_vpopcnt(VP, VT));
    issue(enc_vshacc_vi(VACC, VP, 1));                     // << 1
    // ---- step 5: fold the two halves, SEW = 64 ----
    setvl(NPIX, 3, 0, NPIX);
    issue(enc_v(OpcodeOpV, F6Srl, F3IVX, VT, VACC, 7), 64'd32);
    issue(enc_v(OpcodeOpV, F6And, F3IVX, VT2, VACC, 7), 64'h0000_0000_FFFF_FFFF);
    issue(enc_v(OpcodeOpV, F6Add, F3IVV, VRES, VT, VT2));
    wait_idle();
    kernel_cycles = cyc - t0;
    $display("kernel: %0d pixels x %0d channels, 2-bit, %0d cycles", NPIX, NCH, kernel_cycles);

    for (int g = 0; g < NPIX; g++) begin
      int exp;
      exp = 0;
      for (int c = 0; c < NCH; c++) exp += int'(act[g][c]) * int'(wgt[c]);
      vrf_read(VRES, g, d);
      checks++;
      if (d !== 64'(exp)) begin
        failures++;
        $display("FAIL pixel %0d got %0d exp %0d", g, d, exp);
      end
    end

    // ---- operand-queue stalls: load/store writes during a long instruction ----
    setvl(NPIX * 8 * 8, 0, 3, NPIX * 8 * 8);   // LMUL = 8, 4096 bytes
    issue(enc_v(OpcodeOpV, F6Mv, F3IVI, 24, 0, 5));
    fork
      begin
        for (int i = 0; i < 40; i++) begin
          @(negedge clk);
          ls_wvalid = '1;
          for (int l = 0; l < NL; l++) begin
            ls_waddr[l] = AW'(VJUNK * WPR); ls_wdata[l] = 64'(i); ls_wbe[l] = 8'hFF;
          end
        end
        @(negedge clk);
        ls_wvalid = '0;
      end
    join
    wait_idle();
    for (int g = 0; g < NPIX * 8; g += 37) begin
      vrf_read(24, g, d);
      checks++;
      if (d !== {8{8'd5}}) begin
        failures++;
        $display("FAIL vmv under stalls word %0d got %h", g, d);
      end
    end

    // ---- tail: vl = 13 bytes, bytes 13.. of VRES keep their value ----
    // Only lanes 0 and 1 hold words of this vl: lanes 2 and 3 finish
    // first, and the second instruction must still reach every lane.
    setvl(13, 0, 0, 13);
    issue(enc_v(OpcodeOpV, F6Mv, F3IVX, VRES, 0, 7), 64'hAB);
    issue(enc_v(OpcodeOpV, F6Add, F3IVI, VRES, VRES, 1));
    wait_idle();
    vrf_read(VRES, 0, d);
    checks++;
    if (d !== {8{8'hAC}}) begin
      failures++;
      $display("FAIL back-to-back word 0 got %h", d);
    end
    vrf_read(VRES, 1, d);
    checks++;
    n_tail++;
    if (d[39:0] !== {5{8'hAC}} || d[63:40] !== 24'(0)) begin
      // pixel 1's dot product is below 2^40, so its upper bytes are zero
      failures++;
      $display("FAIL tail word got %h", d);
    end

    // ---- queue full: a burst of instructions while the lanes are busy ----
    setvl(NPIX * 8 * 8, 0, 3, NPIX * 8 * 8);
    for (int i = 0; i < 8; i++) issue(enc_v(OpcodeOpV, F6Add, F3IVI, 24, 24, 1));
    wait_idle();
    vrf_read(24, 100, d);
    checks++;
    if (d !== {8{8'd13}}) begin
      failures++;
      $display("FAIL burst result %h", d);
    end

    $display("mechanisms: vsetvl=%0d exceptions=%0d queue_full=%0d oq_stalls=%0d tails=%0d",
             n_vsetvl, n_exc, n_qfull, n_stall, n_tail);
    checks++;
    if (n_vsetvl == 0 || n_exc == 0 || n_qfull == 0 || n_stall == 0 || n_tail == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
