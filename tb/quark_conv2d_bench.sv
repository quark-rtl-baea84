// quark_conv2d_bench -- bit-serial 3x3 convolution through the whole
// engine, for a given lane count and vector length.  Instantiated by
// tb_quark_conv2d (default engine: 4 lanes, 4096-bit registers) and by
// tb_quark_conv2d_8lane (8 lanes, 8192-bit registers, 32 KiB VRF: the
// larger configuration, used for the published roofline measurements).
//
// Workload: input tensor 1 x 128 x H x W (channels x height x width), one
// 3x3 filter, stride 1, zero padding 1, so H x W output pixels.  They are
// computed in tiles of 64 pixels, one 64-bit word per pixel (a whole
// vector register at 4 lanes / 4096 bits, half of one at 8 lanes / 8192
// bits); H x W must be a multiple of 64.  It is run once with
// 1-bit and once with 2-bit unsigned weights and activations.
//
// The testbench acts as the load/store unit and lays the data out as an
// im2col gather would: for tap row ky, tap column kx and channel group cg,
// word g (pixel g) holds the 8 activations in[8cg..8cg+7][y+ky-1][x+kx-1].
// Weights are repeated in every word.  Per (cg, ky) chunk, three vbitpack
// calls (one per kx) build 24-bit slices per plane, then
//   1-bit: vand, vpopcnt, vadd into the 64-bit accumulator (SEW = 64);
//   2-bit: vand with straight and plane-swapped weights, vpopcnt and vshacc
//          with shifts 0/2 and 1 into 32-bit partial sums (SEW = 32), which
//          are folded into 64-bit results at the end.
// All H x W results are compared with a direct convolution computed in the
// testbench, and the engine's cycle count is reported.  The wrapping
// testbench prints the result line and ends the simulation.
module quark_conv2d_bench
  import quark_pkg::*;
  import quark_tb_pkg::*;
#(
  parameter int NL = 4,
  parameter int VL = 4096,
  parameter int H  = 8,     // input height = output height
  parameter int WD = 8      // input width = output width
) (
  output logic done_o,      // both precisions have been run and checked
  output int   checks_o,
  output int   failures_o
);
  localparam int WPR = VL / 64 / NL;
  localparam int AW = $clog2(NrVRegs * WPR);
  localparam int C = 128, NPIX = 64, NTILE = H * WD / NPIX;  // pixels per tile

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, busy;
  acc_req_t req;
  acc_resp_t resp;
  logic [NL-1:0] ls_wvalid, ls_rvalid, ls_rdv, oq_stall, lane_done;
  logic [NL-1:0][AW-1:0] ls_waddr, ls_raddr;
  logic [NL-1:0][63:0] ls_wdata, ls_rdata;
  logic [NL-1:0][7:0] ls_wbe;
  int checks = 0, failures = 0, cyc = 0, busy_cycles = 0;

  quark #(.NrLanes(NL), .VLEN(VL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_i(req), .resp_valid_o(resp_valid), .resp_o(resp), .busy_o(busy),
    .ls_wvalid_i(ls_wvalid), .ls_waddr_i(ls_waddr), .ls_wdata_i(ls_wdata), .ls_wbe_i(ls_wbe),
    .ls_rvalid_i(ls_rvalid), .ls_raddr_i(ls_raddr), .ls_rdata_o(ls_rdata),
    .ls_rdata_valid_o(ls_rdv), .oq_stall_o(oq_stall), .lane_done_o(lane_done));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (busy) busy_cycles++;
  end

  assign checks_o   = checks;
  assign failures_o = failures;

  task automatic issue(logic [31:0] ins, logic [63:0] rs1 = 0);
    @(negedge clk);
    req_valid = 1; req.insn = ins; req.rs1 = rs1; req.rs2 = 0;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid || resp.exception) begin
      failures++;
      $display("FAIL instruction %h not accepted", ins);
    end
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // Write one whole register: all lanes in parallel, one word each per cycle.
  task automatic vrf_fill(int vreg, logic [63:0] data [NPIX]);
    for (int k = 0; k < NPIX / NL; k++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        ls_wvalid[l] = 1'b1;
        ls_waddr[l] = AW'(vreg * WPR + k);
        ls_wdata[l] = data[k * NL + l];
        ls_wbe[l] = 8'hFF;
      end
    end
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

  localparam int VA0 = 1, VW0 = 4, VAP = 8, VWP = 9, VWS = 10, VT = 11, VT2 = 12;
  localparam int VP = 13, VSH = 14, VACC = 15, VRES = 16;

  logic [7:0] act [C][H][WD];
  logic [7:0] wgt [C][3][3];

  task automatic run_conv(int prec);
    logic [63:0] buf_a [NPIX], buf_w [NPIX], res [H * WD];
    int t_busy0, mx, expv;
    mx = (1 << prec) - 1;
    foreach (act[c, y, x]) act[c][y][x] = 8'($urandom % (mx + 1));
    foreach (wgt[c, i, j]) wgt[c][i][j] = 8'($urandom % (mx + 1));
    t_busy0 = busy_cycles;

    for (int t = 0; t < NTILE; t++) begin
    issue(enc_vsetvli(5, 6, 3, 0), 64'(NPIX));               // SEW 64
    issue(enc_v(OpcodeOpV, F6Mv, F3IVI, VRES, 0, 0));
    issue(enc_v(OpcodeOpV, F6Mv, F3IVI, VACC, 0, 0));
    issue(enc_v(OpcodeOpV, F6Mv, F3IVX, VSH, 0, 7), 64'h0000_0002_0000_0000);
    for (int cg = 0; cg < C / 8; cg++)
      for (int ky = 0; ky < 3; ky++) begin
        wait_idle();   // source registers are reused: wait before reloading
        for (int kx = 0; kx < 3; kx++) begin
          for (int g = 0; g < NPIX; g++) begin
            int y, x;
            y = (t * NPIX + g) / WD + ky - 1;
            x = (t * NPIX + g) % WD + kx - 1;
            for (int b = 0; b < 8; b++) begin
              buf_a[g][8*b +: 8] = (y >= 0 && y < H && x >= 0 && x < WD)
                                 ? act[8*cg + b][y][x] : 8'd0;
              buf_w[g][8*b +: 8] = wgt[8*cg + b][ky][kx];
            end
          end
          vrf_fill(VA0 + kx, buf_a);
          vrf_fill(VW0 + kx, buf_w);
        end
        issue(enc_vsetvli(5, 6, 0, 0), 64'(NPIX * 8));      // SEW 8, pack
        issue(enc_v(OpcodeOpV, F6Mv, F3IVI, VAP, 0, 0));
        issue(enc_v(OpcodeOpV, F6Mv, F3IVI, VWP, 0, 0));
        for (int kx = 0; kx < 3; kx++) begin
          issue(enc_vbitpack(VAP, VA0 + kx, prec));
          issue(enc_vbitpack(VWP, VW0 + kx, prec));
        end
        if (prec == 1) begin
          issue(enc_vsetvli(5, 6, 3, 0), 64'(NPIX));        // SEW 64
          issue(enc_v(OpcodeOpV, F6And, F3IVV, VT, VAP, VWP));
          issue(enc_vpopcnt(VP, VT));
          issue(enc_v(OpcodeOpV, F6Add, F3IVV, VRES, VRES, VP));
        end else begin
          issue(enc_vsetvli(5, 6, 3, 0), 64'(NPIX));        // SEW 64: swap planes
          issue(enc_v(OpcodeOpV, F6Sll, F3IVX, VT, VWP, 7), 64'd32);
          issue(enc_v(OpcodeOpV, F6Srl, F3IVX, VT2, VWP, 7), 64'd32);
          issue(enc_v(OpcodeOpV, F6Or,  F3IVV, VWS, VT, VT2));
          issue(enc_vsetvli(5, 6, 2, 0), 64'(2 * NPIX));    // SEW 32
          issue(enc_v(OpcodeOpV, F6And, F3IVV, VT, VAP, VWP));
          issue(enc_vpopcnt(VP, VT));
          issue(enc_v(OpcodeCustom2, F6Shacc, F3IVV, VACC, VP, VSH));
          issue(enc_v(OpcodeOpV, F6And, F3IVV, VT, VAP, VWS));
          issue(enc_vpopcnt(VP, VT));
          issue(enc_vshacc_vi(VACC, VP, 1));
        end
      end
    if (prec == 2) begin
      issue(enc_vsetvli(5, 6, 3, 0), 64'(NPIX));
      issue(enc_v(OpcodeOpV, F6Srl, F3IVX, VT, VACC, 7), 64'd32);
      issue(enc_v(OpcodeOpV, F6And, F3IVX, VT2, VACC, 7), 64'h0000_0000_FFFF_FFFF);
      issue(enc_v(OpcodeOpV, F6Add, F3IVV, VRES, VT, VT2));
    end
    wait_idle();
    // results of this tile
    for (int g = 0; g < NPIX; g++) vrf_read(VRES, g, res[t * NPIX + g]);
    end
    $display("conv2d 3x3, 1x%0dx%0dx%0d, %0d-bit, %0d lanes: engine busy %0d cycles", C, H, WD, prec, NL,
             busy_cycles - t_busy0);

    for (int g = 0; g < H * WD; g++) begin
      expv = 0;
      for (int c = 0; c < C; c++)
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) begin
            int y, x;
            y = g / WD + ky - 1;
            x = g % WD + kx - 1;
            if (y >= 0 && y < H && x >= 0 && x < WD)
              expv += int'(act[c][y][x]) * int'(wgt[c][ky][kx]);
          end
      checks++;
      if (res[g] !== 64'(expv)) begin
        failures++;
        $display("FAIL %0d-bit pixel %0d got %0d exp %0d", prec, g, res[g], expv);
      end
    end
  endtask

  initial begin
    done_o = 1'b0;
    req_valid = 0; req = '0;
    ls_wvalid = '0; ls_rvalid = '0; ls_waddr = '0; ls_raddr = '0; ls_wdata = '0; ls_wbe = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_conv(1);
    run_conv(2);
    done_o = 1'b1;
  end
endmodule
