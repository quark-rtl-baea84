// tb_quark_lane -- self-checking test of one lane (lane 1 of 4, 4096-bit
// registers).  The testbench plays the load/store unit: it fills the
// lane's register-file slice through the ls write port, issues random
// instructions (all operations, SEW, LMUL-sized vl, scalar forms), waits
// for done_o, and reads the destination back through the ls read port.
// Expected contents come from a model of the slice: the lane owns global
// words g = 4k+1, bytes past vl keep their value.  Checks the latency of
// an unstalled instruction (n words -> n + 3 cycles, 2 if n = 0) and, with load/store
// writes injected during execution, that the OQ back-pressure happens and
// leaves the results intact.
module tb_quark_lane;
  import quark_pkg::*;
  localparam int NL = 4, VL = 4096, LID = 1;
  localparam int WPR = VL / 64 / NL;
  localparam int Depth = NrVRegs * WPR;
  localparam int AW = $clog2(Depth);

  logic clk = 0, rst_n = 0;
  logic insn_valid, insn_ready, done, stall;
  vinsn_t insn;
  logic ls_wvalid, ls_rvalid, ls_rdv;
  logic [AW-1:0] ls_waddr, ls_raddr;
  logic [63:0] ls_wdata, ls_rdata;
  logic [7:0] ls_wbe;
  logic [63:0] model [Depth];
  int checks = 0, failures = 0, stalls = 0, cyc = 0;
  bit inject = 0;

  quark_lane #(.NrLanes(NL), .VLEN(VL), .LaneId(LID)) dut (
    .clk_i(clk), .rst_ni(rst_n), .insn_valid_i(insn_valid), .insn_ready_o(insn_ready),
    .insn_i(insn), .done_o(done), .ls_wvalid_i(ls_wvalid), .ls_waddr_i(ls_waddr),
    .ls_wdata_i(ls_wdata), .ls_wbe_i(ls_wbe), .ls_rvalid_i(ls_rvalid), .ls_raddr_i(ls_raddr),
    .ls_rdata_o(ls_rdata), .ls_rdata_valid_o(ls_rdv), .oq_stall_o(stall));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (stall) stalls++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ref_word(vop_e o, int ew, logic [63:0] x, logic [63:0] y,
                                           logic [63:0] z, logic [7:0] bv, int prec);
    logic [63:0] r = '0, m = (ew == 64) ? '1 : ((64'd1 << ew) - 1);
    if (o == VBITPACK) begin
      int pw = 64 / prec;
      r = z;
      for (int pl = 0; pl < prec; pl++)
        for (int i = pw - 1; i >= 0; i--)
          r[pl*pw + i] = (i >= 8) ? z[pl*pw + i - 8] : (y[8*i + pl] & bv[i]);
      return r;
    end
    for (int e = 0; e < 64 / ew; e++) begin
      logic [63:0] xa = (x >> (e*ew)) & m, yb = (y >> (e*ew)) & m, zd = (z >> (e*ew)) & m, t;
      int sh = int'(xa % ew);
      case (o)
        VADD: t = yb + xa;   VSUB: t = yb - xa;   VAND: t = yb & xa;
        VOR:  t = yb | xa;   VXOR: t = yb ^ xa;   VSLL: t = yb << sh;
        VSRL: t = yb >> sh;  VMV:  t = xa;
        VPOPCNT: t = 64'($countones(yb));
        VSHACC:  t = zd + (yb << sh);
        default: t = '0;
      endcase
      r |= (t & m) << (e*ew);
    end
    // keep bytes past vl
    for (int b = 0; b < 8; b++) if (!bv[b]) r[8*b +: 8] = z[8*b +: 8];
    return r;
  endfunction

  task automatic ls_write(int addr, logic [63:0] data);
    @(negedge clk);
    ls_wvalid = 1; ls_waddr = AW'(addr); ls_wdata = data; ls_wbe = 8'hFF;
    model[addr] = data;
    @(negedge clk);
    ls_wvalid = 0;
  endtask

  task automatic run_insn(vinsn_t in, bit with_inject);
    int total_bytes = int'(in.vl) << in.sew;
    int W = (total_bytes + 7) / 8;
    int n = (W > LID) ? (W - LID - 1) / NL + 1 : 0;
    int start, lat;
    logic [63:0] newm [Depth];
    int junk = NrVRegs * WPR - 1;   // injected writes go to v31's last word
    newm = model;
    for (int k = 0; k < n; k++) begin
      int g = k * NL + LID;
      int valid = (g == W - 1 && total_bytes % 8 != 0) ? total_bytes % 8 : 8;
      logic [7:0] bv = 8'((9'h1 << valid) - 1);
      logic [63:0] x = in.use_scalar ? splat(in.scalar, in.sew) : model[in.vs1 * WPR + k];
      newm[in.vd * WPR + k] = ref_word(in.op, 8 << in.sew, x, model[in.vs2 * WPR + k],
                                       model[in.vd * WPR + k], bv, int'(in.scalar[3:0]));
    end
    @(negedge clk);
    insn_valid = 1; insn = in;
    @(posedge clk);
    start = cyc;
    @(negedge clk);
    insn_valid = 0;
    while (!done) begin
      if (with_inject && ($urandom % 3 == 0)) begin
        ls_wvalid = 1; ls_waddr = AW'(junk); ls_wdata = 64'hDEAD; ls_wbe = 8'hFF;
        newm[junk] = 64'hDEAD;
      end else ls_wvalid = 0;
      @(negedge clk);
    end
    ls_wvalid = 0;
    lat = cyc - start;
    if (!with_inject) begin
      checks++;
      if (lat != ((n == 0) ? 2 : n + 3)) begin
        failures++;
        $display("FAIL latency n=%0d got %0d exp %0d", n, lat, n + 3);
      end
    end
    model = newm;
    // read back the destination group and the junk word
    for (int k = 0; k < 8 * WPR; k++) begin
      int addr = in.vd * WPR + k;
      if (addr >= Depth) break;
      @(negedge clk);
      ls_rvalid = 1; ls_raddr = AW'(addr);
      @(negedge clk);
      ls_rvalid = 0;
      checks++;
      if (ls_rdata !== model[addr]) begin
        failures++;
        $display("FAIL %s sew=%0d vl=%0d word %0d got %h exp %h", in.op.name(), 8 << in.sew,
                 in.vl, addr, ls_rdata, model[addr]);
      end
    end
  endtask

  initial begin
    vinsn_t in;
    insn_valid = 0; insn = '0; ls_wvalid = 0; ls_rvalid = 0; ls_waddr = '0; ls_raddr = '0;
    ls_wdata = '0; ls_wbe = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < Depth; i++) ls_write(i, {$urandom, $urandom});
    for (int t = 0; t < 60; t++) begin
      int lmul;
      lmul = $urandom % 4;
      in = '0;
      in.op  = vop_e'($urandom % 11);
      in.sew = (in.op == VBITPACK) ? SEW8 : sew_e'($urandom % 4);
      in.vd  = 5'(((($urandom % 24) >> lmul) << lmul));
      in.vs1 = 5'(((($urandom % 24) >> lmul) << lmul));
      in.vs2 = 5'(((($urandom % 24) >> lmul) << lmul));
      in.use_scalar = $urandom % 2;
      in.scalar = {$urandom, $urandom};
      if (in.op == VBITPACK) begin
        int ps [4] = '{1, 2, 4, 8};
        in.use_scalar = 1;
        in.scalar = 64'(ps[$urandom % 4]);
      end
      in.vl = 17'($urandom % (((VL / 8) >> in.sew) * (1 << lmul) + 1));
      run_insn(in, t % 3 == 2);
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL no operand-queue stall seen");
    end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
