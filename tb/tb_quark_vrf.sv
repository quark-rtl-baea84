// tb_quark_vrf -- self-checking test of a lane's register-file slice.
// Fills every word through the write port, then does random byte-masked
// writes and random reads on all four read ports against a model array.
// Checks the one-cycle read latency and old-data-on-collision behaviour.
module tb_quark_vrf;
  import quark_pkg::*;
  localparam int NL = 4, VL = 4096;
  localparam int Depth = NrVRegs * VL / 64 / NL;
  localparam int AW = $clog2(Depth);

  logic clk = 0;
  logic [2:0][AW-1:0] op_addr;
  logic op_req, ls_req, we;
  logic [2:0][63:0] op_data;
  logic [AW-1:0] ls_addr, waddr;
  logic [63:0] ls_data, wdata;
  logic [7:0] wbe;
  logic [63:0] model [Depth];
  int checks = 0, failures = 0;

  quark_vrf #(.NrLanes(NL), .VLEN(VL)) dut (
    .clk_i(clk), .op_addr_i(op_addr), .op_req_i(op_req), .op_data_o(op_data),
    .ls_req_i(ls_req), .ls_addr_i(ls_addr), .ls_data_o(ls_data),
    .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .wbe_i(wbe));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp [4];
    op_req = 0; ls_req = 0; we = 0; op_addr = '0; ls_addr = '0; waddr = '0; wdata = '0; wbe = '0;
    for (int i = 0; i < Depth; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom}; wbe = 8'hFF;
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      op_req = 1; ls_req = 1;
      for (int p = 0; p < 3; p++) op_addr[p] = AW'($urandom % Depth);
      ls_addr = AW'($urandom % Depth);
      we = ($urandom % 2) == 1;
      waddr = (c % 7 == 0) ? op_addr[1] : AW'($urandom % Depth);
      wdata = {$urandom, $urandom};
      wbe = 8'($urandom);
      for (int p = 0; p < 3; p++) exp[p] = model[op_addr[p]];
      exp[3] = model[ls_addr];
      @(posedge clk);
      if (we)
        for (int b = 0; b < 8; b++)
          if (wbe[b]) model[waddr][8*b +: 8] = wdata[8*b +: 8];
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (op_data[p] !== exp[p]) begin
          failures++;
          $display("FAIL port %0d addr %0d got %h exp %h", p, op_addr[p], op_data[p], exp[p]);
        end
      end
      checks++;
      if (ls_data !== exp[3]) begin
        failures++;
        $display("FAIL ls port got %h exp %h", ls_data, exp[3]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
