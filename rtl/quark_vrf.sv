// quark_vrf -- one lane's slice of the vector register file.
//
// With VLEN-bit vector registers and NrLanes lanes, every lane holds
// VLEN/NrLanes bits of each of the 32 registers, stored as 64-bit words:
// register r occupies words [r*WordsPerReg, (r+1)*WordsPerReg).  Register
// groups (LMUL > 1) are therefore contiguous.  With the default 4096-bit
// registers and four lanes a lane holds 32 x 16 words = 4 KiB, and the four
// lanes together the 16 KiB register file of the main configuration.
//
// Ports: three synchronous read ports for the VALU operands (vs1, vs2 and
// the old vd), one for the load/store unit, each returning data the cycle
// after the address; one write port with byte enables.  A read and a write
// of the same word in the same cycle return the old data.  The paper gives
// only the size; the port count, the word organisation and the use of a
// plain array (no banking) are this design's choices.
module quark_vrf
  import quark_pkg::*;
#(
  parameter int unsigned NrLanes = 4,
  parameter int unsigned VLEN    = 4096,
  localparam int unsigned WordsPerReg = VLEN / ELEN / NrLanes,
  localparam int unsigned Depth       = NrVRegs * WordsPerReg,
  localparam int unsigned AddrW       = $clog2(Depth)
) (
  input  logic                   clk_i,
  input  logic [2:0][AddrW-1:0]  op_addr_i,   // operand read addresses
  input  logic                   op_req_i,    // read the three operands
  output logic [2:0][ELEN-1:0]   op_data_o,
  input  logic                   ls_req_i,    // load/store unit read
  input  logic [AddrW-1:0]       ls_addr_i,
  output logic [ELEN-1:0]        ls_data_o,
  input  logic                   we_i,
  input  logic [AddrW-1:0]       waddr_i,
  input  logic [ELEN-1:0]        wdata_i,
  input  logic [7:0]             wbe_i
);

  logic [ELEN-1:0] mem [Depth];

  always_ff @(posedge clk_i) begin
    if (we_i)
      for (int b = 0; b < 8; b++)
        if (wbe_i[b]) mem[waddr_i][8*b +: 8] <= wdata_i[8*b +: 8];
  end

  always_ff @(posedge clk_i) begin
    if (op_req_i)
      for (int p = 0; p < 3; p++) op_data_o[p] <= mem[op_addr_i[p]];
    if (ls_req_i) ls_data_o <= mem[ls_addr_i];
  end

endmodule
