// quark -- integer RISC-V vector engine for sub-byte quantized DNN inference.
//
// The engine sits next to an RV64 scalar core, which fetches every
// instruction, executes the scalar ones (including the floating-point
// re-scaling of quantized layers) and forwards vector instructions here.
// Inside, a dispatcher decodes and acknowledges them, and NrLanes identical
// integer lanes execute them, each on its own slice of the vector register
// file.  There is no vector floating-point unit.  Bit-serial sub-byte
// arithmetic is supported by three instructions beyond RVV: vpopcnt,
// vshacc and vbitpack (see quark_valu).
//
// Sequencing: an instruction leaves the dispatcher's queue when all lanes
// are idle; it is then broadcast to every lane in the same cycle, and the
// lanes work on their words independently.  busy_o is high while any lane
// works or an instruction waits in the queue; the scalar core uses it to
// order vector work against its own memory accesses.
//
// The vector load/store unit, slide unit and mask unit of the original
// engine, and the scalar core itself, are outside this module: the
// load/store unit's access to each lane's register-file slice is brought
// out as the ls_* port arrays (index = lane), and the scalar core's
// interface as req/resp.
//
// The lane count and vector length follow the main configuration of the
// paper (4 lanes, 4096-bit registers, 16 KiB of register file); the
// broadcast-when-idle sequencing is this design's simplification.
module quark
  import quark_pkg::*;
#(
  parameter int unsigned NrLanes = 4,
  parameter int unsigned VLEN    = 4096,
  localparam int unsigned WordsPerReg = VLEN / ELEN / NrLanes,
  localparam int unsigned AddrW       = $clog2(NrVRegs * WordsPerReg)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // Scalar core
  input  logic                          req_valid_i,
  output logic                          req_ready_o,
  input  acc_req_t                      req_i,
  output logic                          resp_valid_o,
  output acc_resp_t                     resp_o,
  output logic                          busy_o,
  // Load/store unit access to the lanes' register-file slices
  input  logic [NrLanes-1:0]            ls_wvalid_i,
  input  logic [NrLanes-1:0][AddrW-1:0] ls_waddr_i,
  input  logic [NrLanes-1:0][ELEN-1:0]  ls_wdata_i,
  input  logic [NrLanes-1:0][7:0]       ls_wbe_i,
  input  logic [NrLanes-1:0]            ls_rvalid_i,
  input  logic [NrLanes-1:0][AddrW-1:0] ls_raddr_i,
  output logic [NrLanes-1:0][ELEN-1:0]  ls_rdata_o,
  output logic [NrLanes-1:0]            ls_rdata_valid_o,
  // Status
  output logic [NrLanes-1:0]            oq_stall_o,
  output logic [NrLanes-1:0]            lane_done_o  // lane finished an instruction
);

  logic              insn_valid, insn_ready;
  vinsn_t            insn;
  logic [NrLanes-1:0] lane_ready;

  quark_dispatcher #(
    .VLEN (VLEN)
  ) u_dispatcher (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .req_valid_i  (req_valid_i),
    .req_ready_o  (req_ready_o),
    .req_i        (req_i),
    .resp_valid_o (resp_valid_o),
    .resp_o       (resp_o),
    .insn_valid_o (insn_valid),
    .insn_ready_i (insn_ready),
    .insn_o       (insn),
    .vl_o         (),
    .sew_o        (),
    .vill_o       ()
  );

  // Broadcast: every lane accepts in the same cycle.
  assign insn_ready = &lane_ready;

  for (genvar l = 0; l < NrLanes; l++) begin : gen_lane
    quark_lane #(
      .NrLanes (NrLanes),
      .VLEN    (VLEN),
      .LaneId  (l)
    ) u_lane (
      .clk_i            (clk_i),
      .rst_ni           (rst_ni),
      .insn_valid_i     (insn_valid && insn_ready),
      .insn_ready_o     (lane_ready[l]),
      .insn_i           (insn),
      .done_o           (lane_done_o[l]),
      .ls_wvalid_i      (ls_wvalid_i[l]),
      .ls_waddr_i       (ls_waddr_i[l]),
      .ls_wdata_i       (ls_wdata_i[l]),
      .ls_wbe_i         (ls_wbe_i[l]),
      .ls_rvalid_i      (ls_rvalid_i[l]),
      .ls_raddr_i       (ls_raddr_i[l]),
      .ls_rdata_o       (ls_rdata_o[l]),
      .ls_rdata_valid_o (ls_rdata_valid_o[l]),
      .oq_stall_o       (oq_stall_o[l])
    );
  end

  assign busy_o = insn_valid || !(&lane_ready);

  // Lanes start together and finish only what they started.
  a_lanes_in_step: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (insn_valid && insn_ready) |=> !(|lane_ready));

endmodule
