// quark_lane -- one Quark vector lane: VRF slice, operand queue and VALU.
//
// A lane owns every NrLanes-th 64-bit word of each vector register: global
// word g of a register group lives in lane g % NrLanes as local word
// g / NrLanes.  All supported operations, vbitpack included, are
// element-wise within a 64-bit word, so lanes never exchange data.
//
// Operation: the lane accepts one decoded instruction at a time
// (insn_valid_i && insn_ready_o).  From vl and SEW it derives how many of
// the instruction's words fall into this lane and which bytes of the last
// word are inside vl.  A read stage then reads vs1, vs2 and the old vd of
// one word per cycle from the VRF; one cycle later the operands enter the
// operand queue (OQ).  The VALU takes the OQ head, and the result is
// written back to the VRF in the same cycle.  Reads are issued only while
// the OQ has room for them, counting the read still in flight.  The write
// port is shared with the load/store unit, which has priority: while it
// writes, the VALU stalls, the OQ fills and the reads stop.  done_o pulses
// for one cycle after the last word has been written (also for an
// instruction with no word in this lane).
//
// Timing: a word read in cycle t is in the OQ at t+2 at the earliest and
// written at the end of that cycle, so an unstalled instruction of n words
// in this lane takes n + 3 cycles from acceptance to done_o (2 cycles
// when the lane has no word of it).
//
// The lane contents (VRF, OQ, VALU, no floating-point unit) follow the
// paper; the word-interleaved data layout, the single-instruction
// sequencing without chaining and the write priority are this design's.
module quark_lane
  import quark_pkg::*;
#(
  parameter int unsigned NrLanes = 4,
  parameter int unsigned VLEN    = 4096,
  parameter int unsigned LaneId  = 0,
  parameter int unsigned OQDepth = 4,
  localparam int unsigned WordsPerReg = VLEN / ELEN / NrLanes,
  localparam int unsigned AddrW       = $clog2(NrVRegs * WordsPerReg)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // Instruction from the sequencer
  input  logic             insn_valid_i,
  output logic             insn_ready_o,
  input  vinsn_t           insn_i,
  output logic             done_o,
  // Load/store unit side of the VRF
  input  logic             ls_wvalid_i,
  input  logic [AddrW-1:0] ls_waddr_i,
  input  logic [ELEN-1:0]  ls_wdata_i,
  input  logic [7:0]       ls_wbe_i,
  input  logic             ls_rvalid_i,
  input  logic [AddrW-1:0] ls_raddr_i,
  output logic [ELEN-1:0]  ls_rdata_o,
  output logic             ls_rdata_valid_o,
  // Status
  output logic             oq_stall_o   // a read was held back by a full OQ
);

  localparam int unsigned LaneShift = $clog2(NrLanes);
  localparam int unsigned CntW      = AddrW + 1;

  // Operand queue entry
  typedef struct packed {
    logic [ELEN-1:0] a;
    logic [ELEN-1:0] b;
    logic [ELEN-1:0] d;
    logic [7:0]      bv;
    logic [CntW-1:0] k;
  } oq_entry_t;

  // ------------------------------------------------------------------
  // Instruction register and word counts
  // ------------------------------------------------------------------
  logic            active;
  vinsn_t          insn_q;
  logic [CntW-1:0] nwords_q;   // words of this instruction in this lane
  logic [2:0]      last_rem_q; // valid bytes of the global last word, 0 = 8
  logic [CntW-1:0] last_k_q;   // local index of the global last word
  logic            owns_last_q;

  logic [19:0]     bytes_d, words_d;
  logic [CntW-1:0] nwords_d;

  always_comb begin
    bytes_d  = 20'(insn_i.vl) << insn_i.sew;
    words_d  = (bytes_d + 20'd7) >> 3;
    nwords_d = (words_d > 20'(LaneId))
             ? CntW'(((words_d - 20'(LaneId) - 20'd1) >> LaneShift) + 20'd1) : '0;
  end

  assign insn_ready_o = !active;

  logic [CntW-1:0] rd_k, wr_k;
  logic            rd_pending;
  logic [CntW-1:0] rd_pending_k;

  // ------------------------------------------------------------------
  // VRF
  // ------------------------------------------------------------------
  logic [2:0][AddrW-1:0] op_addr;
  logic [2:0][ELEN-1:0]  op_data;
  logic                  rd_issue;
  logic                  we;
  logic [AddrW-1:0]      waddr;
  logic [ELEN-1:0]       wdata;
  logic [7:0]            wbe;

  function automatic logic [AddrW-1:0] word_addr(input logic [4:0] vreg,
                                                 input logic [CntW-1:0] k);
    word_addr = AddrW'(vreg) * AddrW'(WordsPerReg) + AddrW'(k);
  endfunction

  assign op_addr[0] = word_addr(insn_q.vs1, rd_k);
  assign op_addr[1] = word_addr(insn_q.vs2, rd_k);
  assign op_addr[2] = word_addr(insn_q.vd,  rd_k);

  quark_vrf #(
    .NrLanes (NrLanes),
    .VLEN    (VLEN)
  ) u_vrf (
    .clk_i     (clk_i),
    .op_addr_i (op_addr),
    .op_req_i  (rd_issue),
    .op_data_o (op_data),
    .ls_req_i  (ls_rvalid_i),
    .ls_addr_i (ls_raddr_i),
    .ls_data_o (ls_rdata_o),
    .we_i      (we),
    .waddr_i   (waddr),
    .wdata_i   (wdata),
    .wbe_i     (wbe)
  );

  // ------------------------------------------------------------------
  // Operand queue
  // ------------------------------------------------------------------
  oq_entry_t                    oq_in, oq_out;
  logic                         oq_pop_valid, oq_pop_ready, oq_push_ready;
  logic [$clog2(OQDepth+1)-1:0] oq_count;

  always_comb begin
    oq_in.a  = insn_q.use_scalar ? splat(insn_q.scalar, insn_q.sew) : op_data[0];
    oq_in.b  = op_data[1];
    oq_in.d  = op_data[2];
    oq_in.k  = rd_pending_k;
    oq_in.bv = (owns_last_q && rd_pending_k == last_k_q && last_rem_q != 3'd0)
             ? (8'hFF >> (4'd8 - {1'b0, last_rem_q})) : 8'hFF;
  end

  quark_fifo #(
    .Width ($bits(oq_entry_t)),
    .Depth (OQDepth)
  ) u_oq (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .push_valid_i (rd_pending),
    .push_ready_o (oq_push_ready),
    .push_data_i  (oq_in),
    .pop_valid_o  (oq_pop_valid),
    .pop_ready_i  (oq_pop_ready),
    .pop_data_o   (oq_out),
    .count_o      (oq_count)
  );

  // Room for one more read: queued entries plus the read in flight.
  logic oq_room;
  assign oq_room  = (32'(oq_count) + 32'(rd_pending)) < OQDepth;
  assign rd_issue = active && (rd_k < nwords_q) && oq_room;
  assign oq_stall_o = active && (rd_k < nwords_q) && !oq_room;

  // ------------------------------------------------------------------
  // VALU and write-back
  // ------------------------------------------------------------------
  logic [ELEN-1:0] valu_res;
  logic [7:0]      valu_be;

  quark_valu u_valu (
    .op_i         (insn_q.op),
    .sew_i        (insn_q.sew),
    .a_i          (oq_out.a),
    .b_i          (oq_out.b),
    .d_i          (oq_out.d),
    .byte_valid_i (oq_out.bv),
    .res_o        (valu_res),
    .be_o         (valu_be)
  );

  // The load/store unit owns the write port whenever it writes.
  assign oq_pop_ready = !ls_wvalid_i;

  always_comb begin
    if (ls_wvalid_i) begin
      we    = 1'b1;
      waddr = ls_waddr_i;
      wdata = ls_wdata_i;
      wbe   = ls_wbe_i;
    end else begin
      we    = oq_pop_valid;
      waddr = word_addr(insn_q.vd, oq_out.k);
      wdata = valu_res;
      wbe   = valu_be;
    end
  end

  // ------------------------------------------------------------------
  // Sequencing
  // ------------------------------------------------------------------
  logic wr_fire;
  assign wr_fire = oq_pop_valid && oq_pop_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active           <= 1'b0;
      insn_q           <= '0;
      nwords_q         <= '0;
      last_rem_q       <= '0;
      last_k_q         <= '0;
      owns_last_q      <= 1'b0;
      rd_k             <= '0;
      wr_k             <= '0;
      rd_pending       <= 1'b0;
      rd_pending_k     <= '0;
      done_o           <= 1'b0;
      ls_rdata_valid_o <= 1'b0;
    end else begin
      done_o           <= 1'b0;
      ls_rdata_valid_o <= ls_rvalid_i;
      rd_pending       <= rd_issue;
      if (rd_issue) begin
        rd_pending_k <= rd_k;
        rd_k         <= rd_k + 1'b1;
      end
      if (wr_fire) wr_k <= wr_k + 1'b1;

      if (!active && insn_valid_i) begin
        active      <= 1'b1;
        insn_q      <= insn_i;
        nwords_q    <= nwords_d;
        last_rem_q  <= bytes_d[2:0];
        last_k_q    <= CntW'((words_d - 20'd1) >> LaneShift);
        owns_last_q <= (words_d != 20'd0)
                    && (((words_d - 20'd1) & 20'(NrLanes - 1)) == 20'(LaneId));
        rd_k        <= '0;
        wr_k        <= '0;
      end else if (active && (wr_k + CntW'(wr_fire)) == nwords_q
                   && !(rd_k < nwords_q) && !rd_pending) begin
        active <= 1'b0;
        done_o <= 1'b1;
      end
    end
  end

  // A read is only issued when its operands will find room in the OQ.
  a_oq_room: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rd_pending |-> oq_push_ready);

  // The write-back never runs ahead of the reads.
  a_wr_after_rd: assert property (@(posedge clk_i) disable iff (!rst_ni)
    wr_k <= rd_k);

endmodule
