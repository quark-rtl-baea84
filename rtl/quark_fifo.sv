// quark_fifo -- synchronous first-in first-out queue with valid/ready ports.
//
// Used as the lane's operand queue (OQ), which decouples the vector
// register file reads from the VALU, and as the dispatcher's instruction
// queue.  A push happens when push_valid_i && push_ready_o, a pop when
// pop_valid_o && pop_ready_i; both may happen in the same cycle.  The head
// is presented combinationally from the storage array (no bypass: a word
// pushed in cycle t can be popped from cycle t+1).  count_o gives the fill
// level so that a producer with read latency can reserve room in advance.
// The paper names the operand queues; their depth and this handshake are
// this design's choices.
module quark_fifo #(
  parameter int unsigned Width = 8,
  parameter int unsigned Depth = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       push_valid_i,
  output logic                       push_ready_o,
  input  logic [Width-1:0]           push_data_i,
  output logic                       pop_valid_o,
  input  logic                       pop_ready_i,
  output logic [Width-1:0]           pop_data_o,
  output logic [$clog2(Depth+1)-1:0] count_o
);

  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  logic [Width-1:0] mem [Depth];
  logic [PtrW-1:0]  rd_ptr, wr_ptr;
  logic [$clog2(Depth+1)-1:0] count;

  logic push, pop;

  assign push_ready_o = (count != Depth[$clog2(Depth+1)-1:0]);
  assign pop_valid_o  = (count != '0);
  assign pop_data_o   = mem[rd_ptr];
  assign count_o      = count;
  assign push = push_valid_i && push_ready_o;
  assign pop  = pop_valid_o && pop_ready_i;

  function automatic logic [PtrW-1:0] next_ptr(input logic [PtrW-1:0] p);
    next_ptr = (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      unique case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem[wr_ptr] <= push_data_i;
  end

  // The fill level never passes the depth.
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    32'(count) <= Depth);

endmodule
