// tb_quark_fifo -- self-checking test of the operand/instruction queue.
// Random push and pop requests against a queue model in the testbench;
// checks the order of the data, the full/empty flags, the fill level and
// that a full queue refuses a push.
module tb_quark_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic push_v, push_r, pop_v, pop_r;
  logic [W-1:0] push_d, pop_d;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] model [$];

  quark_fifo #(.Width(W), .Depth(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .push_valid_i(push_v), .push_ready_o(push_r),
    .push_data_i(push_d), .pop_valid_o(pop_v), .pop_ready_i(pop_r),
    .pop_data_o(pop_d), .count_o(count));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_v = 0; pop_r = 0; push_d = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      push_v = ($urandom % 100) < (c < 1000 ? 70 : 30);
      pop_r  = ($urandom % 100) < (c < 1000 ? 30 : 70);
      push_d = W'($urandom);
      #1;
      checks++;
      if (count != model.size() || pop_v != (model.size() > 0) || push_r != (model.size() < D)) begin
        failures++;
        $display("FAIL flags count=%0d model=%0d", count, model.size());
      end
      if (pop_v) begin
        checks++;
        if (pop_d !== model[0]) begin
          failures++;
          $display("FAIL data got %h exp %h", pop_d, model[0]);
        end
      end
      if (!push_r) fulls++;
      @(posedge clk);
      if (pop_v && pop_r) void'(model.pop_front());
      if (push_v && push_r) model.push_back(push_d);
    end
    checks++;
    if (fulls == 0) begin
      failures++;
      $display("FAIL queue never became full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
