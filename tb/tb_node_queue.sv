// tb_node_queue: random push/pop traffic against a queue model; checks
// order, data, full/empty/count and that a full queue ignores nothing it
// was not offered (the driver never pushes when full).
`timescale 1ns/1ps
module tb_node_queue;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [7:0] wr_data = 0, rd_data;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [7:0] model [$];

  node_queue #(.T(logic [7:0]), .DEPTH(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nfull = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == 4) || int'(count) != model.size()) begin
        failures++; $display("flags wrong at %0d: size %0d empty %0d full %0d", i, model.size(), empty, full);
      end
      if (full) nfull++;
      push = !full && ($urandom % 3 != 0);
      pop  = !empty && ($urandom % 2 == 0);
      wr_data = 8'($urandom);
      if (pop) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("data %0h expected %0h", rd_data, model[0]); end
      end
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wr_data);
      push = 0; pop = 0;
    end
    checks++;
    if (nfull == 0) begin failures++; $display("queue never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
