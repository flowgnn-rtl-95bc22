// tb_message_buffer: after the reset sweep, MP ports accumulate random
// messages into buffer 0 (several hits per word); the buffers are then
// swapped and the NT ports read every node back with read-and-clear, after
// which a second read must return zero. Checks the sweep length too.
`timescale 1ns/1ps
module tb_message_buffer;
  import flowgnn_pkg::*;
  localparam int P_NODE = 2, P_EDGE = 4, DIM = 4, P_APPLY = 1, P_SCATTER = 2;
  localparam int MAX_NODES = 16, NODE_W = 4, LNODE_W = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic clear_busy, wsel = 0;
  logic mp_en [P_EDGE];
  logic [LNODE_W-1:0] mp_lnode [P_EDGE];
  logic [15:0] mp_word [P_EDGE];
  msg_t mp_add [P_EDGE][P_SCATTER];
  logic rd_en [P_NODE], rd_clear [P_NODE];
  logic [NODE_W-1:0] rd_node [P_NODE];
  logic [15:0] rd_idx [P_NODE];
  msg_t rd_data [P_NODE][P_APPLY];
  int M [MAX_NODES][DIM];
  int checks = 0, failures = 0;

  message_buffer #(.P_NODE(P_NODE), .P_EDGE(P_EDGE), .DIM(DIM), .P_APPLY(P_APPLY), .P_SCATTER(P_SCATTER),
                   .MAX_NODES(MAX_NODES), .NODE_W(NODE_W), .LNODE_W(LNODE_W)) dut (.*);

  task automatic read_all(bit expect_zero, bit clr);
    for (int n = 0; n < MAX_NODES; n += 2)
      for (int i = 0; i < DIM; i += P_APPLY) begin
        @(negedge clk);
        for (int k = 0; k < P_NODE; k++) begin
          rd_en[k] = 1; rd_clear[k] = clr; rd_node[k] = NODE_W'(n + k); rd_idx[k] = 16'(i);
        end
        #1;
        for (int k = 0; k < P_NODE; k++) begin
          checks++;
          if (int'(rd_data[k][0]) != (expect_zero ? 0 : M[n+k][i])) begin
            failures++; $display("node %0d elem %0d: %0d expected %0d", n+k, i, rd_data[k][0], expect_zero ? 0 : M[n+k][i]);
          end
        end
      end
    @(negedge clk);
    for (int k = 0; k < P_NODE; k++) rd_en[k] = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sweep;
    for (int b = 0; b < P_EDGE; b++) mp_en[b] = 0;
    for (int k = 0; k < P_NODE; k++) begin rd_en[k] = 0; rd_clear[k] = 0; end
    for (int n = 0; n < MAX_NODES; n++) for (int i = 0; i < DIM; i++) M[n][i] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    sweep = 0;
    while (clear_busy) begin @(negedge clk); sweep++; end
    checks++;
    if (sweep != (MAX_NODES / P_EDGE) * (DIM / P_SCATTER)) begin failures++; $display("sweep took %0d", sweep); end
    // accumulate
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int b = 0; b < P_EDGE; b++) begin
        int ln, w;
        mp_en[b] = ($urandom % 4 != 0);
        ln = int'($urandom % (MAX_NODES / P_EDGE));
        w  = int'($urandom % (DIM / P_SCATTER));
        mp_lnode[b] = LNODE_W'(ln); mp_word[b] = 16'(w);
        for (int s = 0; s < P_SCATTER; s++) begin
          int v;
          v = int'($urandom % 2000) - 1000;
          mp_add[b][s] = msg_t'(v);
          if (mp_en[b]) M[ln * P_EDGE + b][w * P_SCATTER + s] += v;
        end
      end
    end
    @(negedge clk);
    for (int b = 0; b < P_EDGE; b++) mp_en[b] = 0;
    wsel = 1;
    read_all(0, 1);
    read_all(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
