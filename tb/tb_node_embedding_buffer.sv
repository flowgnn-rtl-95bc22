// tb_node_embedding_buffer: host loads, parallel reads by both NT units,
// write-back of new embeddings and read-back.
`timescale 1ns/1ps
module tb_node_embedding_buffer;
  import flowgnn_pkg::*;
  localparam int P_NODE = 2, DIM = 4, P_APPLY = 2, MAX_NODES = 8, NODE_W = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic ld_valid = 0;
  logic [NODE_W-1:0] ld_node;
  logic [15:0] ld_idx;
  data_t ld_data [P_APPLY];
  logic [NODE_W-1:0] rd_node [P_NODE];
  logic [15:0] rd_idx [P_NODE];
  data_t rd_data [P_NODE][P_APPLY];
  logic wb_en [P_NODE];
  logic [NODE_W-1:0] wb_node [P_NODE];
  logic [15:0] wb_idx [P_NODE];
  data_t wb_data [P_NODE][P_APPLY];
  int X [MAX_NODES][DIM];
  int checks = 0, failures = 0;

  node_embedding_buffer #(.P_NODE(P_NODE), .DIM(DIM), .P_APPLY(P_APPLY), .MAX_NODES(MAX_NODES), .NODE_W(NODE_W)) dut (.*);

  task automatic check_all();
    for (int n = 0; n < MAX_NODES; n += 2)
      for (int i = 0; i < DIM; i += P_APPLY) begin
        @(negedge clk);
        for (int k = 0; k < P_NODE; k++) begin rd_node[k] = NODE_W'(n + k); rd_idx[k] = 16'(i); end
        #1;
        for (int k = 0; k < P_NODE; k++)
          for (int p = 0; p < P_APPLY; p++) begin
            checks++;
            if (int'(rd_data[k][p]) != X[n+k][i+p]) begin failures++; $display("node %0d elem %0d", n+k, i+p); end
          end
      end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < P_NODE; k++) wb_en[k] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < MAX_NODES; n++)
      for (int i = 0; i < DIM; i += P_APPLY) begin
        @(negedge clk);
        ld_valid = 1; ld_node = NODE_W'(n); ld_idx = 16'(i);
        for (int p = 0; p < P_APPLY; p++) begin X[n][i+p] = int'($urandom % 60000) - 30000; ld_data[p] = data_t'(X[n][i+p]); end
      end
    @(negedge clk);
    ld_valid = 0;
    check_all();
    // both units write back new values in the same cycles
    for (int n = 0; n < MAX_NODES; n += 2)
      for (int i = 0; i < DIM; i += P_APPLY) begin
        @(negedge clk);
        for (int k = 0; k < P_NODE; k++) begin
          wb_en[k] = 1; wb_node[k] = NODE_W'(n + k); wb_idx[k] = 16'(i);
          for (int p = 0; p < P_APPLY; p++) begin X[n+k][i+p] = int'($urandom % 60000) - 30000; wb_data[k][p] = data_t'(X[n+k][i+p]); end
        end
      end
    @(negedge clk);
    for (int k = 0; k < P_NODE; k++) wb_en[k] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
