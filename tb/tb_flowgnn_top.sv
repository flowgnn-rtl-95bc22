// tb_flowgnn_top: end-to-end test of flowgnn_top at reduced size
// (DIM 8, two layers, P_apply 1 / P_scatter 2 so that the adapter
// re-batches, queues of depth 2 so that back-pressure occurs), running
// three random graphs back to back against an integer reference model.
`timescale 1ns/1ps
module tb_flowgnn_top;
  import flowgnn_pkg::*;
  localparam int P_NODE = 2, P_EDGE = 4, P_APPLY = 1, P_SCATTER = 2;
  localparam int DIM = 8, LAYERS = 2, MAX_NODES = 32, MAX_EDGES = 128, EATTR_W = 2;
  localparam int NGRAPHS = 3, GRAPH_NODES = 13, GRAPH_EDGES = 40, LIMIT = 200000;

`include "tb_flowgnn_body.svh"

  flowgnn_top #(
    .P_NODE(P_NODE), .P_EDGE(P_EDGE), .P_APPLY(P_APPLY), .P_SCATTER(P_SCATTER),
    .DIM(DIM), .LAYERS(LAYERS), .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES),
    .EATTR_W(EATTR_W), .QUEUE_DEPTH(2)
  ) dut (.*);
endmodule
