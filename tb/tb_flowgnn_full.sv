// tb_flowgnn_full: end-to-end test of flowgnn_top with every parameter at
// its default (two NT units, four MP units, DIM 100, five GIN layers,
// P_apply = P_scatter = 2), on two random graphs of molecular size
// (25 and 22 nodes, around the average size of the molecule datasets).
`timescale 1ns/1ps
module tb_flowgnn_full;
  import flowgnn_pkg::*;
  localparam int P_NODE = CFG_P_NODE, P_EDGE = CFG_P_EDGE;
  localparam int P_APPLY = CFG_P_APPLY, P_SCATTER = CFG_P_SCATTER;
  localparam int DIM = CFG_DIM, LAYERS = CFG_LAYERS;
  localparam int MAX_NODES = CFG_MAX_NODES, MAX_EDGES = CFG_MAX_EDGES, EATTR_W = CFG_EATTR_W;
  localparam int NGRAPHS = 2, GRAPH_NODES = 25, GRAPH_EDGES = 56, LIMIT = 400000;

`include "tb_flowgnn_body.svh"

  flowgnn_top dut (.*);
endmodule
