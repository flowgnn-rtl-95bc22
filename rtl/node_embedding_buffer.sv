// node_embedding_buffer: node embeddings of the graph being processed,
// split into P_node banks so that every NT unit reads and updates its own
// bank without conflicts.
//
// Node n lives in bank n mod P_node at word (n / P_node) * DIM/P_apply +
// e / P_apply, one word holding P_apply elements. The interleaved
// assignment matches the lockstep NT array, where unit k always handles
// the nodes with n mod P_node = k (the paper shows bank 1 and bank 2 of
// size N/2 for two NT units; the interleaving is this design's choice).
// The NT units read x^l and write x^(l+1) back in place once a node's
// output is produced ("update"). The host port loads the input embeddings
// before a graph starts; it has priority over the write-back.
//
// Timing: reads are combinational, writes take effect at the next edge.
module node_embedding_buffer
  import flowgnn_pkg::*;
#(
  parameter int P_NODE    = flowgnn_pkg::CFG_P_NODE,
  parameter int DIM       = flowgnn_pkg::CFG_DIM,
  parameter int P_APPLY   = flowgnn_pkg::CFG_P_APPLY,
  parameter int MAX_NODES = flowgnn_pkg::CFG_MAX_NODES,
  parameter int NODE_W    = $clog2(flowgnn_pkg::CFG_MAX_NODES)
) (
  input  logic   clk,
  input  logic   rst,            // only qualifies the assertions
  // host load
  input  logic   ld_valid,
  input  logic [NODE_W-1:0] ld_node,
  input  logic [15:0] ld_idx,              // element index, multiple of P_apply
  input  data_t  ld_data [P_APPLY],
  // NT unit k read (node must satisfy node mod P_node == k)
  input  logic [NODE_W-1:0] rd_node [P_NODE],
  input  logic [15:0] rd_idx [P_NODE],
  output data_t  rd_data [P_NODE][P_APPLY],
  // NT unit k write-back
  input  logic   wb_en [P_NODE],
  input  logic [NODE_W-1:0] wb_node [P_NODE],
  input  logic [15:0] wb_idx [P_NODE],
  input  data_t  wb_data [P_NODE][P_APPLY]
);
  localparam int STEPS = DIM / P_APPLY;
  localparam int WORDS = (MAX_NODES / P_NODE) * STEPS;
  localparam int AW    = $clog2(WORDS);

  logic [P_APPLY*DATA_W-1:0] mem [P_NODE][WORDS];

  function automatic logic [AW-1:0] addr_of(input logic [NODE_W-1:0] n, input logic [15:0] idx);
    return AW'((32'(n) / P_NODE) * STEPS + 32'(idx) / P_APPLY);
  endfunction

  function automatic logic [P_APPLY*DATA_W-1:0] pack(input data_t d [P_APPLY]);
    logic [P_APPLY*DATA_W-1:0] w;
    for (int p = 0; p < P_APPLY; p++) w[p*DATA_W +: DATA_W] = d[p];
    return w;
  endfunction

  always_ff @(posedge clk) begin
    for (int k = 0; k < P_NODE; k++) begin
      if (ld_valid && (32'(ld_node) % P_NODE == k))
        mem[k][addr_of(ld_node, ld_idx)] <= pack(ld_data);
      else if (wb_en[k])
        mem[k][addr_of(wb_node[k], wb_idx[k])] <= pack(wb_data[k]);
    end
  end

  always_comb begin
    for (int k = 0; k < P_NODE; k++) begin
      logic [P_APPLY*DATA_W-1:0] w;
      w = mem[k][addr_of(rd_node[k], rd_idx[k])];
      for (int p = 0; p < P_APPLY; p++) rd_data[k][p] = data_t'(w[p*DATA_W +: DATA_W]);
    end
  end

  for (genvar k = 0; k < P_NODE; k++) begin : g_chk
    a_wb_bank: assert property (@(posedge clk) disable iff (rst) wb_en[k] |-> (32'(wb_node[k]) % P_NODE == k));
  end
endmodule
