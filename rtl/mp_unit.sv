// mp_unit: one Message Passing (MP) unit with its edge embedding step.
//
// Each MP unit owns the edges whose destination falls in its bank and the
// matching bank of the message buffer, so all MP units run in parallel
// without conflicts. It takes node-embedding chunks from its node queue: a
// chunk is P_scatter consecutive elements (word c) of the new embedding of
// one source node n. For every out-edge (n -> d) of its bank, one edge per
// cycle, it forms the GIN message
//     msg = ReLU(x_n[c] + e_(n,d)[c])            (P_scatter lanes)
// and adds it to d's partial aggregate (sum) in the message buffer, i.e.
// scatter and gather are merged. Chunks carry their node id and word
// index, so the unit never waits for a whole embedding and chunks of
// different nodes may interleave in the queue.
//
// Interface / timing: q_* is a first-word-fall-through queue. The first
// edge of a chunk is processed in the cycle the chunk is at the head of the
// queue; the chunk is popped with its last edge, giving one edge per cycle
// back to back. CSR, edge-embedding and message reads are combinational
// (owned by graph_loader, edge_embedding_table and message_buffer). A chunk
// of a node without edges in this bank is dropped in one cycle. The ReLU
// message follows the GIN equation in the paper; the 24-bit message format
// is this design's choice.
module mp_unit
  import flowgnn_pkg::*;
#(
  parameter int P_SCATTER = flowgnn_pkg::CFG_P_SCATTER,
  parameter int EATTR_W   = flowgnn_pkg::CFG_EATTR_W,
  parameter int NODE_W    = $clog2(flowgnn_pkg::CFG_MAX_NODES),
  parameter int LNODE_W   = $clog2(flowgnn_pkg::CFG_MAX_NODES / flowgnn_pkg::CFG_P_EDGE),
  parameter int EDGE_W    = $clog2(flowgnn_pkg::CFG_MAX_EDGES + 1)
) (
  input  logic clk,
  input  logic rst,
  // node queue
  input  logic               q_empty,
  input  logic [NODE_W-1:0]  q_node,
  input  logic [15:0]        q_word,
  input  data_t              q_data [P_SCATTER],
  output logic               q_pop,
  // CSR table of this bank
  output logic [NODE_W-1:0]  csr_node,
  input  logic [EDGE_W-1:0]  csr_start,
  input  logic [EDGE_W-1:0]  csr_end,
  output logic [EDGE_W-1:0]  csr_ptr,
  input  logic [LNODE_W-1:0] csr_lnode,
  input  logic [EATTR_W-1:0] csr_attr,
  // edge embedding
  output logic [EATTR_W-1:0] ee_attr,
  output logic [15:0]        ee_word,
  input  data_t              ee_data [P_SCATTER],
  // message buffer bank
  output logic               msg_en,
  output logic [LNODE_W-1:0] msg_lnode,
  output logic [15:0]        msg_word,
  output msg_t               msg_add [P_SCATTER],
  output logic               busy
);
  logic               walking;   // in the middle of a chunk's edge list
  logic [EDGE_W-1:0]  ptr_q;

  logic [EDGE_W-1:0] ptr;
  logic              has_edge;

  assign csr_node = q_node;
  assign ptr      = walking ? ptr_q : csr_start;
  assign has_edge = !q_empty && (ptr < csr_end);
  assign csr_ptr  = ptr;
  assign ee_attr  = csr_attr;
  assign ee_word  = q_word;
  assign busy     = !q_empty || walking;

  assign msg_en    = has_edge;
  assign msg_lnode = csr_lnode;
  assign msg_word  = q_word;
  always_comb begin
    for (int s = 0; s < P_SCATTER; s++)
      msg_add[s] = msg_t'(relu(sat_data(64'(q_data[s]) + 64'(ee_data[s]))));
  end

  // pop with the last edge, or at once when the bank holds no edge of n
  assign q_pop = !q_empty && (!has_edge || (ptr + 1'b1 == csr_end));

  always_ff @(posedge clk) begin
    if (rst) begin
      walking <= 1'b0;
      ptr_q   <= '0;
    end else if (q_pop) begin
      walking <= 1'b0;
    end else if (has_edge) begin
      walking <= 1'b1;
      ptr_q   <= ptr + 1'b1;
    end
  end
endmodule
