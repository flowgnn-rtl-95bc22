// graph_loader: turns a raw COO edge list, streamed in as it comes, into
// the per-bank CSR tables the MP units walk, with no work on the host.
//
// Edges are assigned to MP banks by destination node (bank = dst mod
// P_edge), so each MP unit only touches the messages of its own nodes.
// Within bank b the edges are grouped by source node: row_start[b][n] ..
// row_end[b][n]-1 index the bank's edge table, whose entries hold the
// destination's local address (dst / P_edge) and the edge attribute. A
// node has out-edges in bank b exactly when that range is non-empty, which
// is the multicast mask the NT-to-MP adapter needs.
//
// The tables are built by a counting sort in four phases, all banks in
// parallel, one node or edge per cycle:
//   CLEAR  num_nodes cycles: per-bank counters to zero
//   COUNT  num_edges cycles: accept edges (valid/ready), keep a raw copy,
//          count edges per (bank, source)
//   PREFIX num_nodes cycles: running sums give row_start; the counters
//          become insertion pointers
//   PLACE  num_edges cycles: copy every raw edge to its slot
// after which the insertion pointers equal row_end. The paper states that
// graphs arrive as COO and that message passing uses CSR; the on-chip
// conversion method is this design's choice.
//
// Interface: pulse start with num_nodes/num_edges; edges are taken while
// e_ready is high; done pulses when the tables are ready. Table reads are
// combinational.
module graph_loader
  import flowgnn_pkg::*;
#(
  parameter int P_NODE    = flowgnn_pkg::CFG_P_NODE,
  parameter int P_EDGE    = flowgnn_pkg::CFG_P_EDGE,
  parameter int MAX_NODES = flowgnn_pkg::CFG_MAX_NODES,
  parameter int MAX_EDGES = flowgnn_pkg::CFG_MAX_EDGES,
  parameter int EATTR_W   = flowgnn_pkg::CFG_EATTR_W,
  parameter int NODE_W    = $clog2(flowgnn_pkg::CFG_MAX_NODES),
  parameter int LNODE_W   = $clog2(flowgnn_pkg::CFG_MAX_NODES / flowgnn_pkg::CFG_P_EDGE),
  parameter int EDGE_W    = $clog2(flowgnn_pkg::CFG_MAX_EDGES + 1)
) (
  input  logic clk,
  input  logic rst,
  input  logic start,
  input  logic [NODE_W:0]   num_nodes,
  input  logic [EDGE_W-1:0] num_edges,
  input  logic              e_valid,
  input  logic [NODE_W-1:0] e_src,
  input  logic [NODE_W-1:0] e_dst,
  input  logic [EATTR_W-1:0] e_attr,
  output logic              e_ready,
  output logic busy,
  output logic done,
  // MP unit b reads its own bank
  input  logic [NODE_W-1:0]  rd_node  [P_EDGE],
  output logic [EDGE_W-1:0]  rd_start [P_EDGE],
  output logic [EDGE_W-1:0]  rd_end   [P_EDGE],
  input  logic [EDGE_W-1:0]  rd_ptr   [P_EDGE],
  output logic [LNODE_W-1:0] rd_lnode [P_EDGE],
  output logic [EATTR_W-1:0] rd_attr  [P_EDGE],
  // NT-to-MP adapter: banks holding out-edges of a node
  input  logic [NODE_W-1:0]  mask_node [P_NODE],
  output logic [P_EDGE-1:0]  mask      [P_NODE]
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COUNT, S_PREFIX, S_PLACE, S_DONE} state_e;
  state_e state;

  localparam int RAW_W = 2 * NODE_W + EATTR_W;
  localparam int COL_W = LNODE_W + EATTR_W;

  logic [RAW_W-1:0]  raw   [MAX_EDGES];
  logic [EDGE_W-1:0] cnt   [P_EDGE][MAX_NODES];   // count, then insertion pointer / row end
  logic [EDGE_W-1:0] rs    [P_EDGE][MAX_NODES];   // row start
  logic [COL_W-1:0]  col   [P_EDGE][MAX_EDGES];

  logic [NODE_W:0]   n_nodes, ni;
  logic [EDGE_W-1:0] n_edges, ei;
  logic [EDGE_W-1:0] run [P_EDGE];

  assign busy    = (state != S_IDLE);
  assign e_ready = (state == S_COUNT) && (ei < n_edges);

  // fields of the raw edge being placed
  logic [NODE_W-1:0]  p_src, p_dst;
  logic [EATTR_W-1:0] p_attr;
  assign {p_src, p_dst, p_attr} = raw[ei[$clog2(MAX_EDGES)-1:0]];

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state <= S_IDLE;
      ni    <= '0;
      ei    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          n_nodes <= num_nodes;
          n_edges <= num_edges;
          ni      <= '0;
          ei      <= '0;
          state   <= S_CLEAR;
        end
        S_CLEAR: begin
          for (int b = 0; b < P_EDGE; b++) cnt[b][ni[NODE_W-1:0]] <= '0;
          ni <= ni + 1'b1;
          if (ni + 1'b1 >= n_nodes) state <= S_COUNT;
        end
        S_COUNT: begin
          if (ei == n_edges) begin
            ni <= '0;
            for (int b = 0; b < P_EDGE; b++) run[b] <= '0;
            state <= S_PREFIX;
          end else if (e_valid) begin
            raw[ei[$clog2(MAX_EDGES)-1:0]] <= {e_src, e_dst, e_attr};
            cnt[32'(e_dst) % P_EDGE][e_src] <= cnt[32'(e_dst) % P_EDGE][e_src] + 1'b1;
            ei <= ei + 1'b1;
          end
        end
        S_PREFIX: begin
          for (int b = 0; b < P_EDGE; b++) begin
            rs[b][ni[NODE_W-1:0]]  <= run[b];
            cnt[b][ni[NODE_W-1:0]] <= run[b];
            run[b] <= run[b] + cnt[b][ni[NODE_W-1:0]];
          end
          ni <= ni + 1'b1;
          if (ni + 1'b1 >= n_nodes) begin
            ei    <= '0;
            state <= S_PLACE;
          end
        end
        S_PLACE: begin
          if (ei == n_edges) begin
            state <= S_DONE;
          end else begin
            col[32'(p_dst) % P_EDGE][cnt[32'(p_dst) % P_EDGE][p_src][$clog2(MAX_EDGES)-1:0]]
              <= {LNODE_W'(32'(p_dst) / P_EDGE), p_attr};
            cnt[32'(p_dst) % P_EDGE][p_src] <= cnt[32'(p_dst) % P_EDGE][p_src] + 1'b1;
            ei <= ei + 1'b1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int b = 0; b < P_EDGE; b++) begin
      rd_start[b] = rs[b][rd_node[b]];
      rd_end[b]   = cnt[b][rd_node[b]];
      {rd_lnode[b], rd_attr[b]} = col[b][rd_ptr[b][$clog2(MAX_EDGES)-1:0]];
    end
    for (int k = 0; k < P_NODE; k++)
      for (int b = 0; b < P_EDGE; b++)
        mask[k][b] = (cnt[b][mask_node[k]] != rs[b][mask_node[k]]);
  end

  a_src_range: assert property (@(posedge clk) disable iff (rst)
    (e_valid && e_ready) |-> (e_src < n_nodes && e_dst < n_nodes));
endmodule
