// nt_mp_adapter: the NT-to-MP adapter. It re-batches node-embedding
// elements from the NT width (P_apply) to the MP width (P_scatter) and
// multicasts every chunk, on the fly, to exactly those MP units whose bank
// holds at least one out-edge of the node.
//
// Re-batching: each NT stream has a small gearbox that collects P_apply
// elements per beat and releases P_scatter elements per chunk (e.g.
// P_apply = 1, P_scatter = 4 collects four beats). DIM must be a multiple
// of both, so a chunk never spans two nodes. A new beat is only taken when
// the gearbox holds less than one chunk after this cycle's release.
//
// Multicast: the chunk's target set is the node's bank mask from the CSR
// tables. Every cycle the streams are visited in rotating order; a stream is
// granted when every target queue has room and no earlier-granted stream
// already writes one of them this cycle, and then its chunk is pushed into
// all target queues in the same cycle. A chunk of a node with no out-edges
// is dropped. Queue routing by destination bank follows the paper; the
// gearbox and the rotating grant are this design's choices.
//
// Outputs ev_multicast (a chunk went to two or more queues) and ev_blocked
// (a ready chunk waited on a full or busy queue) count these events.
module nt_mp_adapter
  import flowgnn_pkg::*;
#(
  parameter int P_NODE    = flowgnn_pkg::CFG_P_NODE,
  parameter int P_EDGE    = flowgnn_pkg::CFG_P_EDGE,
  parameter int P_APPLY   = flowgnn_pkg::CFG_P_APPLY,
  parameter int P_SCATTER = flowgnn_pkg::CFG_P_SCATTER,
  parameter int DIM       = flowgnn_pkg::CFG_DIM,
  parameter int NODE_W    = $clog2(flowgnn_pkg::CFG_MAX_NODES)
) (
  input  logic clk,
  input  logic rst,
  // NT output streams
  input  logic              in_valid [P_NODE],
  input  logic [NODE_W-1:0] in_node  [P_NODE],
  input  data_t             in_data  [P_NODE][P_APPLY],
  output logic              in_ready [P_NODE],
  // bank masks from the CSR tables
  output logic [NODE_W-1:0] mask_node [P_NODE],
  input  logic [P_EDGE-1:0] mask      [P_NODE],
  // MP node queues
  output logic              q_push [P_EDGE],
  output logic [NODE_W-1:0] q_node [P_EDGE],
  output logic [15:0]       q_word [P_EDGE],
  output data_t             q_data [P_EDGE][P_SCATTER],
  input  logic              q_full [P_EDGE],
  output logic              busy,
  output logic              ev_multicast,
  output logic              ev_blocked
);
  localparam int CAP  = P_SCATTER + P_APPLY;
  localparam int CW   = $clog2(CAP + 1);
  localparam int WPN  = DIM / P_SCATTER;

  data_t             gb     [P_NODE][CAP];
  logic [CW-1:0]     cnt    [P_NODE];
  logic [NODE_W-1:0] node_q [P_NODE];
  logic [15:0]       word_q [P_NODE];

  logic              ready  [P_NODE];   // a full chunk is waiting
  logic              grant  [P_NODE];
  logic [CW-1:0]     left   [P_NODE];   // elements kept after this cycle's release
  logic [$clog2(P_NODE+1)-1:0] rr;

  always_comb begin
    logic [P_EDGE-1:0] used;
    logic any_ready;
    used = '0;
    busy = 1'b0;
    ev_multicast = 1'b0;
    ev_blocked   = 1'b0;
    any_ready    = 1'b0;
    for (int k = 0; k < P_NODE; k++) begin
      mask_node[k] = node_q[k];
      ready[k]     = (32'(cnt[k]) >= P_SCATTER);
      grant[k]     = 1'b0;
      if (cnt[k] != '0) busy = 1'b1;
    end
    for (int i = 0; i < P_NODE; i++) begin
      int k;
      logic ok;
      k  = (32'(rr) + i) % P_NODE;
      ok = ready[k] && ((mask[k] & used) == '0);
      for (int b = 0; b < P_EDGE; b++)
        if (mask[k][b] && q_full[b]) ok = 1'b0;
      if (ok) begin
        grant[k] = 1'b1;
        used     = used | mask[k];
        if ($countones(mask[k]) > 1) ev_multicast = 1'b1;
      end else if (ready[k]) begin
        ev_blocked = 1'b1;
      end
    end
    for (int b = 0; b < P_EDGE; b++) begin
      q_push[b] = 1'b0;
      q_node[b] = '0;
      q_word[b] = '0;
      for (int s = 0; s < P_SCATTER; s++) q_data[b][s] = '0;
      for (int k = 0; k < P_NODE; k++) begin
        if (grant[k] && mask[k][b]) begin
          q_push[b] = 1'b1;
          q_node[b] = node_q[k];
          q_word[b] = word_q[k];
          for (int s = 0; s < P_SCATTER; s++) q_data[b][s] = gb[k][s];
        end
      end
    end
    for (int k = 0; k < P_NODE; k++) begin
      left[k]     = grant[k] ? cnt[k] - CW'(P_SCATTER) : cnt[k];
      in_ready[k] = (32'(left[k]) < P_SCATTER);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rr <= '0;
      for (int k = 0; k < P_NODE; k++) begin
        cnt[k]    <= '0;
        word_q[k] <= '0;
      end
    end else begin
      rr <= (32'(rr) == P_NODE - 1) ? '0 : rr + 1'b1;
      for (int k = 0; k < P_NODE; k++) begin
        data_t nxt [CAP];
        // drop the released chunk
        for (int j = 0; j < CAP; j++) begin
          if (grant[k]) nxt[j] = (j + P_SCATTER < CAP) ? gb[k][(j + P_SCATTER) % CAP] : '0;
          else          nxt[j] = gb[k][j];
        end
        // append the incoming beat
        if (in_valid[k] && in_ready[k]) begin
          for (int p = 0; p < P_APPLY; p++) nxt[32'(left[k]) + p] = in_data[k][p];
          if (left[k] == '0) node_q[k] <= in_node[k];
        end
        for (int j = 0; j < CAP; j++) gb[k][j] <= nxt[j];
        cnt[k] <= left[k] + ((in_valid[k] && in_ready[k]) ? CW'(P_APPLY) : '0);
        if (grant[k]) word_q[k] <= (32'(word_q[k]) == WPN - 1) ? '0 : word_q[k] + 1'b1;
      end
    end
  end
endmodule
