// flowgnn_top: FlowGNN dataflow accelerator for message-passing GNNs,
// built here for a GIN model with edge embeddings:
//     x_i^(l+1) = MLP_l((1 + eps_l) x_i^l + sum_(j in N(i)) ReLU(x_j^l + e_ji^l))
// followed by global average pooling and one linear output layer.
//
// Structure (main configuration: P_node = 2 NT units, P_edge = 4 MP units):
//   graph_loader           COO edge stream -> per-bank CSR tables
//   node_embedding_buffer  x, P_node banks
//   nt_array               P_node NT units in lockstep, shared weights
//   nt_mp_adapter          re-batch P_apply -> P_scatter, multicast by bank
//   node_queue x P_edge    one queue in front of every MP unit
//   mp_unit x P_edge       edge embedding + scatter/gather into own bank
//   edge_embedding_table   per-layer edge embeddings
//   message_buffer         two alternating buffers, P_edge banks
//   graph_head             pooling + output layer
// NT, adapter and MP run concurrently: as soon as an NT unit produces the
// first elements of a node, they flow through the adapter and queues into
// the MP units, which add the node's messages into their destinations'
// partial sums while NT continues with the next nodes.
//
// One graph is processed as LAYERS+1 passes over its nodes. Pass 0 scatters
// the input embeddings unchanged (messages for layer 0, buffer 0). Pass
// p = 1..LAYERS runs GIN layer p-1 on NT, reading the messages from buffer
// (p-1) mod 2 and, except in the last pass, scattering the new embeddings
// into buffer p mod 2 with the edge embeddings of layer p. The last pass
// sends its embeddings to the pooling head. A pass ends when NT, the
// adapter, every queue and every MP unit are idle (all messages of the
// layer are complete before the next layer reads them).
//
// Host interface: load parameters through ld (any time the core is idle),
// the input node embeddings through x_ld_*, then pulse g_start with the
// node and edge counts and stream the edges (src, dst, attr) through
// e_valid/e_ready. res_valid marks the graph's output value res_data
// (signed, FRAC_W fractional bits). g_ready is high when a new graph may
// start; after reset the message buffers are first cleared.
module flowgnn_top
  import flowgnn_pkg::*;
#(
  parameter int P_NODE      = flowgnn_pkg::CFG_P_NODE,
  parameter int P_EDGE      = flowgnn_pkg::CFG_P_EDGE,
  parameter int P_APPLY     = flowgnn_pkg::CFG_P_APPLY,
  parameter int P_SCATTER   = flowgnn_pkg::CFG_P_SCATTER,
  parameter int DIM         = flowgnn_pkg::CFG_DIM,
  parameter int LAYERS      = flowgnn_pkg::CFG_LAYERS,
  parameter int MAX_NODES   = flowgnn_pkg::CFG_MAX_NODES,
  parameter int MAX_EDGES   = flowgnn_pkg::CFG_MAX_EDGES,
  parameter int EATTR_W     = flowgnn_pkg::CFG_EATTR_W,
  parameter int QUEUE_DEPTH = flowgnn_pkg::CFG_QUEUE_DEPTH,
  localparam int NODE_W  = $clog2(MAX_NODES),
  localparam int LNODE_W = $clog2(MAX_NODES / P_EDGE),
  localparam int EDGE_W  = $clog2(MAX_EDGES + 1)
) (
  input  logic   clk,
  input  logic   rst,
  // parameter load
  input  logic   ld_valid,
  input  load_t  ld,
  // input node embeddings
  input  logic   x_ld_valid,
  input  logic [NODE_W-1:0] x_ld_node,
  input  logic [15:0]       x_ld_idx,
  input  data_t  x_ld_data [P_APPLY],
  // graph
  output logic   g_ready,
  input  logic   g_start,
  input  logic [NODE_W:0]   g_num_nodes,
  input  logic [EDGE_W-1:0] g_num_edges,
  input  logic              e_valid,
  input  logic [NODE_W-1:0] e_src,
  input  logic [NODE_W-1:0] e_dst,
  input  logic [EATTR_W-1:0] e_attr,
  output logic              e_ready,
  // result
  output logic   res_valid,
  output logic signed [31:0] res_data,
  output logic   busy
);
  typedef struct packed {
    logic [NODE_W-1:0]           node;
    logic [15:0]                 word;
    logic [P_SCATTER*DATA_W-1:0] data;
  } qent_t;

  // ---- controller ------------------------------------------------------
  typedef enum logic [2:0] {T_INIT, T_IDLE, T_LOAD, T_RUN, T_NEXT, T_HEAD} tstate_e;
  tstate_e state;
  logic [3:0]      pass;
  logic [NODE_W:0] nn;
  logic            nt_done_seen;
  nt_mode_e        mode;

  logic nt_start, nt_busy, nt_done;
  logic ld_start, ld_busy, ld_done;
  logic head_finish, head_busy;
  logic clr_busy;
  logic ad_busy;
  logic drained;
  logic q_empty [P_EDGE];
  logic mp_busy [P_EDGE];

  always_comb begin
    drained = !nt_busy && !ad_busy;
    for (int b = 0; b < P_EDGE; b++)
      if (!q_empty[b] || mp_busy[b]) drained = 1'b0;
  end

  assign g_ready = (state == T_IDLE);
  assign busy    = (state != T_IDLE);
  assign ld_start    = (state == T_IDLE) && g_start;
  assign nt_start    = (state == T_NEXT) && (32'(pass) <= LAYERS) || (state == T_LOAD && ld_done);
  assign head_finish = (state == T_NEXT) && (32'(pass) > LAYERS);

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= T_INIT;
      pass         <= '0;
      nt_done_seen <= 1'b0;
      mode         <= NT_IDENTITY;
    end else begin
      unique case (state)
        T_INIT: if (!clr_busy) state <= T_IDLE;
        T_IDLE: if (g_start) begin
          nn    <= g_num_nodes;
          state <= T_LOAD;
        end
        T_LOAD: if (ld_done) begin
          pass         <= '0;
          mode         <= NT_IDENTITY;
          nt_done_seen <= 1'b0;
          state        <= T_RUN;
        end
        T_RUN: begin
          if (nt_done) nt_done_seen <= 1'b1;
          if ((nt_done_seen || nt_done) && drained) begin
            pass  <= pass + 1'b1;
            state <= T_NEXT;
          end
        end
        T_NEXT: begin
          nt_done_seen <= 1'b0;
          if (32'(pass) <= LAYERS) begin
            mode  <= (32'(pass) == LAYERS) ? NT_LAST : NT_LAYER;
            state <= T_RUN;
          end else begin
            state <= T_HEAD;
          end
        end
        T_HEAD: if (res_valid) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  // mode presented to nt_array at start (registered mode lags one cycle)
  nt_mode_e start_mode;
  assign start_mode = (state == T_LOAD) ? NT_IDENTITY :
                      (32'(pass) == LAYERS) ? NT_LAST : NT_LAYER;

  logic [3:0] w_layer, e_layer;
  logic       wsel;
  assign w_layer = (pass == '0) ? '0 : pass - 1'b1;   // NT weights of this pass
  assign e_layer = pass;                              // edge embeddings of the messages produced
  assign wsel    = pass[0];                           // buffer accumulated in this pass

  // ---- graph loader (CSR tables) ------------------------------------------
  logic [NODE_W-1:0]  csr_node  [P_EDGE];
  logic [EDGE_W-1:0]  csr_start [P_EDGE];
  logic [EDGE_W-1:0]  csr_end   [P_EDGE];
  logic [EDGE_W-1:0]  csr_ptr   [P_EDGE];
  logic [LNODE_W-1:0] csr_lnode [P_EDGE];
  logic [EATTR_W-1:0] csr_attr  [P_EDGE];
  logic [NODE_W-1:0]  mask_node [P_NODE];
  logic [P_EDGE-1:0]  mask      [P_NODE];

  graph_loader #(
    .P_NODE(P_NODE), .P_EDGE(P_EDGE), .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES),
    .EATTR_W(EATTR_W), .NODE_W(NODE_W), .LNODE_W(LNODE_W), .EDGE_W(EDGE_W)
  ) u_loader (
    .clk, .rst,
    .start(ld_start), .num_nodes(g_num_nodes), .num_edges(g_num_edges),
    .e_valid, .e_src, .e_dst, .e_attr, .e_ready,
    .busy(ld_busy), .done(ld_done),
    .rd_node(csr_node), .rd_start(csr_start), .rd_end(csr_end),
    .rd_ptr(csr_ptr), .rd_lnode(csr_lnode), .rd_attr(csr_attr),
    .mask_node, .mask
  );

  // ---- weights -------------------------------------------------------------
  logic [15:0] w_col;
  data_t w_data [P_APPLY][DIM];
  data_t bias   [DIM];
  data_t eps;

  weight_buffer #(.DIM(DIM), .LAYERS(LAYERS), .P_APPLY(P_APPLY)) u_weights (
    .clk, .ld_valid, .ld,
    .rd_layer(w_layer), .rd_col(w_col),
    .rd_w(w_data), .rd_bias(bias), .rd_eps(eps)
  );

  // ---- node embeddings -------------------------------------------------------
  logic [NODE_W-1:0] x_node [P_NODE];
  logic [15:0]       x_idx  [P_NODE];
  data_t             x_data [P_NODE][P_APPLY];
  logic              wb_en   [P_NODE];
  logic [NODE_W-1:0] wb_node [P_NODE];
  logic [15:0]       wb_idx  [P_NODE];
  data_t             wb_data [P_NODE][P_APPLY];

  node_embedding_buffer #(
    .P_NODE(P_NODE), .DIM(DIM), .P_APPLY(P_APPLY), .MAX_NODES(MAX_NODES), .NODE_W(NODE_W)
  ) u_xbuf (
    .clk, .rst,
    .ld_valid(x_ld_valid), .ld_node(x_ld_node), .ld_idx(x_ld_idx), .ld_data(x_ld_data),
    .rd_node(x_node), .rd_idx(x_idx), .rd_data(x_data),
    .wb_en, .wb_node, .wb_idx, .wb_data
  );

  // ---- message buffers ---------------------------------------------------------
  logic              m_en    [P_NODE];
  logic              m_clear [P_NODE];
  logic [NODE_W-1:0] m_node  [P_NODE];
  logic [15:0]       m_idx   [P_NODE];
  msg_t              m_data  [P_NODE][P_APPLY];
  logic              mp_en    [P_EDGE];
  logic [LNODE_W-1:0] mp_lnode [P_EDGE];
  logic [15:0]       mp_word  [P_EDGE];
  msg_t              mp_add   [P_EDGE][P_SCATTER];

  message_buffer #(
    .P_NODE(P_NODE), .P_EDGE(P_EDGE), .DIM(DIM), .P_APPLY(P_APPLY), .P_SCATTER(P_SCATTER),
    .MAX_NODES(MAX_NODES), .NODE_W(NODE_W), .LNODE_W(LNODE_W)
  ) u_msg (
    .clk, .rst, .clear_busy(clr_busy), .wsel,
    .mp_en, .mp_lnode, .mp_word, .mp_add,
    .rd_en(m_en), .rd_clear(m_clear), .rd_node(m_node), .rd_idx(m_idx), .rd_data(m_data)
  );

  // ---- NT units ----------------------------------------------------------------
  logic              nt_valid [P_NODE];
  logic              nt_ready [P_NODE];
  logic [NODE_W-1:0] nt_node  [P_NODE];
  logic [15:0]       nt_idx   [P_NODE];
  logic              nt_last  [P_NODE];
  data_t             nt_data  [P_NODE][P_APPLY];

  nt_array #(.P_NODE(P_NODE), .DIM(DIM), .P_APPLY(P_APPLY), .NODE_W(NODE_W)) u_nt (
    .clk, .rst,
    .start(nt_start), .mode(start_mode), .num_nodes(nn),
    .busy(nt_busy), .done(nt_done),
    .x_node, .x_idx, .x_data,
    .m_en, .m_clear, .m_node, .m_idx, .m_data,
    .w_col, .w_data, .bias, .eps,
    .out_valid(nt_valid), .out_ready(nt_ready), .out_node(nt_node),
    .out_idx(nt_idx), .out_last(nt_last), .out_data(nt_data),
    .wb_en, .wb_node, .wb_idx, .wb_data
  );

  // NT output goes to the adapter, or to the head in the last pass
  logic last_pass;
  logic ad_valid [P_NODE];
  logic ad_ready [P_NODE];
  logic hd_valid [P_NODE];
  assign last_pass = (mode == NT_LAST);
  always_comb begin
    for (int k = 0; k < P_NODE; k++) begin
      ad_valid[k] = nt_valid[k] && !last_pass;
      hd_valid[k] = nt_valid[k] && last_pass;
      nt_ready[k] = last_pass ? 1'b1 : ad_ready[k];
    end
  end

  // ---- NT-to-MP adapter ------------------------------------------------------------
  logic              qp_push [P_EDGE];
  logic [NODE_W-1:0] qp_node [P_EDGE];
  logic [15:0]       qp_word [P_EDGE];
  data_t             qp_data [P_EDGE][P_SCATTER];
  logic              q_full  [P_EDGE];
  logic              ev_multicast, ev_blocked;

  nt_mp_adapter #(
    .P_NODE(P_NODE), .P_EDGE(P_EDGE), .P_APPLY(P_APPLY), .P_SCATTER(P_SCATTER),
    .DIM(DIM), .NODE_W(NODE_W)
  ) u_adapter (
    .clk, .rst,
    .in_valid(ad_valid), .in_node(nt_node), .in_data(nt_data), .in_ready(ad_ready),
    .mask_node, .mask,
    .q_push(qp_push), .q_node(qp_node), .q_word(qp_word), .q_data(qp_data), .q_full,
    .busy(ad_busy), .ev_multicast, .ev_blocked
  );

  // ---- node queues, MP units, edge embeddings ----------------------------------------
  logic [EATTR_W-1:0] ee_attr [P_EDGE];
  logic [15:0]        ee_word [P_EDGE];
  data_t              ee_data [P_EDGE][P_SCATTER];

  edge_embedding_table #(
    .P_EDGE(P_EDGE), .DIM(DIM), .P_SCATTER(P_SCATTER), .LAYERS(LAYERS), .EATTR_W(EATTR_W)
  ) u_ee (
    .clk, .ld_valid, .ld, .layer(e_layer),
    .rd_attr(ee_attr), .rd_word(ee_word), .rd_data(ee_data)
  );

  for (genvar b = 0; b < P_EDGE; b++) begin : g_mp
    qent_t wr_e, rd_e;
    logic  pop;
    data_t rd_d [P_SCATTER];

    always_comb begin
      wr_e.node = qp_node[b];
      wr_e.word = qp_word[b];
      for (int s = 0; s < P_SCATTER; s++) wr_e.data[s*DATA_W +: DATA_W] = qp_data[b][s];
      for (int s = 0; s < P_SCATTER; s++) rd_d[s] = data_t'(rd_e.data[s*DATA_W +: DATA_W]);
    end

    node_queue #(.T(qent_t), .DEPTH(QUEUE_DEPTH)) u_q (
      .clk, .rst,
      .push(qp_push[b]), .wr_data(wr_e), .full(q_full[b]),
      .pop(pop), .rd_data(rd_e), .empty(q_empty[b]), .count()
    );

    mp_unit #(
      .P_SCATTER(P_SCATTER), .EATTR_W(EATTR_W), .NODE_W(NODE_W), .LNODE_W(LNODE_W), .EDGE_W(EDGE_W)
    ) u_mp (
      .clk, .rst,
      .q_empty(q_empty[b]), .q_node(rd_e.node), .q_word(rd_e.word), .q_data(rd_d), .q_pop(pop),
      .csr_node(csr_node[b]), .csr_start(csr_start[b]), .csr_end(csr_end[b]),
      .csr_ptr(csr_ptr[b]), .csr_lnode(csr_lnode[b]), .csr_attr(csr_attr[b]),
      .ee_attr(ee_attr[b]), .ee_word(ee_word[b]), .ee_data(ee_data[b]),
      .msg_en(mp_en[b]), .msg_lnode(mp_lnode[b]), .msg_word(mp_word[b]), .msg_add(mp_add[b]),
      .busy(mp_busy[b])
    );
  end

  // ---- pooling and output head ---------------------------------------------------------
  graph_head #(.P_NODE(P_NODE), .DIM(DIM), .P_APPLY(P_APPLY), .NODE_W(NODE_W)) u_head (
    .clk, .rst, .ld_valid, .ld,
    .clear(ld_start),
    .in_valid(hd_valid), .in_idx(nt_idx), .in_data(nt_data),
    .finish(head_finish), .num_nodes(nn),
    .busy(head_busy), .res_valid, .res_data
  );

  // parameters must describe a buildable array
  initial begin
    assert (DIM % P_APPLY == 0 && DIM % P_SCATTER == 0);
    assert (P_SCATTER % P_APPLY == 0);
    assert (P_NODE <= P_EDGE);
  end
endmodule
