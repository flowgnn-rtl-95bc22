// nt_array: the Node Transformation (NT) stage, P_node NT units working on
// a batch of P_node consecutive nodes in lockstep.
//
// For each batch the controller walks the input positions of the node
// vectors, P_apply elements per step. In every step each unit k reads, for
// its node n = base + k, the embedding x^l and the aggregated message m^l,
// and forms the GIN input
//     h = (1 + eps_l) * x + m
// (eps_l from the weight buffer, one multiply and shift per element). The
// weight columns of that step are read once and broadcast to all units
// ("shared weights"). When all units have a free accumulator buffer the
// batch advances one step; a batch takes DIM/P_apply steps and the next
// batch starts straight after, while the units still stream out the
// previous one. NT_IDENTITY passes h = x and reads no messages.
//
// Outputs: each unit's output stream (to the NT-to-MP adapter or the
// pooling head, selected outside) and the write-back of the new embedding
// into the node embedding buffer (not in NT_IDENTITY mode). done pulses
// when every node of the pass has been output.
//
// The lockstep batch with a broadcast weight read, the interleaved node to
// unit assignment and the read-and-clear of messages are this design's
// choices; the paper gives P_node parallel NT units sharing the weights.
module nt_array
  import flowgnn_pkg::*;
#(
  parameter int P_NODE    = flowgnn_pkg::CFG_P_NODE,
  parameter int DIM       = flowgnn_pkg::CFG_DIM,
  parameter int P_APPLY   = flowgnn_pkg::CFG_P_APPLY,
  parameter int NODE_W    = $clog2(flowgnn_pkg::CFG_MAX_NODES)
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     start,
  input  nt_mode_e mode,
  input  logic [NODE_W:0] num_nodes,
  output logic     busy,
  output logic     done,
  // node embedding buffer
  output logic [NODE_W-1:0] x_node [P_NODE],
  output logic [15:0]       x_idx  [P_NODE],
  input  data_t             x_data [P_NODE][P_APPLY],
  // message buffer (read and clear)
  output logic              m_en    [P_NODE],
  output logic              m_clear [P_NODE],
  output logic [NODE_W-1:0] m_node  [P_NODE],
  output logic [15:0]       m_idx   [P_NODE],
  input  msg_t              m_data  [P_NODE][P_APPLY],
  // weight buffer
  output logic [15:0]       w_col,
  input  data_t             w_data [P_APPLY][DIM],
  input  data_t             bias   [DIM],
  input  data_t             eps,
  // per-unit output streams
  output logic              out_valid [P_NODE],
  input  logic              out_ready [P_NODE],
  output logic [NODE_W-1:0] out_node  [P_NODE],
  output logic [15:0]       out_idx   [P_NODE],
  output logic              out_last  [P_NODE],
  output data_t             out_data  [P_NODE][P_APPLY],
  // write-back into the node embedding buffer
  output logic              wb_en   [P_NODE],
  output logic [NODE_W-1:0] wb_node [P_NODE],
  output logic [15:0]       wb_idx  [P_NODE],
  output data_t             wb_data [P_NODE][P_APPLY]
);
  localparam int STEPS = DIM / P_APPLY;

  logic            running;     // batches still being issued
  nt_mode_e        mode_q;
  logic [NODE_W:0] nn_q, base;
  logic [15:0]     step;
  logic            all_ready, any_busy;

  logic     u_valid [P_NODE];
  logic     u_ready [P_NODE];
  logic     u_busy  [P_NODE];
  data_t    u_h     [P_NODE][P_APPLY];
  nt_mode_e u_mode  [P_NODE];

  assign w_col = 16'(32'(step) * P_APPLY);
  assign busy  = running || any_busy;

  always_comb begin
    all_ready = 1'b1;
    any_busy  = 1'b0;
    for (int k = 0; k < P_NODE; k++) begin
      logic act;
      act = running && (32'(base) + k < 32'(nn_q));
      if (act && !u_ready[k]) all_ready = 1'b0;
      if (u_busy[k]) any_busy = 1'b1;
      x_node[k]  = NODE_W'(32'(base) + k);
      x_idx[k]   = w_col;
      m_node[k]  = x_node[k];
      m_idx[k]   = w_col;
      for (int p = 0; p < P_APPLY; p++) begin
        if (mode_q == NT_IDENTITY)
          u_h[k][p] = x_data[k][p];
        else
          u_h[k][p] = sat_data(64'(x_data[k][p])
                               + ((64'(eps) * 64'(x_data[k][p])) >>> FRAC_W)
                               + 64'(m_data[k][p]));
      end
    end
    // second pass: valid only when the whole batch can step
    for (int k = 0; k < P_NODE; k++) begin
      u_valid[k] = running && all_ready && (32'(base) + k < 32'(nn_q));
      m_en[k]    = u_valid[k] && (mode_q != NT_IDENTITY);
      m_clear[k] = m_en[k];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      base    <= '0;
      step    <= '0;
    end else if (!running) begin
      if (start) begin
        running <= (num_nodes != '0);
        mode_q  <= mode;
        nn_q    <= num_nodes;
        base    <= '0;
        step    <= '0;
      end
    end else if (all_ready) begin
      if (32'(step) == STEPS - 1) begin
        step <= '0;
        base <= base + (NODE_W+1)'(P_NODE);
        if (32'(base) + P_NODE >= 32'(nn_q)) running <= 1'b0;
      end else begin
        step <= step + 1'b1;
      end
    end
  end

  // done once issuing has finished and every unit has drained
  logic pending;
  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      pending <= 1'b0;
    end else if (!pending) begin
      if (start && !running) pending <= 1'b1;
    end else if (!running && !any_busy) begin
      pending <= 1'b0;
      done    <= 1'b1;
    end
  end

  for (genvar k = 0; k < P_NODE; k++) begin : g_unit
    nt_unit #(.DIM(DIM), .P_APPLY(P_APPLY), .NODE_W(NODE_W)) u_nt (
      .clk, .rst,
      .acc_valid (u_valid[k]),
      .acc_first (step == '0),
      .acc_last  (32'(step) == STEPS - 1),
      .acc_idx   (w_col),
      .acc_node  (x_node[k]),
      .acc_mode  (mode_q),
      .acc_h     (u_h[k]),
      .acc_w     (w_data),
      .acc_ready (u_ready[k]),
      .bias      (bias),
      .out_valid (out_valid[k]),
      .out_ready (out_ready[k]),
      .out_node  (out_node[k]),
      .out_idx   (out_idx[k]),
      .out_last  (out_last[k]),
      .out_mode  (u_mode[k]),
      .out_data  (out_data[k]),
      .busy      (u_busy[k])
    );
    always_comb begin
      wb_en[k]   = out_valid[k] && out_ready[k] && (u_mode[k] != NT_IDENTITY);
      wb_node[k] = out_node[k];
      wb_idx[k]  = out_idx[k];
      wb_data[k] = out_data[k];
    end
  end
endmodule
