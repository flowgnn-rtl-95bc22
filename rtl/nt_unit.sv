// nt_unit: one Node Transformation (NT) unit.
//
// The unit computes a fully connected layer for one node at a time as two
// processes that overlap between nodes through a pair of ping-pong
// accumulator buffers, as the paper describes for its canonical NT unit:
//   accumulate - input-stationary: every step brings P_apply elements of the
//                node's input vector h plus the matching P_apply weight
//                columns, and each element updates the whole DIM-wide
//                output vector (DIM x P_apply multipliers).
//   output     - once a node's accumulation is complete, adds the bias,
//                applies ReLU (not after the last GIN layer, a choice of
//                this design following the usual GIN model), saturates to
//                16 bits and streams the embedding out P_apply elements per
//                cycle, so message passing can start on the first elements.
// In NT_IDENTITY mode accumulate just copies h into the buffer and output
// sends it unchanged; this pass scatters the input embeddings before
// layer 0.
//
// Interface / timing: acc_valid may only be raised while acc_ready is high.
// A node takes DIM/P_apply accumulate steps (acc_first on the first,
// acc_last on the last) and DIM/P_apply output beats with a valid/ready
// handshake; out_last marks the node's final beat. With both buffers
// free, accumulate of node k+1 runs while node k is output.
module nt_unit
  import flowgnn_pkg::*;
#(
  parameter int DIM     = flowgnn_pkg::CFG_DIM,
  parameter int P_APPLY = flowgnn_pkg::CFG_P_APPLY,
  parameter int NODE_W  = $clog2(flowgnn_pkg::CFG_MAX_NODES)
) (
  input  logic     clk,
  input  logic     rst,
  // accumulate
  input  logic     acc_valid,
  input  logic     acc_first,
  input  logic     acc_last,
  input  logic [15:0] acc_idx,              // element index of h[0]
  input  logic [NODE_W-1:0] acc_node,
  input  nt_mode_e acc_mode,
  input  data_t    acc_h [P_APPLY],
  input  data_t    acc_w [P_APPLY][DIM],
  output logic     acc_ready,
  // output
  input  data_t    bias [DIM],
  output logic     out_valid,
  input  logic     out_ready,
  output logic [NODE_W-1:0] out_node,
  output logic [15:0] out_idx,              // element index of out_data[0]
  output logic     out_last,
  output nt_mode_e out_mode,
  output data_t    out_data [P_APPLY],
  output logic     busy
);
  localparam int STEPS = DIM / P_APPLY;

  acc_t      buf_q  [2][DIM];
  logic      full_q [2];
  logic [NODE_W-1:0] node_q [2];
  nt_mode_e  mode_q [2];
  logic      wsel, rsel;
  logic [15:0] ostep;

  assign acc_ready = !full_q[wsel];
  assign busy      = full_q[0] || full_q[1];

  // ---- accumulate ----------------------------------------------------
  acc_t acc_next [DIM];
  always_comb begin
    for (int o = 0; o < DIM; o++) begin
      acc_next[o] = acc_first ? '0 : buf_q[wsel][o];
      if (acc_mode == NT_IDENTITY) begin
        for (int p = 0; p < P_APPLY; p++)
          if (32'(acc_idx) + p == o) acc_next[o] = acc_t'(acc_h[p]);
      end else begin
        for (int p = 0; p < P_APPLY; p++)
          acc_next[o] = acc_next[o] + acc_t'(acc_w[p][o]) * acc_t'(acc_h[p]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (acc_valid && acc_ready) begin
      for (int o = 0; o < DIM; o++) buf_q[wsel][o] <= acc_next[o];
      if (acc_first) begin
        node_q[wsel] <= acc_node;
        mode_q[wsel] <= acc_mode;
      end
    end
  end

  // ---- output --------------------------------------------------------
  always_comb begin
    out_valid = full_q[rsel];
    out_node  = node_q[rsel];
    out_mode  = mode_q[rsel];
    out_idx   = 16'(32'(ostep) * P_APPLY);
    out_last  = (32'(ostep) == STEPS - 1);
    for (int p = 0; p < P_APPLY; p++) begin
      acc_t a;
      data_t y;
      a = buf_q[rsel][32'(ostep) * P_APPLY + p];
      if (mode_q[rsel] == NT_IDENTITY) begin
        y = sat_data(64'(a));
      end else begin
        y = sat_data(64'(a >>> FRAC_W) + 64'(bias[32'(ostep) * P_APPLY + p]));
        if (mode_q[rsel] == NT_LAYER) y = relu(y);
      end
      out_data[p] = y;
    end
  end

  // ---- ping-pong control --------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      full_q[0] <= 1'b0;
      full_q[1] <= 1'b0;
      wsel      <= 1'b0;
      rsel      <= 1'b0;
      ostep     <= '0;
    end else begin
      if (acc_valid && acc_ready && acc_last) begin
        full_q[wsel] <= 1'b1;
        wsel         <= !wsel;
      end
      if (out_valid && out_ready) begin
        if (out_last) begin
          full_q[rsel] <= 1'b0;
          rsel         <= !rsel;
          ostep        <= '0;
        end else begin
          ostep <= ostep + 1'b1;
        end
      end
    end
  end

  a_acc_handshake: assert property (@(posedge clk) disable iff (rst) acc_valid |-> acc_ready);
endmodule
