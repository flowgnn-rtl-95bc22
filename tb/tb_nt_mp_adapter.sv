// tb_nt_mp_adapter: two NT streams of P_apply = 1 elements feed the adapter
// (re-batching to P_scatter = 2) while the four MP queues randomly report
// full. Every chunk must reach exactly the queues in its node's bank
// mask, once, with node id, word index and data intact, and no queue may
// be pushed while full.
`timescale 1ns/1ps
module tb_nt_mp_adapter;
  import flowgnn_pkg::*;
  localparam int P_NODE = 2, P_EDGE = 4, P_APPLY = 1, P_SCATTER = 2, DIM = 4, NODE_W = 4;
  localparam int NN = 12, WPN = DIM / P_SCATTER;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid [P_NODE], in_ready [P_NODE];
  logic [NODE_W-1:0] in_node [P_NODE];
  data_t in_data [P_NODE][P_APPLY];
  logic [NODE_W-1:0] mask_node [P_NODE];
  logic [P_EDGE-1:0] mask [P_NODE];
  logic q_push [P_EDGE], q_full [P_EDGE];
  logic [NODE_W-1:0] q_node [P_EDGE];
  logic [15:0] q_word [P_EDGE];
  data_t q_data [P_EDGE][P_SCATTER];
  logic busy, ev_multicast, ev_blocked;

  nt_mp_adapter #(.P_NODE(P_NODE), .P_EDGE(P_EDGE), .P_APPLY(P_APPLY), .P_SCATTER(P_SCATTER), .DIM(DIM), .NODE_W(NODE_W)) dut (.*);

  logic [P_EDGE-1:0] MASK [NN];
  int X [NN][DIM];
  int got [P_EDGE][NN][WPN];
  int checks = 0, failures = 0, n_multi = 0;

  always_comb for (int k = 0; k < P_NODE; k++) mask[k] = MASK[mask_node[k]];

  always @(posedge clk) if (!rst) begin
    if (ev_multicast) n_multi++;
    for (int b = 0; b < P_EDGE; b++) if (q_push[b]) begin
      checks++;
      if (q_full[b]) begin failures++; $display("push into full queue %0d", b); end
      got[b][q_node[b]][q_word[b]]++;
      for (int s = 0; s < P_SCATTER; s++) begin
        checks++;
        if (int'(q_data[b][s]) != X[q_node[b]][q_word[b]*P_SCATTER + s]) begin
          failures++; $display("bank %0d node %0d word %0d lane %0d wrong", b, q_node[b], q_word[b], s);
        end
      end
    end
    for (int b = 0; b < P_EDGE; b++) q_full[b] <= ($urandom % 3 == 0);
  end

  // stream k sends nodes k, k+2, ... element by element
  for (genvar k = 0; k < P_NODE; k++) begin : g_src
    initial begin
      in_valid[k] = 0;
      wait (!rst);
      for (int n = k; n < NN; n += P_NODE)
        for (int i = 0; i < DIM; i++) begin
          @(negedge clk);
          in_valid[k] = 1; in_node[k] = NODE_W'(n); in_data[k][0] = data_t'(X[n][i]);
          #1;
          while (!in_ready[k]) begin @(negedge clk); #1; end
          @(posedge clk);
        end
      @(negedge clk);
      in_valid[k] = 0;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < P_EDGE; b++) q_full[b] = 0;
    for (int n = 0; n < NN; n++) begin
      MASK[n] = P_EDGE'($urandom);
      for (int i = 0; i < DIM; i++) X[n][i] = int'($urandom % 60000) - 30000;
      for (int b = 0; b < P_EDGE; b++) for (int w = 0; w < WPN; w++) got[b][n][w] = 0;
    end
    MASK[0] = 4'b1111;
    MASK[1] = 4'b0000;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (400) @(negedge clk);
    for (int b = 0; b < P_EDGE; b++)
      for (int n = 0; n < NN; n++)
        for (int w = 0; w < WPN; w++) begin
          checks++;
          if (got[b][n][w] != (MASK[n][b] ? 1 : 0)) begin
            failures++; $display("bank %0d node %0d word %0d received %0d times", b, n, w, got[b][n][w]);
          end
        end
    checks++;
    if (n_multi == 0) begin failures++; $display("no multicast seen"); end
    checks++;
    if (busy) begin failures++; $display("adapter still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
