// tb_graph_head: loads random head weights, streams the final embeddings of
// a graph from two NT units (P_apply = 2, with gaps and both units active
// in the same cycle), pulses finish and compares the result with
//     y = trunc(sum_o w_o * sum_n x_n[o] / num_nodes) >>> 8 + b
// for several graphs, including negative results and a one-node graph.
`timescale 1ns/1ps
module tb_graph_head;
  import flowgnn_pkg::*;
  localparam int P_NODE = 2, DIM = 6, P_APPLY = 2, NODE_W = 4, NG = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic ld_valid, clear, finish, busy, res_valid;
  load_t ld;
  logic in_valid [P_NODE];
  logic [15:0] in_idx [P_NODE];
  data_t in_data [P_NODE][P_APPLY];
  logic [NODE_W:0] num_nodes;
  logic signed [31:0] res_data;

  graph_head #(.P_NODE(P_NODE), .DIM(DIM), .P_APPLY(P_APPLY), .NODE_W(NODE_W)) dut (.*);

  int HW [DIM], HB;
  int X [16][DIM];
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_valid = 0; ld = '0; clear = 0; finish = 0; num_nodes = 0;
    for (int k = 0; k < P_NODE; k++) begin in_valid[k] = 0; in_idx[k] = 0; for (int p = 0; p < P_APPLY; p++) in_data[k][p] = 0; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int o = 0; o <= DIM; o++) begin
      @(negedge clk);
      ld_valid = 1;
      if (o < DIM) begin
        HW[o] = int'($urandom % 1024) - 512;
        ld.sel = LD_HEAD_W; ld.col = 16'(o); ld.data = data_t'(HW[o]);
      end else begin
        HB = int'($urandom % 2000) - 1000;
        ld.sel = LD_HEAD_B; ld.col = 0; ld.data = data_t'(HB);
      end
    end
    @(negedge clk);
    ld_valid = 0;
    for (int g = 0; g < NG; g++) begin
      int nn;
      longint dot, q, expv;
      nn = (g == 1) ? 1 : 2 + int'($urandom % 14);
      for (int n = 0; n < nn; n++) for (int i = 0; i < DIM; i++)
        X[n][i] = (g == 2) ? 32767 : (g == 3) ? -32768 : int'($urandom % 60000) - 30000;
      clear = 1;
      @(negedge clk);
      clear = 0;
      // unit k streams nodes k, k + P_NODE, ...
      for (int b = 0; b < nn; b += P_NODE)
        for (int s = 0; s < DIM; s += P_APPLY) begin
          for (int k = 0; k < P_NODE; k++) begin
            in_valid[k] = (b + k < nn);
            in_idx[k] = 16'(s);
            for (int p = 0; p < P_APPLY; p++) in_data[k][p] = (b + k < nn) ? data_t'(X[b+k][s+p]) : '0;
          end
          @(negedge clk);
          for (int k = 0; k < P_NODE; k++) in_valid[k] = 0;
          if ($urandom % 3 == 0) @(negedge clk);
        end
      num_nodes = (NODE_W+1)'(nn);
      finish = 1;
      @(negedge clk);
      finish = 0;
      dot = 0;
      for (int o = 0; o < DIM; o++) begin
        longint cs;
        cs = 0;
        for (int n = 0; n < nn; n++) cs += X[n][o];
        dot += longint'(HW[o]) * cs;
      end
      q = dot / nn;   // truncates toward zero
      expv = (q >>> 8) + HB;
      while (!res_valid) @(negedge clk);
      checks++;
      if (longint'(res_data) != expv) begin failures++; $display("graph %0d: %0d expected %0d", g, res_data, expv); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("head still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
