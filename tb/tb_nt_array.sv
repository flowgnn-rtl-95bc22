// tb_nt_array: two NT units (DIM 6, P_apply 2) run one pass per mode over a
// graph with an odd node count, reading embeddings and messages from
// testbench arrays. Each output element must appear exactly once with the
// GIN value h = (1+eps)x + m followed by the FC layer; the write-back
// stream must carry the same values (none in identity mode), every
// message element must be read-and-cleared once per layer pass, and done
// must pulse once per pass after the last output.
`timescale 1ns/1ps
module tb_nt_array;
  import flowgnn_pkg::*;
  localparam int P_NODE = 2, DIM = 6, P_APPLY = 2, NODE_W = 3, NN = 7;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, busy, done;
  nt_mode_e mode;
  logic [NODE_W:0] num_nodes;
  logic [NODE_W-1:0] x_node [P_NODE];
  logic [15:0] x_idx [P_NODE];
  data_t x_data [P_NODE][P_APPLY];
  logic m_en [P_NODE], m_clear [P_NODE];
  logic [NODE_W-1:0] m_node [P_NODE];
  logic [15:0] m_idx [P_NODE];
  msg_t m_data [P_NODE][P_APPLY];
  logic [15:0] w_col;
  data_t w_data [P_APPLY][DIM];
  data_t bias [DIM];
  data_t eps;
  logic out_valid [P_NODE], out_ready [P_NODE], out_last [P_NODE];
  logic [NODE_W-1:0] out_node [P_NODE];
  logic [15:0] out_idx [P_NODE];
  data_t out_data [P_NODE][P_APPLY];
  logic wb_en [P_NODE];
  logic [NODE_W-1:0] wb_node [P_NODE];
  logic [15:0] wb_idx [P_NODE];
  data_t wb_data [P_NODE][P_APPLY];

  nt_array #(.P_NODE(P_NODE), .DIM(DIM), .P_APPLY(P_APPLY), .NODE_W(NODE_W)) dut (.*);

  int W [DIM][DIM], B [DIM], EPS;
  int X [NN][DIM], M [NN][DIM], Y [NN][DIM];
  int seen [NN][DIM], wbs [NN][DIM], clr [NN][DIM];
  int n_done = 0, checks = 0, failures = 0;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  always_comb begin
    for (int k = 0; k < P_NODE; k++)
      for (int p = 0; p < P_APPLY; p++) begin
        x_data[k][p] = (int'(x_node[k]) < NN) ? data_t'(X[x_node[k]][x_idx[k] + p]) : '0;
        m_data[k][p] = (int'(m_node[k]) < NN) ? msg_t'(M[m_node[k]][m_idx[k] + p]) : '0;
      end
    for (int p = 0; p < P_APPLY; p++)
      for (int o = 0; o < DIM; o++) w_data[p][o] = data_t'(W[o][w_col + p]);
    for (int o = 0; o < DIM; o++) bias[o] = data_t'(B[o]);
    eps = data_t'(EPS);
  end

  always @(posedge clk) if (!rst) begin
    if (done) n_done++;
    for (int k = 0; k < P_NODE; k++) begin
      out_ready[k] <= ($urandom % 3 != 0);
      if (m_en[k] && m_clear[k]) for (int p = 0; p < P_APPLY; p++) clr[m_node[k]][m_idx[k] + p]++;
      if (out_valid[k] && out_ready[k]) begin
        checks++;
        if (int'(out_node[k]) % P_NODE != k) begin failures++; $display("node %0d on unit %0d", out_node[k], k); end
        for (int p = 0; p < P_APPLY; p++) begin
          seen[out_node[k]][out_idx[k] + p]++;
          checks++;
          if (int'(out_data[k][p]) != Y[out_node[k]][out_idx[k] + p]) begin
            failures++; $display("node %0d elem %0d = %0d expected %0d", out_node[k], out_idx[k] + p, out_data[k][p], Y[out_node[k]][out_idx[k] + p]);
          end
        end
      end
      if (wb_en[k]) for (int p = 0; p < P_APPLY; p++) begin
        wbs[wb_node[k]][wb_idx[k] + p]++;
        checks++;
        if (int'(wb_data[k][p]) != Y[wb_node[k]][wb_idx[k] + p]) begin failures++; $display("write-back mismatch"); end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; mode = NT_IDENTITY; num_nodes = NN;
    for (int k = 0; k < P_NODE; k++) out_ready[k] = 0;
    for (int o = 0; o < DIM; o++) begin
      B[o] = int'($urandom % 2000) - 1000;
      for (int i = 0; i < DIM; i++) W[o][i] = int'($urandom % 1024) - 512;
    end
    EPS = int'($urandom % 256) - 128;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int pass = 0; pass < 3; pass++) begin
      nt_mode_e md;
      md = (pass == 0) ? NT_IDENTITY : (pass == 1) ? NT_LAYER : NT_LAST;
      for (int n = 0; n < NN; n++) begin
        for (int i = 0; i < DIM; i++) begin
          X[n][i] = int'($urandom % 4000) - 2000;
          M[n][i] = int'($urandom % 8000) - 4000;
          seen[n][i] = 0; wbs[n][i] = 0; clr[n][i] = 0;
        end
        for (int o = 0; o < DIM; o++) begin
          longint a;
          int y;
          a = 0;
          for (int i = 0; i < DIM; i++) begin
            int h;
            h = sat16(longint'(X[n][i]) + ((longint'(EPS) * X[n][i]) >>> 8) + M[n][i]);
            a += longint'(W[o][i]) * h;
          end
          if (md == NT_IDENTITY) y = X[n][o];
          else begin
            y = sat16((a >>> 8) + B[o]);
            if (md == NT_LAYER && y < 0) y = 0;
          end
          Y[n][o] = y;
        end
      end
      n_done = 0;
      @(negedge clk);
      mode = md; start = 1;
      @(negedge clk);
      start = 0;
      while (n_done == 0) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (n_done != 1 || busy) begin failures++; $display("pass %0d: done pulses %0d, busy %0d", pass, n_done, busy); end
      for (int n = 0; n < NN; n++) for (int i = 0; i < DIM; i++) begin
        checks++;
        if (seen[n][i] != 1 || wbs[n][i] != ((md == NT_IDENTITY) ? 0 : 1) || clr[n][i] != ((md == NT_IDENTITY) ? 0 : 1)) begin
          failures++; $display("pass %0d node %0d elem %0d: out %0d wb %0d clear %0d", pass, n, i, seen[n][i], wbs[n][i], clr[n][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
