// tb_nt_unit: feeds a sequence of nodes (random modes, random gaps between
// accumulate steps) into one NT unit while the consumer drops out_ready at
// random. The output stream is compared element by element with an integer
// model of the fully connected layer (bias, ReLU except after the last
// layer, identity pass-through). The test also requires that accumulate of
// a node overlaps the output of the previous one (ping-pong buffers).
`timescale 1ns/1ps
module tb_nt_unit;
  import flowgnn_pkg::*;
  localparam int DIM = 6, P_APPLY = 2, NODE_W = 4, STEPS = DIM / P_APPLY, NN = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic acc_valid, acc_first, acc_last, acc_ready;
  logic [15:0] acc_idx;
  logic [NODE_W-1:0] acc_node;
  nt_mode_e acc_mode;
  data_t acc_h [P_APPLY];
  data_t acc_w [P_APPLY][DIM];
  data_t bias [DIM];
  logic out_valid, out_ready, out_last, busy;
  logic [NODE_W-1:0] out_node;
  logic [15:0] out_idx;
  nt_mode_e out_mode;
  data_t out_data [P_APPLY];

  nt_unit #(.DIM(DIM), .P_APPLY(P_APPLY), .NODE_W(NODE_W)) dut (.*);

  int W [DIM][DIM];   // W[o][i]
  int B [DIM];
  int H [NN][DIM];
  int Y [NN][DIM];
  nt_mode_e MODE [NN];
  int checks = 0, failures = 0, overlap = 0, onode = 0, oidx = 0;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  always_comb for (int o = 0; o < DIM; o++) bias[o] = data_t'(B[o]);

  always @(posedge clk) if (!rst) begin
    out_ready <= ($urandom % 4 != 0);
    if (acc_valid && out_valid) overlap++;
    if (out_valid && out_ready) begin
      checks++;
      if (int'(out_node) != onode || int'(out_idx) != oidx || out_last != (oidx == DIM - P_APPLY) || out_mode != MODE[onode]) begin
        failures++; $display("stream order: node %0d idx %0d, expected node %0d idx %0d", out_node, out_idx, onode, oidx);
      end
      for (int p = 0; p < P_APPLY; p++) begin
        checks++;
        if (int'(out_data[p]) != Y[onode][oidx + p]) begin
          failures++; $display("node %0d elem %0d = %0d expected %0d", onode, oidx + p, out_data[p], Y[onode][oidx + p]);
        end
      end
      oidx += P_APPLY;
      if (oidx == DIM) begin oidx = 0; onode++; end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 0; acc_valid = 0; acc_first = 0; acc_last = 0; acc_idx = 0; acc_node = 0; acc_mode = NT_LAYER;
    for (int p = 0; p < P_APPLY; p++) begin acc_h[p] = 0; for (int o = 0; o < DIM; o++) acc_w[p][o] = 0; end
    for (int o = 0; o < DIM; o++) begin
      B[o] = int'($urandom % 2000) - 1000;
      for (int i = 0; i < DIM; i++) W[o][i] = int'($urandom % 1024) - 512;
    end
    for (int n = 0; n < NN; n++) begin
      MODE[n] = (n % 5 == 4) ? NT_IDENTITY : (n % 3 == 2) ? NT_LAST : NT_LAYER;
      for (int i = 0; i < DIM; i++) H[n][i] = int'($urandom % 4000) - 2000;
      if (n == 1) for (int i = 0; i < DIM; i++) H[n][i] = (i % 2) ? 32767 : -32768;  // saturation
      for (int o = 0; o < DIM; o++) begin
        longint a;
        int y;
        a = 0;
        for (int i = 0; i < DIM; i++) a += longint'(W[o][i]) * H[n][i];
        if (MODE[n] == NT_IDENTITY) y = H[n][o];
        else begin
          y = sat16((a >>> 8) + B[o]);
          if (MODE[n] == NT_LAYER && y < 0) y = 0;
        end
        Y[n][o] = y;
      end
    end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < NN; n++)
      for (int s = 0; s < STEPS; s++) begin
        @(negedge clk);
        acc_valid = 0;
        while ($urandom % 5 == 0) @(negedge clk);
        while (!acc_ready) @(negedge clk);
        acc_valid = 1; acc_first = (s == 0); acc_last = (s == STEPS - 1);
        acc_idx = 16'(s * P_APPLY); acc_node = NODE_W'(n); acc_mode = MODE[n];
        for (int p = 0; p < P_APPLY; p++) begin
          acc_h[p] = data_t'(H[n][s*P_APPLY + p]);
          for (int o = 0; o < DIM; o++) acc_w[p][o] = data_t'(W[o][s*P_APPLY + p]);
        end
      end
    @(negedge clk);
    acc_valid = 0;
    while (busy) @(negedge clk);
    checks++;
    if (onode != NN) begin failures++; $display("%0d nodes output, expected %0d", onode, NN); end
    checks++;
    if (overlap == 0) begin failures++; $display("accumulate never overlapped output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
