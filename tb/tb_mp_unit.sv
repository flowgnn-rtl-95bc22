// tb_mp_unit: the testbench plays the CSR table, the edge embedding table,
// the message bank and a first-word-fall-through queue of chunks. It
// accumulates everything the unit writes and compares with the messages
// computed from the edge list, and checks one edge per cycle: the run
// takes exactly (edges walked + chunks without edges) cycles.
`timescale 1ns/1ps
module tb_mp_unit;
  import flowgnn_pkg::*;
  localparam int P_SCATTER = 2, EATTR_W = 2, NODE_W = 4, LNODE_W = 4, EDGE_W = 6;
  localparam int NN = 8, DIM = 4, WPN = DIM / P_SCATTER;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic q_empty, q_pop;
  logic [NODE_W-1:0] q_node;
  logic [15:0] q_word;
  data_t q_data [P_SCATTER];
  logic [NODE_W-1:0] csr_node;
  logic [EDGE_W-1:0] csr_start, csr_end, csr_ptr;
  logic [LNODE_W-1:0] csr_lnode;
  logic [EATTR_W-1:0] csr_attr;
  logic [EATTR_W-1:0] ee_attr;
  logic [15:0] ee_word;
  data_t ee_data [P_SCATTER];
  logic msg_en, busy;
  logic [LNODE_W-1:0] msg_lnode;
  logic [15:0] msg_word;
  msg_t msg_add [P_SCATTER];

  mp_unit #(.P_SCATTER(P_SCATTER), .EATTR_W(EATTR_W), .NODE_W(NODE_W), .LNODE_W(LNODE_W), .EDGE_W(EDGE_W)) dut (.*);

  // graph in CSR form (this bank only)
  int rs [NN+1], col_d [64], col_a [64];
  int EE [4][DIM];
  int X [NN][DIM];
  int MREF [NN][DIM], MGOT [NN][DIM];
  // chunk queue
  int qn [64], qw [64];
  int head, tail;
  int checks = 0, failures = 0;

  assign q_empty = (head == tail);
  always_comb begin
    q_node = q_empty ? '0 : NODE_W'(qn[head]);
    q_word = q_empty ? '0 : 16'(qw[head]);
    for (int s = 0; s < P_SCATTER; s++) q_data[s] = q_empty ? '0 : data_t'(X[qn[head]][qw[head]*P_SCATTER + s]);
    csr_start = EDGE_W'(rs[csr_node]);
    csr_end   = EDGE_W'(rs[csr_node + 1]);
    csr_lnode = LNODE_W'(col_d[csr_ptr]);
    csr_attr  = EATTR_W'(col_a[csr_ptr]);
    for (int s = 0; s < P_SCATTER; s++) ee_data[s] = data_t'(EE[ee_attr][ee_word*P_SCATTER + s]);
  end

  int cycles_busy = 0;
  always @(posedge clk) if (!rst) begin
    if (msg_en) for (int s = 0; s < P_SCATTER; s++) MGOT[msg_lnode][msg_word*P_SCATTER + s] += int'(msg_add[s]);
    if (!q_empty) cycles_busy++;
    if (q_pop) head <= head + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, expect_cycles;
    head = 0; tail = 0;
    // random CSR: node n has 0..4 edges, node 3 none
    p = 0;
    for (int n = 0; n < NN; n++) begin
      int deg;
      rs[n] = p;
      deg = (n == 3) ? 0 : int'($urandom % 5);
      for (int j = 0; j < deg; j++) begin col_d[p] = int'($urandom % NN); col_a[p] = int'($urandom % 4); p++; end
    end
    rs[NN] = p;
    for (int a = 0; a < 4; a++) for (int i = 0; i < DIM; i++) EE[a][i] = int'($urandom % 400) - 200;
    for (int n = 0; n < NN; n++) for (int i = 0; i < DIM; i++) begin
      X[n][i] = int'($urandom % 400) - 200; MREF[n][i] = 0; MGOT[n][i] = 0;
    end
    // reference messages and expected time
    expect_cycles = 0;
    for (int n = 0; n < NN; n++)
      for (int w = 0; w < WPN; w++) begin
        expect_cycles += (rs[n+1] == rs[n]) ? 1 : rs[n+1] - rs[n];
        for (int e = rs[n]; e < rs[n+1]; e++)
          for (int s = 0; s < P_SCATTER; s++) begin
            int v;
            v = X[n][w*P_SCATTER+s] + EE[col_a[e]][w*P_SCATTER+s];
            if (v < 0) v = 0;
            MREF[col_d[e]][w*P_SCATTER+s] += v;
          end
      end
    repeat (2) @(negedge clk);
    rst = 0;
    // chunks of all nodes, interleaved word-major as two NT units would
    for (int w = 0; w < WPN; w++)
      for (int n = 0; n < NN; n++) begin qn[tail] = n; qw[tail] = w; tail++; end
    #1;
    while (!q_empty) @(negedge clk);
    @(negedge clk);
    for (int n = 0; n < NN; n++) for (int i = 0; i < DIM; i++) begin
      checks++;
      if (MGOT[n][i] != MREF[n][i]) begin failures++; $display("msg[%0d][%0d] = %0d expected %0d", n, i, MGOT[n][i], MREF[n][i]); end
    end
    checks++;
    if (cycles_busy != expect_cycles) begin failures++; $display("%0d cycles, expected %0d", cycles_busy, expect_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
