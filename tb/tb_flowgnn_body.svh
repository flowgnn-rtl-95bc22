// Body shared by the end-to-end testbenches of flowgnn_top. The including
// module defines the localparams P_NODE, P_EDGE, P_APPLY, P_SCATTER, DIM,
// LAYERS, MAX_NODES, MAX_EDGES, EATTR_W, NGRAPHS, GRAPH_NODES, GRAPH_EDGES,
// LIMIT and instantiates the top as "dut" on the signals declared here.
//
// The testbench loads random parameters, then runs NGRAPHS random graphs
// back to back. For every graph it computes the GIN result with a plain
// integer model written from the equations (no code shared with the RTL),
// compares the accelerator's output and also compares every final node
// embedding inside the node embedding buffer. It counts how often each
// mechanism of the architecture occurred and fails if one never did.

  localparam int NODE_W = $clog2(MAX_NODES);
  localparam int EDGE_W = $clog2(MAX_EDGES + 1);
  localparam int CATS   = 1 << EATTR_W;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic   ld_valid = 1'b0;
  load_t  ld;
  logic   x_ld_valid = 1'b0;
  logic [NODE_W-1:0] x_ld_node;
  logic [15:0]       x_ld_idx;
  data_t  x_ld_data [P_APPLY];
  logic   g_ready, g_start = 1'b0;
  logic [NODE_W:0]   g_num_nodes;
  logic [EDGE_W-1:0] g_num_edges;
  logic              e_valid = 1'b0;
  logic [NODE_W-1:0] e_src, e_dst;
  logic [EATTR_W-1:0] e_attr;
  logic              e_ready;
  logic              res_valid;
  logic signed [31:0] res_data;
  logic              busy;

  int checks = 0, failures = 0;

  // ---- reference model state ----------------------------------------------
  int W   [LAYERS][DIM][DIM];
  int BI  [LAYERS][DIM];
  int EPS [LAYERS];
  int EE  [LAYERS][CATS][DIM];
  int HW  [DIM];
  int HB;
  int X   [MAX_NODES][DIM];
  int XN  [MAX_NODES][DIM];
  int M   [MAX_NODES][DIM];
  int es [MAX_EDGES], ed [MAX_EDGES], ea [MAX_EDGES];

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int wrap24(longint v);
    longint r;
    r = v & 64'hFFFFFF;
    if (r >= 64'h800000) r = r - 64'h1000000;
    return int'(r);
  endfunction
  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // messages of layer l from embeddings X
  function automatic void model_scatter(int l, int nn, int ne);
    for (int n = 0; n < nn; n++) for (int i = 0; i < DIM; i++) M[n][i] = 0;
    for (int e = 0; e < ne; e++)
      for (int i = 0; i < DIM; i++) begin
        int v;
        v = sat16(longint'(X[es[e]][i]) + EE[l][ea[e]][i]);
        if (v < 0) v = 0;
        M[ed[e]][i] = wrap24(longint'(M[ed[e]][i]) + v);
      end
  endfunction

  function automatic int model_graph(int nn, int ne);
    longint dot, q;
    model_scatter(0, nn, ne);
    for (int l = 0; l < LAYERS; l++) begin
      for (int n = 0; n < nn; n++) begin
        int h [DIM];
        for (int i = 0; i < DIM; i++)
          h[i] = sat16(longint'(X[n][i]) + ((longint'(EPS[l]) * X[n][i]) >>> 8) + M[n][i]);
        for (int o = 0; o < DIM; o++) begin
          longint acc;
          int y;
          acc = 0;
          for (int i = 0; i < DIM; i++) acc += longint'(W[l][o][i]) * h[i];
          y = sat16((acc >>> 8) + BI[l][o]);
          if (l < LAYERS - 1 && y < 0) y = 0;
          XN[n][o] = y;
        end
      end
      for (int n = 0; n < nn; n++) for (int i = 0; i < DIM; i++) X[n][i] = XN[n][i];
      if (l < LAYERS - 1) model_scatter(l + 1, nn, ne);
    end
    dot = 0;
    for (int o = 0; o < DIM; o++) begin
      int cs;
      cs = 0;
      for (int n = 0; n < nn; n++) cs += X[n][o];
      dot += longint'(HW[o]) * cs;
    end
    q = dot / nn;
    return int'(q >>> 8) + HB;
  endfunction

  // ---- host side ----------------------------------------------------------------
  task automatic put(load_sel_e sel, int layer, int row, int col, int data);
    @(negedge clk);
    ld_valid <= 1'b1;
    ld.sel   <= sel;
    ld.layer <= 4'(layer);
    ld.row   <= 16'(row);
    ld.col   <= 16'(col);
    ld.data  <= data_t'(data);
    @(negedge clk);
    ld_valid <= 1'b0;
  endtask

  // ---- mechanism counters -----------------------------------------------------------
  int n_multicast = 0, n_blocked = 0, n_qfull = 0, n_rebatch = 0, n_pingpong = 0;
  int n_overlap = 0, n_drop = 0, n_clear = 0, n_identity = 0, n_layer = 0, n_last = 0;
  longint cycles = 0;
  always @(posedge clk) if (!rst) begin
    cycles++;
    if (dut.u_adapter.ev_multicast) n_multicast++;
    if (dut.u_adapter.ev_blocked) n_blocked++;
    if (dut.q_full[0] || dut.q_full[1] || dut.q_full[2] || dut.q_full[3]) n_qfull++;
    if (P_APPLY != P_SCATTER && dut.u_adapter.cnt[0] != 0 && 32'(dut.u_adapter.cnt[0]) < P_SCATTER) n_rebatch++;
    if (dut.u_nt.g_unit[0].u_nt.full_q[0] && dut.u_nt.g_unit[0].u_nt.full_q[1]) n_pingpong++;
    if (dut.nt_busy && (dut.mp_busy[0] || dut.mp_busy[1] || dut.mp_busy[2] || dut.mp_busy[3])) n_overlap++;
    if (dut.u_adapter.grant[0] && dut.u_adapter.mask[0] == '0) n_drop++;
    if (dut.m_clear[0]) n_clear++;
    if (dut.nt_start && dut.start_mode == NT_IDENTITY) n_identity++;
    if (dut.nt_start && dut.start_mode == NT_LAYER) n_layer++;
    if (dut.nt_start && dut.start_mode == NT_LAST) n_last++;
  end

  initial begin
    repeat (LIMIT) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nn, ne, expect_y;
    longint t0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    // parameters
    for (int l = 0; l < LAYERS; l++) begin
      EPS[l] = rnd(-64, 64);
      put(LD_EPS, l, 0, 0, EPS[l]);
      for (int o = 0; o < DIM; o++) begin
        BI[l][o] = rnd(-50, 50);
        put(LD_BIAS, l, o, 0, BI[l][o]);
        for (int i = 0; i < DIM; i++) begin
          W[l][o][i] = rnd(-40, 40);
          put(LD_WEIGHT, l, o, i, W[l][o][i]);
        end
      end
      for (int c = 0; c < CATS; c++)
        for (int i = 0; i < DIM; i++) begin
          EE[l][c][i] = rnd(-100, 100);
          put(LD_EDGE, l, c, i, EE[l][c][i]);
        end
    end
    for (int o = 0; o < DIM; o++) begin
      HW[o] = rnd(-60, 60);
      put(LD_HEAD_W, 0, 0, o, HW[o]);
    end
    HB = rnd(-100, 100);
    put(LD_HEAD_B, 0, 0, 0, HB);

    for (int g = 0; g < NGRAPHS; g++) begin
      nn = GRAPH_NODES - (g % 2) * 3;
      ne = GRAPH_EDGES - (g % 2) * 5;
      // node 0 keeps no out-edge so that a chunk is dropped by the adapter
      for (int e = 0; e < ne; e++) begin
        es[e] = rnd(1, nn - 1);
        ed[e] = rnd(0, nn - 1);
        ea[e] = rnd(0, CATS - 1);
      end
      // a hub node feeding every other node (virtual-node-like fan-out)
      for (int e = 0; e < ne && e < nn - 1; e++) begin
        es[e] = 1;
        ed[e] = (e + 2) % nn;
      end
      // input embeddings
      for (int n = 0; n < nn; n++)
        for (int i = 0; i < DIM; i += P_APPLY) begin
          @(negedge clk);
          x_ld_valid <= 1'b1;
          x_ld_node  <= NODE_W'(n);
          x_ld_idx   <= 16'(i);
          for (int p = 0; p < P_APPLY; p++) begin
            X[n][i+p] = rnd(-200, 200);
            x_ld_data[p] <= data_t'(X[n][i+p]);
          end
        end
      @(negedge clk);
      x_ld_valid <= 1'b0;
      expect_y = model_graph(nn, ne);

      while (!g_ready) @(negedge clk);
      t0 = cycles;
      g_start     <= 1'b1;
      g_num_nodes <= (NODE_W+1)'(nn);
      g_num_edges <= EDGE_W'(ne);
      @(negedge clk);
      g_start <= 1'b0;
      for (int e = 0; e < ne; e++) begin
        e_valid <= 1'b1;
        e_src   <= NODE_W'(es[e]);
        e_dst   <= NODE_W'(ed[e]);
        e_attr  <= EATTR_W'(ea[e]);
        #1;
        while (!e_ready) @(negedge clk);
        @(negedge clk);
      end
      e_valid <= 1'b0;
      while (!res_valid) @(negedge clk);
      checks++;
      if (res_data !== expect_y) begin
        failures++;
        $display("graph %0d: result %0d expected %0d", g, res_data, expect_y);
      end
      // final embeddings in the node embedding buffer
      for (int n = 0; n < nn; n++)
        for (int i = 0; i < DIM; i++) begin
          logic [P_APPLY*DATA_W-1:0] w;
          int v;
          w = dut.u_xbuf.mem[n % P_NODE][(n / P_NODE) * (DIM / P_APPLY) + i / P_APPLY];
          v = int'(data_t'(w[(i % P_APPLY) * DATA_W +: DATA_W]));
          checks++;
          if (v != X[n][i]) begin
            failures++;
            if (failures < 10) $display("graph %0d node %0d elem %0d: %0d expected %0d", g, n, i, v, X[n][i]);
          end
        end
      $display("graph %0d: %0d nodes %0d edges, result %0d, %0d cycles", g, nn, ne, res_data, cycles - t0);
    end

    $display("events: multicast=%0d blocked=%0d queue_full=%0d rebatch=%0d pingpong=%0d nt_mp_overlap=%0d drop=%0d clear=%0d identity=%0d layer=%0d last=%0d",
             n_multicast, n_blocked, n_qfull, n_rebatch, n_pingpong, n_overlap, n_drop, n_clear, n_identity, n_layer, n_last);
    checks++; if (n_multicast == 0) begin failures++; $display("no multicast"); end
    checks++; if (n_blocked == 0)   begin failures++; $display("adapter never stalled"); end
    checks++; if (n_qfull == 0)     begin failures++; $display("no queue ever full"); end
    if (P_APPLY != P_SCATTER) begin
      checks++; if (n_rebatch == 0) begin failures++; $display("no re-batching"); end
    end
    checks++; if (n_pingpong == 0)  begin failures++; $display("ping-pong buffers never both full"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("NT and MP never overlapped"); end
    checks++; if (n_drop == 0)      begin failures++; $display("no chunk dropped"); end
    checks++; if (n_clear == 0)     begin failures++; $display("no message read-and-clear"); end
    checks++; if (n_identity != NGRAPHS || n_last != NGRAPHS || n_layer != NGRAPHS * (LAYERS - 1)) begin
      failures++; $display("wrong pass sequence");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
