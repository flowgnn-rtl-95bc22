// tb_graph_loader: streams random COO graphs (with stalls on the valid
// side) and checks the per-bank CSR tables: every edge appears exactly once,
// in the bank of its destination, under its source's row, with the right
// local destination and attribute; bank masks match; load time is
// 2*nodes + 2*edges + a few cycles.
`timescale 1ns/1ps
module tb_graph_loader;
  localparam int P_NODE = 2, P_EDGE = 4, MAX_NODES = 16, MAX_EDGES = 64, EATTR_W = 3;
  localparam int NODE_W = 4, LNODE_W = 2, EDGE_W = 7;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start = 0;
  logic [NODE_W:0] num_nodes;
  logic [EDGE_W-1:0] num_edges;
  logic e_valid = 0;
  logic [NODE_W-1:0] e_src, e_dst;
  logic [EATTR_W-1:0] e_attr;
  logic e_ready, busy, done;
  logic [NODE_W-1:0] rd_node [P_EDGE];
  logic [EDGE_W-1:0] rd_start [P_EDGE], rd_end [P_EDGE], rd_ptr [P_EDGE];
  logic [LNODE_W-1:0] rd_lnode [P_EDGE];
  logic [EATTR_W-1:0] rd_attr [P_EDGE];
  logic [NODE_W-1:0] mask_node [P_NODE];
  logic [P_EDGE-1:0] mask [P_NODE];
  int es [MAX_EDGES], ed [MAX_EDGES], ea [MAX_EDGES];
  int checks = 0, failures = 0;

  graph_loader #(.P_NODE(P_NODE), .P_EDGE(P_EDGE), .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES),
                 .EATTR_W(EATTR_W), .NODE_W(NODE_W), .LNODE_W(LNODE_W), .EDGE_W(EDGE_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int g = 0; g < 4; g++) begin
      int nn, ne, t0, t;
      nn = 5 + int'($urandom % 11);
      ne = 1 + int'($urandom % MAX_EDGES);
      for (int e = 0; e < ne; e++) begin
        es[e] = int'($urandom % nn); ed[e] = int'($urandom % nn); ea[e] = int'($urandom % 8);
      end
      @(negedge clk);
      start = 1; num_nodes = (NODE_W+1)'(nn); num_edges = EDGE_W'(ne);
      @(negedge clk);
      start = 0;
      t0 = 1;
      for (int e = 0; e < ne; e++) begin
        // edge source without gaps on even graphs, with gaps on odd ones
        while ((g % 2) == 1 && $urandom % 2 == 0) begin e_valid = 0; @(negedge clk); t0++; end
        e_valid = 1; e_src = NODE_W'(es[e]); e_dst = NODE_W'(ed[e]); e_attr = EATTR_W'(ea[e]);
        #1;
        while (!e_ready) begin @(negedge clk); t0++; end
        @(negedge clk); t0++;
      end
      e_valid = 0;
      t = t0;
      while (!done) begin @(negedge clk); t++; end
      if (g % 2 == 0) begin
        checks++;
        if (t > 2 * nn + 2 * ne + 6) begin failures++; $display("load took %0d cycles", t); end
      end
      // tables
      for (int b = 0; b < P_EDGE; b++) begin
        for (int n = 0; n < nn; n++) begin
          int cnt_ref, cnt_got;
          bit used [MAX_EDGES];
          for (int e = 0; e < ne; e++) used[e] = 0;
          cnt_ref = 0;
          for (int e = 0; e < ne; e++) if (es[e] == n && ed[e] % P_EDGE == b) cnt_ref++;
          rd_node[b] = NODE_W'(n);
          #1;
          cnt_got = int'(rd_end[b]) - int'(rd_start[b]);
          checks++;
          if (cnt_got != cnt_ref) begin failures++; $display("bank %0d node %0d: %0d edges, expected %0d", b, n, cnt_got, cnt_ref); end
          for (int p = int'(rd_start[b]); p < int'(rd_end[b]); p++) begin
            bit found;
            rd_ptr[b] = EDGE_W'(p);
            #1;
            found = 0;
            for (int e = 0; e < ne; e++)
              if (!found && !used[e] && es[e] == n && ed[e] == int'(rd_lnode[b]) * P_EDGE + b && ea[e] == int'(rd_attr[b])) begin
                used[e] = 1; found = 1;
              end
            checks++;
            if (!found) begin failures++; $display("bank %0d node %0d: unexpected edge", b, n); end
          end
        end
      end
      for (int n = 0; n < nn; n++) begin
        logic [P_EDGE-1:0] m;
        m = '0;
        for (int e = 0; e < ne; e++) if (es[e] == n) m[ed[e] % P_EDGE] = 1'b1;
        mask_node[n % 2] = NODE_W'(n);
        #1;
        checks++;
        if (mask[n % 2] !== m) begin failures++; $display("mask of %0d: %b expected %b", n, mask[n % 2], m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
