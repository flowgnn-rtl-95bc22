// tb_edge_embedding_table: loads random per-layer edge embeddings and
// reads them back through all MP read ports at once, for every layer.
`timescale 1ns/1ps
module tb_edge_embedding_table;
  import flowgnn_pkg::*;
  localparam int P_EDGE = 3, DIM = 6, P_SCATTER = 3, LAYERS = 2, EATTR_W = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ld_valid = 0;
  load_t ld;
  logic [3:0] layer;
  logic [EATTR_W-1:0] rd_attr [P_EDGE];
  logic [15:0] rd_word [P_EDGE];
  data_t rd_data [P_EDGE][P_SCATTER];
  int E [LAYERS][4][DIM];
  int checks = 0, failures = 0;

  edge_embedding_table #(.P_EDGE(P_EDGE), .DIM(DIM), .P_SCATTER(P_SCATTER), .LAYERS(LAYERS), .EATTR_W(EATTR_W)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LAYERS; l++)
      for (int a = 0; a < 4; a++)
        for (int i = 0; i < DIM; i++) begin
          E[l][a][i] = int'($urandom % 60000) - 30000;
          @(negedge clk);
          ld_valid = 1; ld.sel = LD_EDGE; ld.layer = 4'(l); ld.row = 16'(a); ld.col = 16'(i); ld.data = data_t'(E[l][a][i]);
        end
    @(negedge clk);
    ld_valid = 1; ld.sel = LD_WEIGHT; ld.layer = 0; ld.row = 0; ld.col = 0; ld.data = 16'h5555;  // ignored
    @(negedge clk);
    ld_valid = 0;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      layer = 4'($urandom % LAYERS);
      for (int b = 0; b < P_EDGE; b++) begin
        rd_attr[b] = EATTR_W'($urandom);
        rd_word[b] = 16'($urandom % (DIM / P_SCATTER));
      end
      #1;
      for (int b = 0; b < P_EDGE; b++)
        for (int s = 0; s < P_SCATTER; s++) begin
          checks++;
          if (int'(rd_data[b][s]) != E[layer][rd_attr[b]][rd_word[b]*P_SCATTER + s]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
