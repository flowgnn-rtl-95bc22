// tb_weight_buffer: loads random weights, biases and epsilons through the
// host port and reads every column block back.
`timescale 1ns/1ps
module tb_weight_buffer;
  import flowgnn_pkg::*;
  localparam int DIM = 6, LAYERS = 3, P_APPLY = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ld_valid = 0;
  load_t ld;
  logic [3:0] rd_layer;
  logic [15:0] rd_col;
  data_t rd_w [P_APPLY][DIM];
  data_t rd_bias [DIM];
  data_t rd_eps;
  int W [LAYERS][DIM][DIM], B [LAYERS][DIM], E [LAYERS];
  int checks = 0, failures = 0;

  weight_buffer #(.DIM(DIM), .LAYERS(LAYERS), .P_APPLY(P_APPLY)) dut (.*);

  task automatic put(load_sel_e s, int l, int r, int c, int d);
    @(negedge clk);
    ld_valid = 1; ld.sel = s; ld.layer = 4'(l); ld.row = 16'(r); ld.col = 16'(c); ld.data = data_t'(d);
    @(negedge clk);
    ld_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LAYERS; l++) begin
      E[l] = int'($urandom % 2000) - 1000; put(LD_EPS, l, 0, 0, E[l]);
      for (int o = 0; o < DIM; o++) begin
        B[l][o] = int'($urandom % 60000) - 30000; put(LD_BIAS, l, o, 0, B[l][o]);
        for (int i = 0; i < DIM; i++) begin
          W[l][o][i] = int'($urandom % 60000) - 30000; put(LD_WEIGHT, l, o, i, W[l][o][i]);
        end
      end
    end
    // a write to another table must not disturb the weights
    put(LD_EDGE, 0, 0, 0, 123);
    for (int l = 0; l < LAYERS; l++)
      for (int c = 0; c < DIM; c += P_APPLY) begin
        @(negedge clk);
        rd_layer = 4'(l); rd_col = 16'(c);
        #1;
        for (int p = 0; p < P_APPLY; p++)
          for (int o = 0; o < DIM; o++) begin
            checks++;
            if (int'(rd_w[p][o]) != W[l][o][c+p]) begin failures++; $display("W[%0d][%0d][%0d]", l, o, c+p); end
          end
        for (int o = 0; o < DIM; o++) begin
          checks++;
          if (int'(rd_bias[o]) != B[l][o]) failures++;
        end
        checks++;
        if (int'(rd_eps) != E[l]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
