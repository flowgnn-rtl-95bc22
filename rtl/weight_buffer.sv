// weight_buffer: the shared NT weights ("Load Shared Weights" in the
// FlowGNN block diagram), per-layer biases and the GIN epsilon.
//
// All NT units of a batch work in lockstep on the same input position, so
// one read of this buffer serves every unit: the weight columns for the
// P_apply input elements being consumed, W[layer][*][col .. col+P_apply-1],
// are broadcast to all NT units. The buffer is therefore organised by input
// column: one word holds a whole column (DIM weights). Storing column-wise
// for the input-stationary NT unit, single-element host writes and the
// asynchronous read are choices of this design.
//
// Interface: ld_valid/ld write one element (sel LD_WEIGHT: row = output,
// col = input; LD_BIAS: row = output; LD_EPS: layer only). Reads are
// combinational: rd_w[p][o] = W[rd_layer][o][rd_col+p], rd_bias[o] =
// b[rd_layer][o], rd_eps = eps[rd_layer].
module weight_buffer
  import flowgnn_pkg::*;
#(
  parameter int DIM     = flowgnn_pkg::CFG_DIM,
  parameter int LAYERS  = flowgnn_pkg::CFG_LAYERS,
  parameter int P_APPLY = flowgnn_pkg::CFG_P_APPLY
) (
  input  logic   clk,
  input  logic   ld_valid,
  input  load_t  ld,
  input  logic [3:0]  rd_layer,
  input  logic [15:0] rd_col,
  output data_t  rd_w    [P_APPLY][DIM],
  output data_t  rd_bias [DIM],
  output data_t  rd_eps
);
  localparam int WORDS = LAYERS * DIM;
  localparam int AW    = $clog2(WORDS);

  logic [DIM*DATA_W-1:0] wmem [WORDS];   // column-major weights
  logic [DIM*DATA_W-1:0] bmem [LAYERS];  // biases
  data_t                 emem [LAYERS];  // GIN epsilon

  logic [AW-1:0] ld_addr;
  assign ld_addr = AW'(32'(ld.layer) * DIM + 32'(ld.col));

  always_ff @(posedge clk) begin
    if (ld_valid) begin
      unique case (ld.sel)
        LD_WEIGHT: wmem[ld_addr][32'(ld.row)*DATA_W +: DATA_W] <= ld.data;
        LD_BIAS:   bmem[ld.layer][32'(ld.row)*DATA_W +: DATA_W] <= ld.data;
        LD_EPS:    emem[ld.layer] <= ld.data;
        default: ;
      endcase
    end
  end

  logic [DIM*DATA_W-1:0] col_word [P_APPLY];
  logic [DIM*DATA_W-1:0] bias_word;

  always_comb begin
    for (int p = 0; p < P_APPLY; p++) begin
      col_word[p] = wmem[AW'(32'(rd_layer) * DIM + 32'(rd_col) + p)];
      for (int o = 0; o < DIM; o++) rd_w[p][o] = data_t'(col_word[p][o*DATA_W +: DATA_W]);
    end
    bias_word = bmem[rd_layer];
    for (int o = 0; o < DIM; o++) rd_bias[o] = data_t'(bias_word[o*DATA_W +: DATA_W]);
    rd_eps = emem[rd_layer];
  end
endmodule
