// edge_embedding_table: per-layer edge embeddings looked up by edge
// attribute, read by the MP units while they compute messages.
//
// Molecular graphs carry categorical edge features (bond type and the
// like), so the edge embedding of layer l is a learned vector per edge
// category: e = E[l][attr]. Each MP unit reads the P_scatter elements that
// match the node-embedding chunk it is processing. The paper places edge
// embedding inside message passing and draws an edge attribute table;
// the lookup form, 2^EATTR_W categories and one read port per MP unit are
// this design's choices.
//
// Interface: host writes one element (sel LD_EDGE: row = attribute,
// col = element). Reads are combinational: rd_data[b][s] =
// E[layer][rd_attr[b]][rd_word[b]*P_scatter + s].
module edge_embedding_table
  import flowgnn_pkg::*;
#(
  parameter int P_EDGE    = flowgnn_pkg::CFG_P_EDGE,
  parameter int DIM       = flowgnn_pkg::CFG_DIM,
  parameter int P_SCATTER = flowgnn_pkg::CFG_P_SCATTER,
  parameter int LAYERS    = flowgnn_pkg::CFG_LAYERS,
  parameter int EATTR_W   = flowgnn_pkg::CFG_EATTR_W
) (
  input  logic  clk,
  input  logic  ld_valid,
  input  load_t ld,
  input  logic [3:0] layer,
  input  logic [EATTR_W-1:0] rd_attr [P_EDGE],
  input  logic [15:0]        rd_word [P_EDGE],
  output data_t rd_data [P_EDGE][P_SCATTER]
);
  localparam int CATS  = 1 << EATTR_W;
  localparam int WPE   = DIM / P_SCATTER;
  localparam int WORDS = LAYERS * CATS * WPE;
  localparam int AW    = $clog2(WORDS);

  logic [P_SCATTER*DATA_W-1:0] mem [WORDS];

  logic [AW-1:0] ld_addr;
  assign ld_addr = AW'((32'(ld.layer) * CATS + 32'(ld.row)) * WPE + 32'(ld.col) / P_SCATTER);

  always_ff @(posedge clk) begin
    if (ld_valid && ld.sel == LD_EDGE)
      mem[ld_addr][(32'(ld.col) % P_SCATTER) * DATA_W +: DATA_W] <= ld.data;
  end

  always_comb begin
    for (int b = 0; b < P_EDGE; b++) begin
      logic [P_SCATTER*DATA_W-1:0] w;
      w = mem[AW'((32'(layer) * CATS + 32'(rd_attr[b])) * WPE + 32'(rd_word[b]))];
      for (int s = 0; s < P_SCATTER; s++) rd_data[b][s] = data_t'(w[s*DATA_W +: DATA_W]);
    end
  end
endmodule
