// message_buffer: the two message buffers of the dataflow architecture,
// each split into P_edge banks, one per MP unit.
//
// The buffers alternate between layers: while one is read by the NT units
// (the aggregated messages m^l of the current layer) the other is being
// accumulated by the MP units (the messages for the next layer). wsel
// names the buffer being accumulated. Node d's message lives in bank
// d mod P_edge at word (d / P_edge) * DIM/P_scatter + e / P_scatter, one word
// holding P_scatter 24-bit elements.
//
// Write side: MP unit b performs one read-modify-write per cycle on its own
// bank, adding P_scatter new message elements to the stored partial sum
// (scatter and gather merged). Read side: each NT unit reads P_apply
// elements of its node from the other buffer and, with rd_clear, zeroes the
// word once its last element has been read, so the buffer is empty again
// when it becomes the accumulation target of the next layer. The units of
// a batch hold consecutive nodes, so with P_node <= P_edge they always hit
// different banks (checked by an assertion). Read-and-clear, the
// interleaved bank assignment and the init sweep after reset (clear_busy)
// are this design's choices. Requires P_scatter to be a multiple of
// P_apply.
//
// Timing: combinational reads, writes at the next edge, so back-to-back
// read-modify-writes of the same word see each other.
module message_buffer
  import flowgnn_pkg::*;
#(
  parameter int P_NODE    = flowgnn_pkg::CFG_P_NODE,
  parameter int P_EDGE    = flowgnn_pkg::CFG_P_EDGE,
  parameter int DIM       = flowgnn_pkg::CFG_DIM,
  parameter int P_APPLY   = flowgnn_pkg::CFG_P_APPLY,
  parameter int P_SCATTER = flowgnn_pkg::CFG_P_SCATTER,
  parameter int MAX_NODES = flowgnn_pkg::CFG_MAX_NODES,
  parameter int NODE_W    = $clog2(flowgnn_pkg::CFG_MAX_NODES),
  parameter int LNODE_W   = $clog2(flowgnn_pkg::CFG_MAX_NODES / flowgnn_pkg::CFG_P_EDGE)
) (
  input  logic   clk,
  input  logic   rst,            // starts the clearing sweep
  output logic   clear_busy,
  input  logic   wsel,           // buffer accumulated by the MP units
  // MP unit b: accumulate into its bank of buffer wsel
  input  logic   mp_en    [P_EDGE],
  input  logic [LNODE_W-1:0] mp_lnode [P_EDGE],  // destination node / P_edge
  input  logic [15:0] mp_word [P_EDGE],          // element index / P_scatter
  input  msg_t   mp_add   [P_EDGE][P_SCATTER],
  // NT unit k: read (and clear) from buffer !wsel
  input  logic   rd_en    [P_NODE],
  input  logic   rd_clear [P_NODE],
  input  logic [NODE_W-1:0] rd_node [P_NODE],
  input  logic [15:0] rd_idx [P_NODE],            // element index
  output msg_t   rd_data  [P_NODE][P_APPLY]
);
  localparam int WPN   = DIM / P_SCATTER;          // words per node
  localparam int WORDS = (MAX_NODES / P_EDGE) * WPN;
  localparam int AW    = $clog2(WORDS);
  localparam int WW    = P_SCATTER * MSG_W;

  logic [WW-1:0] mem [2][P_EDGE][WORDS];

  logic [AW-1:0] sweep;

  function automatic logic [AW-1:0] rd_addr(input logic [NODE_W-1:0] n, input logic [15:0] idx);
    return AW'((32'(n) / P_EDGE) * WPN + 32'(idx) / P_SCATTER);
  endfunction

  // ---- NT read -----------------------------------------------------------
  always_comb begin
    for (int k = 0; k < P_NODE; k++) begin
      logic [WW-1:0] w;
      w = mem[!wsel][32'(rd_node[k]) % P_EDGE][rd_addr(rd_node[k], rd_idx[k])];
      for (int p = 0; p < P_APPLY; p++)
        rd_data[k][p] = msg_t'(w[((32'(rd_idx[k]) % P_SCATTER) + p) * MSG_W +: MSG_W]);
    end
  end

  // ---- writes ------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      clear_busy <= 1'b1;
      sweep      <= '0;
    end else if (clear_busy) begin
      for (int b = 0; b < P_EDGE; b++) begin
        mem[0][b][sweep] <= '0;
        mem[1][b][sweep] <= '0;
      end
      sweep <= sweep + 1'b1;
      if (32'(sweep) == WORDS - 1) clear_busy <= 1'b0;
    end else begin
      for (int b = 0; b < P_EDGE; b++) begin
        // accumulation target
        if (mp_en[b]) begin
          logic [WW-1:0] old_w, new_w;
          old_w = mem[wsel][b][AW'(32'(mp_lnode[b]) * WPN + 32'(mp_word[b]))];
          for (int s = 0; s < P_SCATTER; s++)
            new_w[s*MSG_W +: MSG_W] = old_w[s*MSG_W +: MSG_W] + mp_add[b][s];
          mem[wsel][b][AW'(32'(mp_lnode[b]) * WPN + 32'(mp_word[b]))] <= new_w;
        end
        // read-and-clear of the source buffer
        for (int k = 0; k < P_NODE; k++) begin
          if (rd_en[k] && rd_clear[k] && (32'(rd_node[k]) % P_EDGE == b) &&
              ((32'(rd_idx[k]) % P_SCATTER) + P_APPLY == P_SCATTER))
            mem[!wsel][b][rd_addr(rd_node[k], rd_idx[k])] <= '0;
        end
      end
    end
  end

  // units of one batch must read different banks
  for (genvar k = 0; k < P_NODE; k++) begin : g_chk
    for (genvar j = k + 1; j < P_NODE; j++) begin : g_pair
      a_bank_conflict: assert property (@(posedge clk) disable iff (rst)
        (rd_en[k] && rd_en[j]) |-> (32'(rd_node[k]) % P_EDGE != 32'(rd_node[j]) % P_EDGE));
    end
  end
endmodule
