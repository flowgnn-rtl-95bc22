// graph_head: graph-level readout, global average pooling followed by one
// linear output layer, as used by the GIN model for graph property
// prediction.
//
// During the last GIN layer the NT units stream the final node embeddings
// here instead of to message passing. Every beat is added into a DIM-wide
// array of 32-bit column sums (beats of all NT units in the same cycle are
// summed together, so the head never stalls NT). When the host side
// controller pulses finish, the head forms
//     dot = sum_o w_o * colsum_o                  (one element per cycle)
//     y   = ((dot / num_nodes) >>> FRAC) + b      (restoring divider,
//                                                  truncates toward zero)
// and presents y with res_valid for one cycle. Dividing once after the dot
// product instead of dividing every column is exact algebra with one
// rounding; the order, widths and the sequential divider are this
// design's choices.
module graph_head
  import flowgnn_pkg::*;
#(
  parameter int P_NODE  = flowgnn_pkg::CFG_P_NODE,
  parameter int DIM     = flowgnn_pkg::CFG_DIM,
  parameter int P_APPLY = flowgnn_pkg::CFG_P_APPLY,
  parameter int NODE_W  = $clog2(flowgnn_pkg::CFG_MAX_NODES)
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   ld_valid,
  input  load_t  ld,
  input  logic   clear,                 // start of a graph
  input  logic   in_valid [P_NODE],
  input  logic [15:0] in_idx [P_NODE],
  input  data_t  in_data  [P_NODE][P_APPLY],
  input  logic   finish,
  input  logic [NODE_W:0] num_nodes,
  output logic   busy,
  output logic   res_valid,
  output logic signed [31:0] res_data
);
  localparam int DOT_W = 64;

  typedef enum logic [1:0] {H_IDLE, H_DOT, H_DIV, H_OUT} hstate_e;
  hstate_e state;

  logic signed [31:0] colsum [DIM];
  data_t              hw     [DIM];
  data_t              hb;

  logic [15:0]               oi;
  logic signed [DOT_W-1:0]   dot;
  logic [DOT_W-1:0]          rem, quo, dvd;
  logic [NODE_W:0]           den;
  logic                      neg;
  logic [6:0]                bitc;

  assign busy = (state != H_IDLE);

  // parameters
  always_ff @(posedge clk) begin
    if (ld_valid && ld.sel == LD_HEAD_W) hw[ld.col] <= ld.data;
    if (ld_valid && ld.sel == LD_HEAD_B) hb <= ld.data;
  end

  // pooling sums
  always_ff @(posedge clk) begin
    if (clear) begin
      for (int o = 0; o < DIM; o++) colsum[o] <= '0;
    end else begin
      for (int o = 0; o < DIM; o++) begin
        logic signed [31:0] add;
        add = '0;
        for (int k = 0; k < P_NODE; k++)
          if (in_valid[k] && (32'(in_idx[k]) == (o / P_APPLY) * P_APPLY))
            add = add + 32'(in_data[k][o % P_APPLY]);
        colsum[o] <= colsum[o] + add;
      end
    end
  end

  // dot product, division, output
  always_ff @(posedge clk) begin
    res_valid <= 1'b0;
    if (rst) begin
      state <= H_IDLE;
    end else begin
      unique case (state)
        H_IDLE: if (finish) begin
          dot   <= '0;
          oi    <= '0;
          den   <= num_nodes;
          state <= H_DOT;
        end
        H_DOT: begin
          dot <= dot + DOT_W'(hw[oi]) * DOT_W'(colsum[oi]);
          oi  <= oi + 1'b1;
          if (32'(oi) == DIM - 1) state <= H_DIV;
          bitc <= '0;
          rem  <= '0;
          quo  <= '0;
        end
        H_DIV: begin
          if (bitc == '0) begin
            // set up |dot| / den
            neg  <= dot[DOT_W-1];
            dvd  <= dot[DOT_W-1] ? DOT_W'(-dot) : DOT_W'(dot);
            bitc <= 7'd1;
          end else begin
            logic [DOT_W:0] r2;
            r2 = {rem, dvd[DOT_W-1]};
            dvd <= dvd << 1;
            if (r2 >= (DOT_W+1)'(den)) begin
              rem <= DOT_W'(r2 - (DOT_W+1)'(den));
              quo <= {quo[DOT_W-2:0], 1'b1};
            end else begin
              rem <= r2[DOT_W-1:0];
              quo <= {quo[DOT_W-2:0], 1'b0};
            end
            bitc <= bitc + 1'b1;
            if (bitc == 7'(DOT_W)) state <= H_OUT;
          end
        end
        H_OUT: begin
          logic signed [DOT_W-1:0] q;
          q = neg ? -$signed(quo) : $signed(quo);
          res_data  <= 32'(q >>> FRAC_W) + 32'(hb);
          res_valid <= 1'b1;
          state     <= H_IDLE;
        end
        default: state <= H_IDLE;
      endcase
    end
  end

  a_den_nonzero: assert property (@(posedge clk) disable iff (rst) finish |-> num_nodes != '0);
endmodule
