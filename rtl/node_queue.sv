// node_queue: synchronous FIFO used as the node embedding queue ("Q")
// between the NT units, the NT-to-MP adapter and the MP units.
//
// A queue decouples producer and consumer so that node transformation and
// message passing run concurrently: as long as it is neither empty nor
// full both sides proceed (this is the queue the architecture is built
// around). The entry type is a parameter so the same queue carries
// P_apply-wide chunks out of an NT unit and P_scatter-wide chunks into an
// MP unit. Depth and the first-word-fall-through read interface are this
// design's own choice.
//
// Interface: push/full on the write side, pop/empty/rd_data on the read
// side. rd_data shows the oldest entry whenever empty is low; pop removes
// it at the next rising edge. Push when full and pop when empty are
// ignored and flagged by assertions. Synchronous active-high reset.
module node_queue #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst,
  input  logic push,
  input  T     wr_data,
  output logic full,
  input  logic pop,
  output T     rd_data,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wr_data;
  end

  // handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));
endmodule
