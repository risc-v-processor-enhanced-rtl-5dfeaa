// fwft_fifo -- first-word-fall-through FIFO between the micro-decode stage
// and the issue stage.
//
// DEPTH entries of type T.  The oldest entry is always visible on rdata_o
// while rvalid_o is high (no read latency); the consumer acknowledges it with
// rack_i and the next entry appears in the following cycle.  The producer
// writes when wvalid_i and wready_o (not full) are both high; a write into an
// empty FIFO is visible one cycle later.  A full FIFO that is read may be
// written in the same cycle.  flush_i empties it.
//
// The depth of 2 and the first-word-fall-through behaviour follow the
// published design; pointer-based storage and the handshake names are this
// design's own.
module fwft_fifo #(
  parameter type         T     = logic [363:0],
  parameter int unsigned DEPTH = 2,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic flush_i,
  input  logic wvalid_i,
  output logic wready_o,
  input  T     wdata_i,
  output logic rvalid_o,
  input  logic rack_i,
  output T     rdata_o
);

  T                 mem_q [DEPTH];
  logic [PTR_W-1:0] rptr_q, wptr_q;
  logic [PTR_W:0]   count_q;
  logic             push, pop;

  assign rvalid_o = (count_q != 0);
  assign wready_o = (count_q < (PTR_W+1)'(DEPTH)) || rack_i;
  assign rdata_o  = mem_q[rptr_q];
  assign pop      = rvalid_o && rack_i;
  assign push     = wvalid_i && wready_o;

  function automatic logic [PTR_W-1:0] incr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rptr_q  <= '0;
      wptr_q  <= '0;
      count_q <= '0;
    end else if (flush_i) begin
      rptr_q  <= '0;
      wptr_q  <= '0;
      count_q <= '0;
    end else begin
      if (push) wptr_q <= incr(wptr_q);
      if (pop)  rptr_q <= incr(rptr_q);
      count_q <= count_q + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wptr_q] <= wdata_i;
  end

  // The consumer only acknowledges a visible entry.
  a_no_ack_when_empty: assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                                        rack_i |-> rvalid_o);

endmodule
