// sync_fifo: first-word-fall-through FIFO used between the stages of the
// round trip pipelines.
//
// In the RNEA and Minv pipelines a forward-pass unit and the backward-pass unit
// of the same joint work on the same task at different times; the FIFO holds
// the forward (or backward) results of that joint until the other pass reaches
// it, so no external memory access is needed. It also decouples the divider
// results from the forward units of the Minv module.
//
// Interface: push/din write one entry; dout always shows the oldest entry and
// pop removes it. empty, full and count report the occupancy. Pushing into a
// full FIFO or popping an empty one is a protocol error (asserted).
// Timing: an entry pushed in cycle t is visible on dout in cycle t+1.
// Storage is a register array of DEPTH entries; the depth is a sizing choice
// of this implementation, the paper gives no FIFO depths.
module sync_fifo #(
  parameter type T = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic empty,
  output logic full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
