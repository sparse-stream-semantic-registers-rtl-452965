// sssr_fifo: synchronous first-in first-out queue.
//
// Used wherever the streamer decouples two sides: the index-word queue of the indirection
// address generator, the data queue of each SSR, the egress lead queue and the stream-control
// queue of the index comparator. The paper names these queues; their construction is this
// design's own: a circular buffer of Depth entries of type T with read and write pointers and
// an occupancy counter. push/pop are accepted in the same cycle; pushing while full or popping
// while empty is a usage error (checked by assertions). The head is visible combinationally
// (fall-through on the read side, one cycle latency from push to head).
module sssr_fifo #(
  parameter type         T     = logic [63:0],
  parameter int unsigned Depth = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       flush_i,
  input  logic                       push_i,
  input  T                           data_i,
  input  logic                       pop_i,
  output T                           data_o,
  output logic                       full_o,
  output logic                       empty_o,
  output logic [$clog2(Depth+1)-1:0] count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T                           mem_q [Depth];
  logic [PtrW-1:0]            rptr_q, wptr_q;
  logic [$clog2(Depth+1)-1:0] cnt_q;

  assign count_o = cnt_q;
  assign full_o  = (cnt_q == Depth[$clog2(Depth+1)-1:0]);
  assign empty_o = (cnt_q == '0);
  assign data_o  = mem_q[rptr_q];

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rptr_q <= '0;
      wptr_q <= '0;
      cnt_q  <= '0;
    end else if (flush_i) begin
      rptr_q <= '0;
      wptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (push_i) wptr_q <= incr(wptr_q);
      if (pop_i)  rptr_q <= incr(rptr_q);
      cnt_q <= cnt_q + $bits(cnt_q)'(push_i) - $bits(cnt_q)'(pop_i);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i && !flush_i) mem_q[wptr_q] <= data_i;
  end

  // queue protocol checks
  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i && !pop_i |-> !full_o)
    else $error("sssr_fifo: push while full");
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o)
    else $error("sssr_fifo: pop while empty");

endmodule
