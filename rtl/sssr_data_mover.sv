// sssr_data_mover: data queue of one SSR between its register port and its memory port.
//
// The address generator hands over one address token per stream element. For a read token the
// mover issues a memory read and queues the returned word; the core pops words from the
// register side (rego). A token flagged "zero" (stream union) issues no request: a zero element
// is injected into the read stream at its position, which is the multiplexer in front of the
// register the paper adds to the ISSR. For a write token the mover pairs the address with the
// oldest word the core pushed on the register side (regi) and issues a memory write.
// Each read element can be repeated: it is presented reps+1 times before it is popped.
//
// As in the original SSR, one data queue of DataFifoDepth entries (four in the paper's
// streamer) serves both directions. The queue holds words of one direction at a time; it turns
// around only when it is empty. Read ordering of zero and memory elements is kept by a tag
// queue holding, per element in flight or queued, its zero flag and repetition count; a read
// token is taken only while the tag queue has space, so the data queue can never overflow and
// memory responses need no backpressure. This tag scheme is the design's own.
//
// Memory port: valid/ready request, reads answered in order by rsp_valid_i one or more cycles
// later, writes posted without response.
module sssr_data_mover
  import sssr_pkg::*;
#(
  parameter int unsigned DataFifoDepth = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // address tokens
  input  logic      tok_valid_i,
  output logic      tok_ready_o,
  input  addr_tok_t tok_i,
  // register side: core writes into the stream
  input  logic      regi_valid_i,
  output logic      regi_ready_o,
  input  data_t     regi_data_i,
  // register side: core reads from the stream
  output logic      rego_valid_o,
  input  logic      rego_ready_i,
  output data_t     rego_data_o,
  // memory
  output logic      mem_req_valid_o,
  input  logic      mem_req_ready_i,
  output mem_req_t  mem_req_o,
  input  logic      mem_rsp_valid_i,
  input  data_t     mem_rsp_data_i
);
  typedef struct packed {
    logic zero;
    rep_t reps;
  } tag_t;

  localparam int unsigned CntW = $clog2(DataFifoDepth + 1);

  logic            dir_write_q;        // queue currently holds write data
  logic            dq_push, dq_pop, dq_full, dq_empty;
  data_t           dq_in, dq_head;
  logic [CntW-1:0] dq_cnt, tq_cnt;
  logic            tq_push, tq_pop, tq_full, tq_empty;
  tag_t            tq_head;
  rep_t            rep_q;
  logic            idle, rd_ok, wr_ok;

  assign idle  = dq_empty && tq_empty;
  assign rd_ok = !dir_write_q || idle;
  assign wr_ok = dir_write_q || idle;

  // ---- token side
  always_comb begin
    mem_req_valid_o = 1'b0;
    mem_req_o       = '{addr: tok_i.addr, write: tok_i.write, data: dq_head, strb: '1};
    tok_ready_o     = 1'b0;
    tq_push         = 1'b0;
    if (tok_valid_i) begin
      if (tok_i.write) begin
        mem_req_valid_o = dir_write_q && !dq_empty;
        tok_ready_o     = mem_req_valid_o && mem_req_ready_i;
      end else if (tok_i.zero) begin
        tok_ready_o = rd_ok && !tq_full;
        tq_push     = tok_ready_o;
      end else begin
        mem_req_valid_o = rd_ok && !tq_full;
        tok_ready_o     = mem_req_valid_o && mem_req_ready_i;
        tq_push         = tok_ready_o;
      end
    end
  end

  // ---- register side
  assign regi_ready_o = wr_ok && !dq_full;
  assign rego_valid_o = !tq_empty && (tq_head.zero || !dq_empty);
  assign rego_data_o  = tq_head.zero ? '0 : dq_head;
  assign tq_pop       = rego_valid_o && rego_ready_i && (rep_q == tq_head.reps);

  always_comb begin
    dq_push = 1'b0;
    dq_in   = mem_rsp_data_i;
    dq_pop  = 1'b0;
    if (mem_rsp_valid_i) begin
      dq_push = 1'b1;
    end else if (regi_valid_i && regi_ready_o) begin
      dq_push = 1'b1;
      dq_in   = regi_data_i;
    end
    if (tok_valid_i && tok_i.write && tok_ready_o) dq_pop = 1'b1;
    if (tq_pop && !tq_head.zero)                   dq_pop = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dir_write_q <= 1'b0;
      rep_q       <= '0;
    end else begin
      if (regi_valid_i && regi_ready_o)  dir_write_q <= 1'b1;
      else if (tq_push)                  dir_write_q <= 1'b0;
      if (rego_valid_o && rego_ready_i) rep_q <= tq_pop ? '0 : rep_q + 1'b1;
    end
  end

  sssr_fifo #(.T(data_t), .Depth(DataFifoDepth)) i_data_q (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (dq_push),
    .data_i  (dq_in),
    .pop_i   (dq_pop),
    .data_o  (dq_head),
    .full_o  (dq_full),
    .empty_o (dq_empty),
    .count_o (dq_cnt)
  );

  sssr_fifo #(.T(tag_t), .Depth(DataFifoDepth)) i_tag_q (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (tq_push),
    .data_i  ('{zero: tok_i.zero, reps: tok_i.reps}),
    .pop_i   (tq_pop),
    .data_o  (tq_head),
    .full_o  (tq_full),
    .empty_o (tq_empty),
    .count_o (tq_cnt)
  );

  // A memory response and a core write never coincide: writes are only accepted while no read
  // is queued or in flight.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(mem_rsp_valid_i && regi_valid_i && regi_ready_o))
    else $error("sssr_data_mover: response during register write");

endmodule
