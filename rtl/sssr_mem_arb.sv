// sssr_mem_arb: round-robin arbiter joining an SSR's index port and data port onto one
// memory port.
//
// The paper combines the index and data memory ports of each ISSR and ESSR with a round-robin
// arbiter instead of giving the SSR two memory ports; with n indices per 64-bit word this caps
// data-port utilization at n/(n+1) on indexed streams (67, 80, 88 % for 32-, 16-, 8-bit
// indices). Here the priority pointer moves to the other requester after every grant, so two
// requesters that keep requesting alternate. Reads are answered in order by the memory; a queue
// of MaxReads requester ids (design choice) records which input each outstanding read belongs
// to and steers the response back. Writes are posted (no response). Grants are combinational
// from the request valids.
module sssr_mem_arb
  import sssr_pkg::*;
#(
  parameter int unsigned MaxReads = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [1:0]        in_valid_i,
  output logic [1:0]        in_ready_o,
  input  mem_req_t [1:0]    in_req_i,
  output logic [1:0]        in_rsp_valid_o,
  output data_t             in_rsp_data_o,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output mem_req_t          out_req_o,
  input  logic              out_rsp_valid_i,
  input  data_t             out_rsp_data_i
);
  logic       prio_q;       // input that wins a tie
  logic       sel;          // granted input
  logic [1:0] eligible;
  logic       id_full, id_empty, id_head;
  logic [$clog2(MaxReads+1)-1:0] id_cnt;

  // a read may only be granted while its id can be recorded
  for (genvar i = 0; i < 2; i++) begin : gen_elig
    assign eligible[i] = in_valid_i[i] && (in_req_i[i].write || !id_full);
  end

  always_comb begin
    if (eligible[0] && eligible[1]) sel = prio_q;
    else                            sel = eligible[1];
  end

  assign out_valid_o = |eligible;
  assign out_req_o   = in_req_i[sel];
  assign in_ready_o  = {sel && out_ready_i && eligible[1], !sel && out_ready_i && eligible[0]};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) prio_q <= 1'b0;
    else if (out_valid_o && out_ready_i) prio_q <= !sel;
  end

  sssr_fifo #(.T(logic), .Depth(MaxReads)) i_ids (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (out_valid_o && out_ready_i && !out_req_o.write),
    .data_i  (sel),
    .pop_i   (out_rsp_valid_i),
    .data_o  (id_head),
    .full_o  (id_full),
    .empty_o (id_empty),
    .count_o (id_cnt)
  );

  assign in_rsp_valid_o = {out_rsp_valid_i && id_head, out_rsp_valid_i && !id_head};
  assign in_rsp_data_o  = out_rsp_data_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni) out_rsp_valid_i |-> !id_empty)
    else $error("sssr_mem_arb: response without outstanding read");

endmodule
