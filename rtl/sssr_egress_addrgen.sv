// sssr_egress_addrgen: egress address generator of an ESSR.
//
// Writes back the indices of a joint (intersected or united) index stream alongside its data.
// In egress mode (index mode intersect or union in its configuration) it takes one joint index
// per element from the index comparator, packs the indices into words in the index coalescer
// and writes them through a write-only index port, while emitting one data address per index.
// Data addresses count up from the data base in 8-byte steps. The data addresses wait in a
// lead queue of IdxLead entries, so index writing may run up to IdxLead elements ahead of the
// data written by the core; the paper describes this parameterized lead. When the comparator
// signals the end of the joint stream, the last partial index word is written and the number
// of joint elements is kept in the RegJointLen register, which the core reads to learn the
// result length. In affine mode the generator behaves as a regular SSR address generator.
//
// Interfaces: configuration port as in sssr_cfg_regs, joint index input (jnt_valid_i,
// jnt_idx_i, jnt_end_i marks the end of the stream and carries no index; jnt_ready_o does
// not depend on jnt_valid_i), index write port (idx_req_*) and address tokens to the data mover.
module sssr_egress_addrgen
  import sssr_pkg::*;
#(
  parameter int unsigned IdxLead = 4   // elements index writing may lead by (assumed)
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // configuration
  input  logic       cfg_valid_i,
  input  logic       cfg_write_i,
  input  cfg_addr_t  cfg_addr_i,
  input  cfg_data_t  cfg_wdata_i,
  output cfg_data_t  cfg_rdata_o,
  output logic       cfg_ready_o,
  // joint index stream from the comparator
  input  logic       jnt_valid_i,
  output logic       jnt_ready_o,
  input  idx_t       jnt_idx_i,
  input  logic       jnt_end_i,
  // index write port
  output logic       idx_req_valid_o,
  input  logic       idx_req_ready_i,
  output mem_req_t   idx_req_o,
  // address tokens to the data mover
  output logic       tok_valid_o,
  input  logic       tok_ready_i,
  output addr_tok_t  tok_o,
  output logic       egress_o,      // an egress job is running
  output logic       busy_o
);
  cfg_t      shadow_q, run_q;
  logic      busy_q, pending_q, launch, job_done;
  cfg_data_t joint_len_q;

  sssr_cfg_regs i_cfg (
    .clk_i, .rst_ni,
    .cfg_valid_i, .cfg_write_i, .cfg_addr_i, .cfg_wdata_i, .cfg_rdata_o, .cfg_ready_o,
    .joint_len_i (joint_len_q),
    .job_done_i  (job_done),
    .shadow_o    (shadow_q),
    .run_o       (run_q),
    .launch_o    (launch),
    .busy_o      (busy_q),
    .pending_o   (pending_q)
  );
  assign busy_o = busy_q || pending_q;

  logic run_egress;
  assign run_egress = busy_q && run_q.idx_mode[1];
  assign egress_o   = run_egress;

  // ---------------------------------------------------------------- affine iterator
  logic  it_valid, it_ready, it_last, it_busy;
  addr_t it_addr;

  sssr_affine_iter i_iter (
    .clk_i, .rst_ni,
    .start_i   (launch && !shadow_q.idx_mode[1]),
    .base_i    (shadow_q.data_base),
    .bounds_i  (shadow_q.bounds),
    .strides_i (shadow_q.strides),
    .dims_i    (shadow_q.dims),
    .busy_o    (it_busy),
    .valid_o   (it_valid),
    .ready_i   (it_ready),
    .addr_o    (it_addr),
    .last_o    (it_last)
  );

  // ---------------------------------------------------------------- index coalescer
  logic coal_idx_ready, coal_end_ready;
  logic lead_full, lead_empty, lead_push;

  sssr_idx_coalescer i_coal (
    .clk_i, .rst_ni,
    .start_i     (launch),
    .size_i      (shadow_q.idx_size),
    .first_pos_i (3'(shadow_q.idx_base[WordOffBits-1:0] >> shadow_q.idx_size)),
    .base_i      (shadow_q.idx_base),
    .idx_valid_i (run_egress && jnt_valid_i && !jnt_end_i && !lead_full),
    .idx_ready_o (coal_idx_ready),
    .idx_i       (jnt_idx_i),
    .end_valid_i (run_egress && jnt_valid_i && jnt_end_i),
    .end_ready_o (coal_end_ready),
    .wr_valid_o  (idx_req_valid_o),
    .wr_ready_i  (idx_req_ready_i),
    .wr_req_o    (idx_req_o)
  );

  // ---------------------------------------------------------------- lead queue of tokens
  localparam int unsigned LeadCntW = $clog2(IdxLead + 1);
  logic [LeadCntW-1:0] lead_cnt;
  addr_tok_t       lead_in;
  bound_t          elem_q;
  logic            jnt_idx_fire, jnt_end_fire;

  assign jnt_ready_o  = run_egress && coal_idx_ready && !lead_full;
  assign jnt_idx_fire = run_egress && jnt_valid_i && !jnt_end_i && coal_idx_ready && !lead_full;
  assign jnt_end_fire = run_egress && jnt_valid_i && jnt_end_i && coal_end_ready;

  always_comb begin
    lead_push = 1'b0;
    it_ready  = 1'b0;
    job_done  = 1'b0;
    lead_in   = '{addr: it_addr, zero: 1'b0, write: run_q.write, reps: run_q.reps};
    if (busy_q) begin
      if (run_egress) begin
        lead_push    = jnt_idx_fire;
        lead_in.addr = run_q.data_base + (addr_t'(elem_q) << WordOffBits);
        lead_in.write = 1'b1;
        lead_in.reps  = '0;
        job_done     = jnt_end_fire;
      end else begin
        it_ready  = !lead_full;
        lead_push = it_valid && !lead_full;
        job_done  = it_valid && !lead_full && it_last;
      end
    end
  end

  sssr_fifo #(.T(addr_tok_t), .Depth(IdxLead)) i_lead (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (lead_push),
    .data_i  (lead_in),
    .pop_i   (tok_valid_o && tok_ready_i),
    .data_o  (tok_o),
    .full_o  (lead_full),
    .empty_o (lead_empty),
    .count_o (lead_cnt)
  );
  assign tok_valid_o = !lead_empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      elem_q      <= '0;
      joint_len_q <= '0;
    end else begin
      if (launch) elem_q <= '0;
      else if (jnt_idx_fire) elem_q <= elem_q + 1'b1;
      if (jnt_end_fire) joint_len_q <= cfg_data_t'(elem_q);
    end
  end

endmodule
