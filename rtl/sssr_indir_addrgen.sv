// sssr_indir_addrgen: indirection address generator of an ISSR.
//
// The generator produces the stream of data addresses an SSR moves between memory and its
// register. It has three modes, all of which reuse the four-level affine iterator:
//   * affine:   the iterator's addresses are the data addresses (backward-compatible SSR);
//   * indirect: the iterator walks the words of an index array; the words are fetched through
//               a read-only index port into a decoupling queue, cut into indices by the
//               serializer, shifted left by a programmable amount and added to the data base:
//               addr = data_base + (idx << idx_shift);
//   * match (intersection or union): the serialized indices go to the external index
//               comparator instead (cmp_*_o). For each index the comparator answers with an
//               operation (cmp_fire_i/cmp_op_i): emit the next element, skip it, insert a zero
//               element, or accept the end marker. Data addresses simply count up from the
//               data base in 8-byte steps, one per index.
// This structure, the shadowed configuration and the outstanding-request counter limiting
// in-flight index fetches to the free queue space are the paper's. The register map, the
// end-marker protocol towards the comparator and the handshakes are this design's own.
//
// Configuration: cfg_* is a word-addressed register port (map in sssr_pkg). All writes go to
// the shadow copy; writing rptr[d]/wptr[d] marks a job pending, which starts as soon as the
// running job ends, so a new job can be set up while another streams. Writes while a job is
// pending stall (cfg_ready_o low).
// Outputs: the address-token stream (from a TokDepth-entry queue, one token per cycle) to the
// data mover, the index request port, and the comparator port. cmp_ready_o is the token queue's
// space and does not depend on cmp_fire_i. Index requests are always full-word reads, so their
// write, data and strobe fields are constants.
module sssr_indir_addrgen
  import sssr_pkg::*;
#(
  parameter int unsigned IdxFifoDepth = 2,   // index words queued (assumed)
  parameter int unsigned TokDepth     = 2    // address tokens queued towards the data mover (assumed)
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
  // index read port
  output logic       idx_req_valid_o,
  input  logic       idx_req_ready_i,
  output mem_req_t   idx_req_o,
  input  logic       idx_rsp_valid_i,
  input  data_t      idx_rsp_data_i,
  // address tokens to the data mover
  output logic       tok_valid_o,
  input  logic       tok_ready_i,
  output addr_tok_t  tok_o,
  // index comparator
  output logic       cmp_valid_o,
  output idx_t       cmp_idx_o,
  output logic       cmp_end_o,
  output idx_mode_e  cmp_mode_o,
  output logic       cmp_egress_o,
  input  logic       cmp_fire_i,
  input  cmp_op_e    cmp_op_i,
  output logic       cmp_ready_o,
  output logic       busy_o
);
  // ---------------------------------------------------------------- configuration registers
  cfg_t shadow_q, run_q;
  logic pending_q, busy_q;
  logic launch, job_done;

  sssr_cfg_regs i_cfg (
    .clk_i, .rst_ni,
    .cfg_valid_i, .cfg_write_i, .cfg_addr_i, .cfg_wdata_i, .cfg_rdata_o, .cfg_ready_o,
    .joint_len_i (cfg_data_t'(0)),
    .job_done_i  (job_done),
    .shadow_o    (shadow_q),
    .run_o       (run_q),
    .launch_o    (launch),
    .busy_o      (busy_q),
    .pending_o   (pending_q)
  );
  assign busy_o = busy_q || pending_q;

  // ---------------------------------------------------------------- launch-time set-up
  // In index modes the iterator walks the words holding indices [0, bounds[0]].
  logic                 sh_idx_mode;
  logic [BoundWidth:0]  sh_count;
  logic [BoundWidth+4:0] sh_end_byte;
  addr_t                it_base;
  bound_t [NumLoops-1:0] it_bounds;
  addr_t  [NumLoops-1:0] it_strides;
  logic [1:0]           it_dims;

  assign sh_idx_mode = (shadow_q.idx_mode != ModeAffine);
  assign sh_count    = {1'b0, shadow_q.bounds[0]} + 1'b1;
  assign sh_end_byte = (BoundWidth+5)'(shadow_q.idx_base[WordOffBits-1:0])
                     + ((BoundWidth+5)'(sh_count) << shadow_q.idx_size) - 1'b1;

  always_comb begin
    if (sh_idx_mode) begin
      it_base       = {shadow_q.idx_base[AddrWidth-1:WordOffBits], {WordOffBits{1'b0}}};
      it_bounds     = '0;
      it_bounds[0]  = bound_t'(sh_end_byte >> WordOffBits);
      it_strides    = '0;
      it_strides[0] = addr_t'(StrbWidth);
      it_dims       = 2'd0;
    end else begin
      it_base    = shadow_q.data_base;
      it_bounds  = shadow_q.bounds;
      it_strides = shadow_q.strides;
      it_dims    = shadow_q.dims;
    end
  end

  // ---------------------------------------------------------------- affine iterator
  logic  it_valid, it_ready, it_last, it_busy;
  addr_t it_addr;

  sssr_affine_iter i_iter (
    .clk_i, .rst_ni,
    .start_i   (launch),
    .base_i    (it_base),
    .bounds_i  (it_bounds),
    .strides_i (it_strides),
    .dims_i    (it_dims),
    .busy_o    (it_busy),
    .valid_o   (it_valid),
    .ready_i   (it_ready),
    .addr_o    (it_addr),
    .last_o    (it_last)
  );

  // ---------------------------------------------------------------- index fetch
  localparam int unsigned CntW = $clog2(IdxFifoDepth + 1);
  logic [CntW-1:0] outst_q, fifo_cnt;
  logic            fifo_full, fifo_empty, fifo_pop;
  data_t           fifo_word;
  logic            run_idx_mode, run_match;
  logic            credit;

  assign run_idx_mode = busy_q && (run_q.idx_mode != ModeAffine);
  assign run_match    = busy_q && (run_q.idx_mode == ModeIntersect || run_q.idx_mode == ModeUnion);
  assign credit       = (32'(outst_q) + 32'(fifo_cnt)) < IdxFifoDepth;

  assign idx_req_valid_o = run_idx_mode && it_valid && credit;
  assign idx_req_o       = '{addr: it_addr, write: 1'b0, data: '0, strb: '1};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) outst_q <= '0;
    else outst_q <= outst_q + CntW'(idx_req_valid_o && idx_req_ready_i) - CntW'(idx_rsp_valid_i);
  end

  sssr_fifo #(.T(data_t), .Depth(IdxFifoDepth)) i_idx_fifo (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (idx_rsp_valid_i),
    .data_i  (idx_rsp_data_i),
    .pop_i   (fifo_pop),
    .data_o  (fifo_word),
    .full_o  (fifo_full),
    .empty_o (fifo_empty),
    .count_o (fifo_cnt)
  );

  logic ser_valid, ser_ready, ser_done;
  idx_t ser_idx;

  sssr_idx_serializer i_ser (
    .clk_i, .rst_ni,
    .start_i      (launch && sh_idx_mode),
    .size_i       (shadow_q.idx_size),
    .first_pos_i  (3'(shadow_q.idx_base[WordOffBits-1:0] >> shadow_q.idx_size)),
    .count_i      (sh_count),
    .word_valid_i (!fifo_empty),
    .word_ready_o (fifo_pop),
    .word_i       (fifo_word),
    .idx_valid_o  (ser_valid),
    .idx_ready_i  (ser_ready),
    .idx_o        (ser_idx),
    .done_o       (ser_done)
  );

  // ---------------------------------------------------------------- address token output
  localparam int unsigned TokCntW = $clog2(TokDepth + 1);
  logic               tok_full, tok_empty, tok_free, tok_load;
  logic [TokCntW-1:0] tok_cnt;
  addr_tok_t          tok_d;
  bound_t             elem_q;          // element counter in match mode
  addr_t              indir_addr, match_addr;

  // The token queue decouples the comparator from this lane's memory port: a cycle lost to an
  // index fetch on the shared port then stalls only this lane's data side, not the joint step.
  sssr_fifo #(.T(addr_tok_t), .Depth(TokDepth)) i_tok_q (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (tok_load),
    .data_i  (tok_d),
    .pop_i   (tok_valid_o && tok_ready_i),
    .data_o  (tok_o),
    .full_o  (tok_full),
    .empty_o (tok_empty),
    .count_o (tok_cnt)
  );

  assign tok_free    = !tok_full;
  assign tok_valid_o = !tok_empty;
  assign cmp_ready_o = tok_free;
  assign indir_addr  = run_q.data_base + addr_t'(ser_idx << run_q.idx_shift);
  assign match_addr  = run_q.data_base + (addr_t'(elem_q) << WordOffBits);

  assign cmp_valid_o  = run_match && (ser_valid || ser_done);
  assign cmp_idx_o    = ser_idx;
  assign cmp_end_o    = ser_done;
  assign cmp_mode_o   = run_match ? run_q.idx_mode : ModeAffine;
  assign cmp_egress_o = run_q.egress;

  always_comb begin
    tok_load  = 1'b0;
    tok_d     = '{addr: it_addr, zero: 1'b0, write: run_q.write, reps: run_q.reps};
    it_ready  = 1'b0;
    ser_ready = 1'b0;
    job_done  = 1'b0;
    if (busy_q) begin
      unique case (run_q.idx_mode)
        ModeAffine: begin
          it_ready = tok_free;
          tok_load = it_valid && tok_free;
          job_done = it_valid && tok_free && it_last;
        end
        ModeIndirect: begin
          it_ready   = idx_req_ready_i && credit;
          ser_ready  = tok_free;
          tok_load   = ser_valid && tok_free;
          tok_d.addr = indir_addr;
          job_done   = ser_done && !it_busy;
        end
        default: begin  // index matching
          it_ready   = idx_req_ready_i && credit;
          ser_ready  = cmp_fire_i && (cmp_op_i == CmpEmit || cmp_op_i == CmpSkip);
          tok_load   = cmp_fire_i && (cmp_op_i == CmpEmit || cmp_op_i == CmpZero);
          tok_d.addr = match_addr;
          tok_d.zero = (cmp_op_i == CmpZero);
          job_done   = cmp_fire_i && (cmp_op_i == CmpEnd);
        end
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      elem_q <= '0;
    end else begin
      if (launch) elem_q <= '0;
      else if (run_match && cmp_fire_i && (cmp_op_i == CmpEmit || cmp_op_i == CmpSkip))
        elem_q <= elem_q + 1'b1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) cmp_fire_i |-> cmp_ready_o && cmp_valid_o)
    else $error("sssr_indir_addrgen: comparator fired without ready/valid");

endmodule
