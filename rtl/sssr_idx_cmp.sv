// sssr_idx_cmp: index comparator joining the index streams of two ISSRs.
//
// The comparator looks at the head index of both ISSRs' index-matching streams, decides which
// stream, if either, is ahead, and advances both so that together they emit the intersection
// or the union of the two index sets; the mode is the one configured in ISSR 0 (the paper
// forwards the mode from the ISSRs). Per step:
//   a == b          both ISSRs emit their element; the index joins the result
//   a <  b (or b ended)  union: ISSR 0 emits, ISSR 1 inserts a zero; intersection: ISSR 0 skips
//   a >  b (or a ended)  the mirror case
//   both ended      both accept their end marker; the joint stream ends
// Every joint element is also pushed, if ISSR 0's configuration asks for egress, to the ESSR
// for index writeback, and as a '1' into the stream-control queue; the end of the joint stream
// pushes a '0'. The core's hardware loop pops this queue (seq_*) to issue exactly one
// iteration per joint element. The decision table follows from the paper's description of
// intersection and union; the interfaces and the single-cycle step are this design's own.
//
// Interface: each ISSR offers cmp_valid_i/cmp_idx_i/cmp_end_i and a ready that does not depend
// on this block; a step happens in a single cycle when every participant is ready, and
// op_fire_o strobes the operation into each ISSR. jnt_valid_o likewise strobes into the ESSR.
// CtrlDepth is the stream-control queue depth (design choice).
module sssr_idx_cmp
  import sssr_pkg::*;
#(
  parameter int unsigned CtrlDepth = 4
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // ISSR index streams
  input  logic      [1:0] cmp_valid_i,
  input  idx_t      [1:0] cmp_idx_i,
  input  logic      [1:0] cmp_end_i,
  input  idx_mode_e [1:0] cmp_mode_i,
  input  logic            cmp_egress_i,     // ISSR 0 asks for index writeback
  input  logic      [1:0] cmp_ready_i,
  output logic      [1:0] op_fire_o,
  output cmp_op_e   [1:0] op_o,
  // joint index stream to the ESSR
  output logic            jnt_valid_o,
  input  logic            jnt_ready_i,
  output idx_t            jnt_idx_o,
  output logic            jnt_end_o,
  // stream control towards the hardware loop
  output logic            seq_valid_o,
  input  logic            seq_ready_i,
  output logic            seq_data_o,
  // event strobes (for monitoring)
  output logic            match_o,          // both streams emitted (index match)
  output logic            zero_o            // a zero element was inserted
);
  logic       active, is_union;
  logic [1:0] inv;          // ISSR takes part in this step
  logic       jnt_push, ctrl_push, ctrl_bit, go;
  logic       ctrl_full, ctrl_empty;
  logic [$clog2(CtrlDepth+1)-1:0] ctrl_cnt;

  assign is_union = (cmp_mode_i[0] == ModeUnion);
  assign active   = &cmp_valid_i
                  && (cmp_mode_i[0] == ModeIntersect || cmp_mode_i[0] == ModeUnion)
                  && (cmp_mode_i[1] == ModeIntersect || cmp_mode_i[1] == ModeUnion);

  always_comb begin
    inv       = 2'b00;
    op_o      = {CmpEmit, CmpEmit};
    jnt_push  = 1'b0;
    jnt_idx_o = cmp_idx_i[0];
    jnt_end_o = 1'b0;
    ctrl_push = 1'b0;
    ctrl_bit  = 1'b1;
    if (cmp_end_i[0] && cmp_end_i[1]) begin
      inv       = 2'b11;
      op_o      = {CmpEnd, CmpEnd};
      jnt_push  = 1'b1;
      jnt_end_o = 1'b1;
      ctrl_push = 1'b1;
      ctrl_bit  = 1'b0;
    end else if (!cmp_end_i[0] && !cmp_end_i[1] && cmp_idx_i[0] == cmp_idx_i[1]) begin
      inv       = 2'b11;
      op_o      = {CmpEmit, CmpEmit};
      jnt_push  = 1'b1;
      ctrl_push = 1'b1;
    end else if (cmp_end_i[1] || (!cmp_end_i[0] && cmp_idx_i[0] < cmp_idx_i[1])) begin
      // stream 0 is behind
      if (is_union) begin
        inv       = 2'b11;
        op_o      = {CmpZero, CmpEmit};
        jnt_push  = 1'b1;
        ctrl_push = 1'b1;
      end else begin
        inv     = 2'b01;
        op_o[0] = CmpSkip;
      end
    end else begin
      // stream 1 is behind
      jnt_idx_o = cmp_idx_i[1];
      if (is_union) begin
        inv       = 2'b11;
        op_o      = {CmpEmit, CmpZero};
        jnt_push  = 1'b1;
        ctrl_push = 1'b1;
      end else begin
        inv     = 2'b10;
        op_o[1] = CmpSkip;
      end
    end
  end

  assign go = active
           && (!inv[0] || cmp_ready_i[0])
           && (!inv[1] || cmp_ready_i[1])
           && (!(jnt_push && cmp_egress_i) || jnt_ready_i)
           && (!ctrl_push || !ctrl_full);

  assign op_fire_o   = go ? inv : 2'b00;
  assign jnt_valid_o = go && jnt_push && cmp_egress_i;
  assign match_o     = go && inv == 2'b11 && op_o[0] == CmpEmit && op_o[1] == CmpEmit;
  assign zero_o      = go && (op_o[0] == CmpZero || op_o[1] == CmpZero);

  sssr_fifo #(.T(logic), .Depth(CtrlDepth)) i_ctrl (
    .clk_i, .rst_ni,
    .flush_i (1'b0),
    .push_i  (go && ctrl_push),
    .data_i  (ctrl_bit),
    .pop_i   (seq_valid_o && seq_ready_i),
    .data_o  (seq_data_o),
    .full_o  (ctrl_full),
    .empty_o (ctrl_empty),
    .count_o (ctrl_cnt)
  );
  assign seq_valid_o = !ctrl_empty;

endmodule
