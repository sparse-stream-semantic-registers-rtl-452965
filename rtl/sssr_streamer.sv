// sssr_streamer: sparse stream semantic register streamer in its default configuration.
//
// Top of the design. It combines two indirection SSRs (ISSR 0 and 1, registers ft0 and ft1)
// and one egress SSR (ESSR, ft2), the index comparator between the two ISSRs and the register
// switch, and gives the host core one shared configuration port and one register-file
// interface, as the paper's streamer figure shows:
//   * Configuration: cfg_addr_i = {lane[1:0], register[4:0]}; lanes 0, 1, 2 are ISSR 0,
//     ISSR 1 and the ESSR (the lane-select encoding is the design's own). A write to a lane's
//     rptr/wptr register launches its job.
//   * Register switch: three FPU operand read ports and one result write port; when ssr_en_i
//     is set, ft0..ft2 are redirected to the lanes.
//   * Index comparator: joins the index streams of the ISSRs into their intersection or union,
//     forwards the joint indices to the ESSR for writeback and fills the stream-control queue,
//     which the hardware loop pops through seq_* (1 = another element, 0 = joint stream done).
//   * Memory: one port per lane (mem_*[0..2]); in the paper's core complex ISSR 0 shares a
//     port with the core and FPU while ISSR 1 and the ESSR get their own; that merge is outside
//     this block. Requests are valid/ready, reads are answered in order, writes are posted.
// Parameters (paper): four data queue stages per lane; 17-bit addresses and four loop levels
// come from sssr_pkg. Other depths are design choices.
module sssr_streamer
  import sssr_pkg::*;
#(
  parameter int unsigned DataFifoDepth = 4,
  parameter int unsigned IdxFifoDepth  = 2,
  parameter int unsigned IdxLead       = 4,
  parameter int unsigned CtrlDepth     = 4,
  parameter int unsigned MaxReads      = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // configuration
  input  logic                cfg_valid_i,
  input  logic                cfg_write_i,
  input  logic [6:0]          cfg_addr_i,
  input  cfg_data_t           cfg_wdata_i,
  output cfg_data_t           cfg_rdata_o,
  output logic                cfg_ready_o,
  // register switch
  input  logic                ssr_en_i,
  input  logic [2:0][4:0]     rd_addr_i,
  input  logic [2:0]          rd_en_i,
  input  logic [2:0]          rd_done_i,
  output logic [2:0]          rd_is_ssr_o,
  output logic [2:0]          rd_valid_o,
  output data_t [2:0]         rd_data_o,
  input  logic [4:0]          wr_addr_i,
  input  logic                wr_valid_i,
  input  data_t               wr_data_i,
  output logic                wr_is_ssr_o,
  output logic                wr_ready_o,
  // stream control to the hardware loop
  output logic                seq_valid_o,
  input  logic                seq_ready_i,
  output logic                seq_data_o,
  // memory ports
  output logic [2:0]          mem_req_valid_o,
  input  logic [2:0]          mem_req_ready_i,
  output mem_req_t [2:0]      mem_req_o,
  input  logic [2:0]          mem_rsp_valid_i,
  input  data_t [2:0]         mem_rsp_data_i,
  output logic [2:0]          busy_o
);
  // ---- configuration demultiplexer
  logic      [2:0] lane_cfg_valid, lane_cfg_ready;
  cfg_data_t [2:0] lane_cfg_rdata;
  logic      [1:0] lane_sel;

  assign lane_sel = cfg_addr_i[6:5];
  for (genvar i = 0; i < 3; i++) begin : gen_cfg
    assign lane_cfg_valid[i] = cfg_valid_i && (lane_sel == 2'(i));
  end
  assign cfg_rdata_o = (lane_sel < 2'd3) ? lane_cfg_rdata[lane_sel] : '0;
  assign cfg_ready_o = (lane_sel < 2'd3) ? lane_cfg_ready[lane_sel] : 1'b1;

  // ---- lanes
  logic  [2:0] rego_valid, rego_ready, regi_valid, regi_ready;
  data_t [2:0] rego_data, regi_data;

  logic      [1:0] cmp_valid, cmp_end, cmp_ready, cmp_egress, op_fire;
  idx_t      [1:0] cmp_idx;
  idx_mode_e [1:0] cmp_mode;
  cmp_op_e   [1:0] op;
  logic            jnt_valid, jnt_ready, jnt_end;
  idx_t            jnt_idx;

  for (genvar i = 0; i < 2; i++) begin : gen_issr
    sssr_issr #(
      .DataFifoDepth (DataFifoDepth),
      .IdxFifoDepth  (IdxFifoDepth),
      .MaxReads      (MaxReads)
    ) i_issr (
      .clk_i, .rst_ni,
      .cfg_valid_i     (lane_cfg_valid[i]),
      .cfg_write_i,
      .cfg_addr_i      (cfg_addr_i[4:0]),
      .cfg_wdata_i,
      .cfg_rdata_o     (lane_cfg_rdata[i]),
      .cfg_ready_o     (lane_cfg_ready[i]),
      .regi_valid_i    (regi_valid[i]),
      .regi_ready_o    (regi_ready[i]),
      .regi_data_i     (regi_data[i]),
      .rego_valid_o    (rego_valid[i]),
      .rego_ready_i    (rego_ready[i]),
      .rego_data_o     (rego_data[i]),
      .mem_req_valid_o (mem_req_valid_o[i]),
      .mem_req_ready_i (mem_req_ready_i[i]),
      .mem_req_o       (mem_req_o[i]),
      .mem_rsp_valid_i (mem_rsp_valid_i[i]),
      .mem_rsp_data_i  (mem_rsp_data_i[i]),
      .cmp_valid_o     (cmp_valid[i]),
      .cmp_idx_o       (cmp_idx[i]),
      .cmp_end_o       (cmp_end[i]),
      .cmp_mode_o      (cmp_mode[i]),
      .cmp_egress_o    (cmp_egress[i]),
      .cmp_fire_i      (op_fire[i]),
      .cmp_op_i        (op[i]),
      .cmp_ready_o     (cmp_ready[i]),
      .busy_o          (busy_o[i])
    );
  end

  sssr_essr #(
    .DataFifoDepth (DataFifoDepth),
    .IdxLead       (IdxLead),
    .MaxReads      (MaxReads)
  ) i_essr (
    .clk_i, .rst_ni,
    .cfg_valid_i     (lane_cfg_valid[2]),
    .cfg_write_i,
    .cfg_addr_i      (cfg_addr_i[4:0]),
    .cfg_wdata_i,
    .cfg_rdata_o     (lane_cfg_rdata[2]),
    .cfg_ready_o     (lane_cfg_ready[2]),
    .regi_valid_i    (regi_valid[2]),
    .regi_ready_o    (regi_ready[2]),
    .regi_data_i     (regi_data[2]),
    .rego_valid_o    (rego_valid[2]),
    .rego_ready_i    (rego_ready[2]),
    .rego_data_o     (rego_data[2]),
    .mem_req_valid_o (mem_req_valid_o[2]),
    .mem_req_ready_i (mem_req_ready_i[2]),
    .mem_req_o       (mem_req_o[2]),
    .mem_rsp_valid_i (mem_rsp_valid_i[2]),
    .mem_rsp_data_i  (mem_rsp_data_i[2]),
    .jnt_valid_i     (jnt_valid),
    .jnt_ready_o     (jnt_ready),
    .jnt_idx_i       (jnt_idx),
    .jnt_end_i       (jnt_end),
    .egress_o        (),
    .busy_o          (busy_o[2])
  );

  // ---- index comparator
  sssr_idx_cmp #(.CtrlDepth(CtrlDepth)) i_cmp (
    .clk_i, .rst_ni,
    .cmp_valid_i  (cmp_valid),
    .cmp_idx_i    (cmp_idx),
    .cmp_end_i    (cmp_end),
    .cmp_mode_i   (cmp_mode),
    .cmp_egress_i (cmp_egress[0]),
    .cmp_ready_i  (cmp_ready),
    .op_fire_o    (op_fire),
    .op_o         (op),
    .jnt_valid_o  (jnt_valid),
    .jnt_ready_i  (jnt_ready),
    .jnt_idx_o    (jnt_idx),
    .jnt_end_o    (jnt_end),
    .seq_valid_o,
    .seq_ready_i,
    .seq_data_o,
    .match_o      (),
    .zero_o       ()
  );

  // ---- register switch
  sssr_reg_switch #(.NumSsr(3), .NumRead(3)) i_switch (
    .ssr_en_i,
    .rd_addr_i, .rd_en_i, .rd_done_i, .rd_is_ssr_o, .rd_valid_o, .rd_data_o,
    .wr_addr_i, .wr_valid_i, .wr_data_i, .wr_is_ssr_o, .wr_ready_o,
    .rego_valid_i (rego_valid),
    .rego_data_i  (rego_data),
    .rego_ready_o (rego_ready),
    .regi_valid_o (regi_valid),
    .regi_data_o  (regi_data),
    .regi_ready_i (regi_ready)
  );

endmodule
