// sssr_essr: egress stream semantic register (ESSR).
//
// One SSR lane built around the egress address generator, as in the paper's ESSR figure: the
// generator takes the joint index stream from the streamer's index comparator, writes the
// indices to memory through its write-only index port and hands one data address per index
// to the data mover, which pairs it with the element the core writes into the register. The
// index write port and the data port share the lane's memory port through a round-robin
// arbiter. In affine mode the lane is a regular SSR (read or write). egress_o tells the
// comparator that an egress job is running. Ports as in sssr_issr, plus the joint-index input.
module sssr_essr
  import sssr_pkg::*;
#(
  parameter int unsigned DataFifoDepth = 4,
  parameter int unsigned IdxLead       = 4,
  parameter int unsigned MaxReads      = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cfg_valid_i,
  input  logic      cfg_write_i,
  input  cfg_addr_t cfg_addr_i,
  input  cfg_data_t cfg_wdata_i,
  output cfg_data_t cfg_rdata_o,
  output logic      cfg_ready_o,
  input  logic      regi_valid_i,
  output logic      regi_ready_o,
  input  data_t     regi_data_i,
  output logic      rego_valid_o,
  input  logic      rego_ready_i,
  output data_t     rego_data_o,
  output logic      mem_req_valid_o,
  input  logic      mem_req_ready_i,
  output mem_req_t  mem_req_o,
  input  logic      mem_rsp_valid_i,
  input  data_t     mem_rsp_data_i,
  input  logic      jnt_valid_i,
  output logic      jnt_ready_o,
  input  idx_t      jnt_idx_i,
  input  logic      jnt_end_i,
  output logic      egress_o,
  output logic      busy_o
);
  logic            tok_valid, tok_ready;
  addr_tok_t       tok;
  logic [1:0]      arb_valid, arb_ready, arb_rsp_valid;
  mem_req_t [1:0]  arb_req;
  data_t           arb_rsp_data;

  sssr_egress_addrgen #(.IdxLead(IdxLead)) i_addrgen (
    .clk_i, .rst_ni,
    .cfg_valid_i, .cfg_write_i, .cfg_addr_i, .cfg_wdata_i, .cfg_rdata_o, .cfg_ready_o,
    .jnt_valid_i, .jnt_ready_o, .jnt_idx_i, .jnt_end_i,
    .idx_req_valid_o (arb_valid[0]),
    .idx_req_ready_i (arb_ready[0]),
    .idx_req_o       (arb_req[0]),
    .tok_valid_o     (tok_valid),
    .tok_ready_i     (tok_ready),
    .tok_o           (tok),
    .egress_o,
    .busy_o
  );

  sssr_data_mover #(.DataFifoDepth(DataFifoDepth)) i_mover (
    .clk_i, .rst_ni,
    .tok_valid_i     (tok_valid),
    .tok_ready_o     (tok_ready),
    .tok_i           (tok),
    .regi_valid_i, .regi_ready_o, .regi_data_i,
    .rego_valid_o, .rego_ready_i, .rego_data_o,
    .mem_req_valid_o (arb_valid[1]),
    .mem_req_ready_i (arb_ready[1]),
    .mem_req_o       (arb_req[1]),
    .mem_rsp_valid_i (arb_rsp_valid[1]),
    .mem_rsp_data_i  (arb_rsp_data)
  );

  sssr_mem_arb #(.MaxReads(MaxReads)) i_arb (
    .clk_i, .rst_ni,
    .in_valid_i      (arb_valid),
    .in_ready_o      (arb_ready),
    .in_req_i        (arb_req),
    .in_rsp_valid_o  (arb_rsp_valid),
    .in_rsp_data_o   (arb_rsp_data),
    .out_valid_o     (mem_req_valid_o),
    .out_ready_i     (mem_req_ready_i),
    .out_req_o       (mem_req_o),
    .out_rsp_valid_i (mem_rsp_valid_i),
    .out_rsp_data_i  (mem_rsp_data_i)
  );

endmodule
