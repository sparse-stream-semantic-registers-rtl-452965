// sssr_issr: indirection stream semantic register (ISSR).
//
// One SSR lane built around the indirection address generator, as in the paper's ISSR figure:
// the generator feeds address tokens to the data mover (data queue between register and
// memory, with zero injection for stream union), and the generator's index read port and the
// mover's data port are merged onto the lane's single memory port by a round-robin arbiter.
// The generator's index-matching port (cmp_*) is brought out for the streamer's index
// comparator. Register side: rego_* delivers stream elements to the core, regi_* accepts
// elements written by the core. Memory port: valid/ready requests, in-order read responses,
// posted writes. Parameters: DataFifoDepth (four in the paper's streamer), IdxFifoDepth and
// MaxReads (design choices).
module sssr_issr
  import sssr_pkg::*;
#(
  parameter int unsigned DataFifoDepth = 4,
  parameter int unsigned IdxFifoDepth  = 2,
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
  output logic      cmp_valid_o,
  output idx_t      cmp_idx_o,
  output logic      cmp_end_o,
  output idx_mode_e cmp_mode_o,
  output logic      cmp_egress_o,
  input  logic      cmp_fire_i,
  input  cmp_op_e   cmp_op_i,
  output logic      cmp_ready_o,
  output logic      busy_o
);
  logic            tok_valid, tok_ready;
  addr_tok_t       tok;
  logic [1:0]      arb_valid, arb_ready, arb_rsp_valid;
  mem_req_t [1:0]  arb_req;
  data_t           arb_rsp_data;

  sssr_indir_addrgen #(.IdxFifoDepth(IdxFifoDepth)) i_addrgen (
    .clk_i, .rst_ni,
    .cfg_valid_i, .cfg_write_i, .cfg_addr_i, .cfg_wdata_i, .cfg_rdata_o, .cfg_ready_o,
    .idx_req_valid_o (arb_valid[0]),
    .idx_req_ready_i (arb_ready[0]),
    .idx_req_o       (arb_req[0]),
    .idx_rsp_valid_i (arb_rsp_valid[0]),
    .idx_rsp_data_i  (arb_rsp_data),
    .tok_valid_o     (tok_valid),
    .tok_ready_i     (tok_ready),
    .tok_o           (tok),
    .cmp_valid_o, .cmp_idx_o, .cmp_end_o, .cmp_mode_o, .cmp_egress_o,
    .cmp_fire_i, .cmp_op_i, .cmp_ready_o,
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
