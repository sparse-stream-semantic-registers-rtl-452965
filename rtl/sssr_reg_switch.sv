// sssr_reg_switch: maps the SSR data channels onto the FPU register file ports.
//
// When stream redirection is enabled (ssr_en_i, a control register of the core), accesses of
// the FPU's operand read ports and its result write port to the registers assigned to the SSR
// lanes are redirected to those lanes; all other accesses go to the register file. In the
// paper's configuration ISSR 0, ISSR 1 and the ESSR map to ft0, ft1 and ft2 (SsrRegs).
// Per read port p: rd_en_i says the issuing instruction uses the operand, rd_done_i that the
// instruction issues and consumes it; rd_is_ssr_o/rd_valid_o/rd_data_o answer. The consume
// pops the lane (rego_ready_o). The write port works the same way towards regi_*. The
// interface is this design's own; the paper gives the function.
// An instruction naming one stream register in two operand slots is not supported (asserted).
module sssr_reg_switch
  import sssr_pkg::*;
#(
  parameter int unsigned NumSsr   = 3,
  parameter int unsigned NumRead  = 3,
  parameter logic [NumSsr-1:0][4:0] SsrRegs = {5'd2, 5'd1, 5'd0}
) (
  input  logic                         ssr_en_i,
  // FPU operand read ports
  input  logic  [NumRead-1:0][4:0]     rd_addr_i,
  input  logic  [NumRead-1:0]          rd_en_i,
  input  logic  [NumRead-1:0]          rd_done_i,
  output logic  [NumRead-1:0]          rd_is_ssr_o,
  output logic  [NumRead-1:0]          rd_valid_o,
  output data_t [NumRead-1:0]          rd_data_o,
  // FPU result write port
  input  logic  [4:0]                  wr_addr_i,
  input  logic                         wr_valid_i,
  input  data_t                        wr_data_i,
  output logic                         wr_is_ssr_o,
  output logic                         wr_ready_o,
  // SSR lanes
  input  logic  [NumSsr-1:0]           rego_valid_i,
  input  data_t [NumSsr-1:0]           rego_data_i,
  output logic  [NumSsr-1:0]           rego_ready_o,
  output logic  [NumSsr-1:0]           regi_valid_o,
  output data_t [NumSsr-1:0]           regi_data_o,
  input  logic  [NumSsr-1:0]           regi_ready_i
);
  logic [NumRead-1:0][NumSsr-1:0] rd_hit;
  logic [NumSsr-1:0]              wr_hit;

  always_comb begin
    rd_is_ssr_o  = '0;
    rd_valid_o   = '0;
    rd_data_o    = '0;
    rego_ready_o = '0;
    for (int p = 0; p < NumRead; p++) begin
      for (int j = 0; j < NumSsr; j++) begin
        rd_hit[p][j] = ssr_en_i && rd_en_i[p] && (rd_addr_i[p] == SsrRegs[j]);
        if (rd_hit[p][j]) begin
          rd_is_ssr_o[p] = 1'b1;
          rd_valid_o[p]  = rego_valid_i[j];
          rd_data_o[p]   = rego_data_i[j];
          if (rd_done_i[p]) rego_ready_o[j] = 1'b1;
        end
      end
    end
  end

  always_comb begin
    wr_is_ssr_o  = 1'b0;
    wr_ready_o   = 1'b0;
    regi_valid_o = '0;
    regi_data_o  = '0;
    for (int j = 0; j < NumSsr; j++) begin
      wr_hit[j]      = ssr_en_i && (wr_addr_i == SsrRegs[j]);
      regi_data_o[j] = wr_data_i;
      if (wr_hit[j]) begin
        wr_is_ssr_o     = 1'b1;
        wr_ready_o      = regi_ready_i[j];
        regi_valid_o[j] = wr_valid_i;
      end
    end
  end

  for (genvar j = 0; j < NumSsr; j++) begin : gen_chk
    logic [NumRead-1:0] col;
    for (genvar p = 0; p < NumRead; p++) begin : gen_col
      assign col[p] = rd_hit[p][j] && rd_done_i[p];
    end
    always_comb begin
      assert final ($countones(col) <= 1)
        else $error("sssr_reg_switch: stream register read twice by one instruction");
    end
  end

endmodule
