// tb_sssr_mem: behavioural model of the tightly coupled data memory (TCDM) seen by the SSR
// lanes, for simulation only.
//
// NumPorts independent request/response ports onto one word array of Words 64-bit words.
// A port accepts a request when its ready is high; ready drops pseudo-randomly with the given
// percentage to model bank conflicts. Reads answer exactly one cycle after acceptance, in
// order; writes are applied with byte strobes and posted (no response).
module tb_sssr_mem
  import sssr_pkg::*;
#(
  parameter int unsigned NumPorts = 3,
  parameter int unsigned Words    = 16384,
  parameter int unsigned StallPct = 0
) (
  input  logic                     clk_i,
  input  logic [NumPorts-1:0]      req_valid_i,
  output logic [NumPorts-1:0]      req_ready_o,
  input  mem_req_t [NumPorts-1:0]  req_i,
  output logic [NumPorts-1:0]      rsp_valid_o,
  output data_t [NumPorts-1:0]     rsp_data_o
);
  data_t words [Words];
  int unsigned accesses;

  initial begin
    accesses = 0;
    rsp_valid_o = '0;
    rsp_data_o  = '0;
    for (int i = 0; i < Words; i++) words[i] = '0;
  end

  always @(negedge clk_i) begin
    for (int p = 0; p < NumPorts; p++)
      req_ready_o[p] <= (StallPct == 0) || (($urandom % 100) >= StallPct);
  end

  always @(posedge clk_i) begin
    for (int p = 0; p < NumPorts; p++) begin
      rsp_valid_o[p] <= 1'b0;
      if (req_valid_i[p] && req_ready_o[p]) begin
        accesses++;
        if (req_i[p].write) begin
          for (int b = 0; b < StrbWidth; b++)
            if (req_i[p].strb[b])
              words[req_i[p].addr >> WordOffBits][8*b +: 8] <= req_i[p].data[8*b +: 8];
        end else begin
          rsp_valid_o[p] <= 1'b1;
          rsp_data_o[p]  <= words[req_i[p].addr >> WordOffBits];
        end
      end
    end
  end
endmodule
