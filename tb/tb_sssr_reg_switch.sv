// tb_sssr_reg_switch: random register accesses from the three read ports and the write port,
// with stream redirection on and off, compared with a reference of the redirection rule:
// accesses to ft0/ft1/ft2 go to lanes 0/1/2 while redirection is enabled, all others to the
// register file. Checks data, valid/ready forwarding and which lane is popped or pushed.
module tb_sssr_reg_switch;
  import sssr_pkg::*;
  int checks = 0, failures = 0;
  logic en;
  logic [2:0][4:0] rd_addr;
  logic [2:0] rd_en, rd_done, rd_is_ssr, rd_valid;
  data_t [2:0] rd_data;
  logic [4:0] wr_addr;
  logic wr_valid, wr_is_ssr, wr_ready;
  data_t wr_data;
  logic [2:0] rego_valid, rego_ready, regi_valid, regi_ready;
  data_t [2:0] rego_data, regi_data;

  sssr_reg_switch dut (.ssr_en_i(en), .rd_addr_i(rd_addr), .rd_en_i(rd_en), .rd_done_i(rd_done),
    .rd_is_ssr_o(rd_is_ssr), .rd_valid_o(rd_valid), .rd_data_o(rd_data), .wr_addr_i(wr_addr),
    .wr_valid_i(wr_valid), .wr_data_i(wr_data), .wr_is_ssr_o(wr_is_ssr), .wr_ready_o(wr_ready),
    .rego_valid_i(rego_valid), .rego_data_i(rego_data), .rego_ready_o(rego_ready),
    .regi_valid_o(regi_valid), .regi_data_o(regi_data), .regi_ready_i(regi_ready));

  initial begin
    logic [2:0] exp_pop, exp_push;
    bit hit;
    for (int it = 0; it < 3000; it++) begin
      en = ($urandom % 4 != 0);
      // distinct read registers per instruction, drawn from ft0..ft5
      rd_addr[0] = 5'($urandom % 6);
      rd_addr[1] = 5'((rd_addr[0] + 1 + $urandom % 2) % 6);
      rd_addr[2] = 5'((rd_addr[1] + 1 + $urandom % 2) % 6);
      if (rd_addr[2] == rd_addr[0]) rd_addr[2] = 5'(6 + $urandom % 20);
      rd_en = 3'($urandom); rd_done = 3'($urandom);
      wr_addr = 5'($urandom % 6); wr_valid = 1'($urandom); wr_data = {32'($urandom), 32'($urandom)};
      rego_valid = 3'($urandom); regi_ready = 3'($urandom);
      for (int j = 0; j < 3; j++) rego_data[j] = {32'($urandom), 32'($urandom)};
      #1;
      exp_pop = 0; exp_push = 0;
      for (int p = 0; p < 3; p++) begin
        hit = en && rd_en[p] && rd_addr[p] < 3;
        checks++;
        if (rd_is_ssr[p] != hit || (hit && (rd_valid[p] != rego_valid[rd_addr[p]] || rd_data[p] != rego_data[rd_addr[p]]))) begin
          failures++; $display("FAIL read port %0d", p);
        end
        if (hit && rd_done[p]) exp_pop[rd_addr[p]] = 1;
      end
      hit = en && wr_addr < 3;
      if (hit && wr_valid) exp_push[wr_addr] = 1;
      checks++;
      if (rego_ready != exp_pop || regi_valid != exp_push || wr_is_ssr != hit
          || (hit && (wr_ready != regi_ready[wr_addr] || regi_data[wr_addr] != wr_data))) begin
        failures++; $display("FAIL lanes: pop %b/%b push %b/%b", rego_ready, exp_pop, regi_valid, exp_push);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
