// tb_sssr_mem_arb: two random requesters (mixed reads and writes, requests held until
// granted) share the arbiter's memory port, which has random backpressure and answers reads
// in order one cycle after acceptance. Checks that every read answer reaches its own
// requester in order with the right data, that writes arrive unchanged, and that two
// contending requesters are granted alternately (round robin).
module tb_sssr_mem_arb;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] in_valid = 0, in_ready, rsp_valid;
  mem_req_t [1:0] in_req;
  data_t rsp_data;
  logic out_valid, out_ready = 0, mrsp_valid = 0;
  mem_req_t out_req;
  data_t mrsp_data = 0;
  addr_t exp_rd[2][$];
  int grants[2], last_sel = -1, alt_checks = 0;

  sssr_mem_arb dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_req_i(in_req), .in_rsp_valid_o(rsp_valid), .in_rsp_data_o(rsp_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_req_o(out_req),
    .out_rsp_valid_i(mrsp_valid), .out_rsp_data_i(mrsp_data));

  function automatic data_t mem_val(addr_t a);
    return {15'h0, a, 32'hC0DE0000 | 32'(a)};
  endfunction

  // memory: answer accepted reads one cycle later
  always @(posedge clk) begin
    mrsp_valid <= out_valid && out_ready && !out_req.write;
    mrsp_data  <= mem_val(out_req.addr);
  end

  // response checking
  always @(posedge clk) if (rst_n) for (int i = 0; i < 2; i++) if (rsp_valid[i]) begin
    checks++;
    if (exp_rd[i].size() == 0 || rsp_data != mem_val(exp_rd[i][0])) begin
      failures++; $display("FAIL response to %0d", i);
    end
    if (exp_rd[i].size() != 0) void'(exp_rd[i].pop_front());
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int i = 0; i < 2; i++)
        if (!in_valid[i] && ($urandom % 4 != 0)) begin
          in_valid[i]     = 1;
          in_req[i].addr  = addr_t'({$urandom} & 32'h1fff8) | addr_t'(i);
          in_req[i].write = ($urandom % 4 == 0);
          in_req[i].data  = {32'($urandom), 32'($urandom)};
          in_req[i].strb  = 8'($urandom);
        end
      out_ready = ($urandom % 4 != 0);
      #1;
      checks++;
      if (out_valid && $countones(in_ready) != (out_ready ? 1 : 0)) begin
        failures++; $display("FAIL grant count");
      end
      for (int i = 0; i < 2; i++) if (in_ready[i]) begin
        checks++;
        if (out_req != in_req[i]) begin failures++; $display("FAIL request of %0d altered", i); end
        // both requesting: the previously granted input must lose
        if (in_valid[1-i] && last_sel == i) begin failures++; $display("FAIL round robin at %0d", cyc); end
        if (in_valid[1-i]) alt_checks++;
        if (!in_req[i].write) exp_rd[i].push_back(in_req[i].addr);
        grants[i]++;
        last_sel = i;
      end
      @(negedge clk);
      for (int i = 0; i < 2; i++) if (in_ready[i]) in_valid[i] = 0;
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_rd[0].size() != 0 || exp_rd[1].size() != 0 || alt_checks < 100 || grants[0] < 100 || grants[1] < 100) begin
      failures++; $display("FAIL outstanding reads or too little contention");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
