// tb_sssr_data_mover: drives the data mover with random read jobs (memory reads, injected
// zeros, repetitions) and write jobs (core pushes data, tokens carry addresses) against a
// memory model with random backpressure and one-cycle read latency. Checks every value the
// core pops against the expected element sequence, the memory contents after writes, and
// that zero elements never cause a memory request.
module tb_sssr_data_mover;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tok_valid = 0, tok_ready, regi_valid = 0, regi_ready, rego_valid, rego_ready = 0;
  addr_tok_t tok;
  data_t regi_data = 0, rego_data;
  logic mreq_valid, mreq_ready = 0, mrsp_valid = 0;
  mem_req_t mreq;
  data_t mrsp_data = 0;
  data_t mem[1024];
  int nreq;

  sssr_data_mover dut (.clk_i(clk), .rst_ni(rst_n), .tok_valid_i(tok_valid), .tok_ready_o(tok_ready),
    .tok_i(tok), .regi_valid_i(regi_valid), .regi_ready_o(regi_ready), .regi_data_i(regi_data),
    .rego_valid_o(rego_valid), .rego_ready_i(rego_ready), .rego_data_o(rego_data),
    .mem_req_valid_o(mreq_valid), .mem_req_ready_i(mreq_ready), .mem_req_o(mreq),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_data_i(mrsp_data));

  always @(posedge clk) begin
    mrsp_valid <= mreq_valid && mreq_ready && !mreq.write;
    mrsp_data  <= mem[mreq.addr[12:3]];
    if (mreq_valid && mreq_ready) begin
      nreq++;
      if (mreq.write) mem[mreq.addr[12:3]] <= mreq.data;
    end
  end

  initial begin
    addr_tok_t toks[$];
    data_t exp_q[$], wdata[$];
    int n, sent, popped, pushed, nz, nmem;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1024; i++) mem[i] = {32'($urandom), 32'($urandom)};
    for (int job = 0; job < 20; job++) begin
      toks = {}; exp_q = {}; wdata = {};
      n = 1 + $urandom % 30; nz = 0; nmem = 0;
      for (int i = 0; i < n; i++) begin
        addr_tok_t t;
        t.addr  = addr_t'(8 * ($urandom % 1024));
        t.write = job % 2;
        t.zero  = !t.write && ($urandom % 4 == 0);
        t.reps  = t.write ? '0 : rep_t'($urandom % 3);
        toks.push_back(t);
        if (t.zero) nz++; else nmem++;
        if (!t.write) for (int r = 0; r <= int'(t.reps); r++) exp_q.push_back(t.zero ? '0 : mem[t.addr[12:3]]);
        else wdata.push_back({32'($urandom), 32'($urandom)});
      end
      sent = 0; popped = 0; pushed = 0; nreq = 0;
      while (sent < n || popped < exp_q.size()) begin
        tok_valid  = (sent < n) && ($urandom % 4 != 0);
        tok        = toks[sent % n];
        mreq_ready = ($urandom % 3 != 0);
        rego_ready = ($urandom % 3 != 0);
        regi_valid = (pushed < wdata.size()) && ($urandom % 3 != 0);
        regi_data  = wdata[pushed % (wdata.size() == 0 ? 1 : wdata.size())];
        #1;
        if (tok_valid && tok_ready) sent++;
        if (regi_valid && regi_ready) pushed++;
        if (rego_valid && rego_ready) begin
          checks++;
          if (popped >= exp_q.size() || rego_data != exp_q[popped]) begin
            failures++; $display("FAIL job %0d element %0d: %h", job, popped, rego_data);
          end
          popped++;
        end
        @(negedge clk);
      end
      tok_valid = 0; regi_valid = 0; rego_ready = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (nreq != nmem) begin failures++; $display("FAIL job %0d: %0d requests for %0d memory elements", job, nreq, nmem); end
      if (job % 2) for (int i = 0; i < n; i++) begin
        checks++;
        if (mem[toks[i].addr[12:3]] != wdata[i]) begin
          // a later write to the same address may have overwritten it
          bit later = 0;
          for (int j = i + 1; j < n; j++) if (toks[j].addr == toks[i].addr) later = 1;
          if (!later) begin failures++; $display("FAIL job %0d write %0d", job, i); end
        end
      end
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
