// tb_sssr_essr: one ESSR (egress address generator, data mover and port arbiter) on a
// single-ported memory model with random stalls. Egress jobs take a random joint index stream
// and the core's result values at independent random rates; the testbench checks the written
// index array, the written values and the joint length. An affine read job checks that the
// ESSR also works as a regular read stream.
module tb_sssr_essr;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_write = 0, cfg_ready;
  cfg_addr_t cfg_addr = 0;
  cfg_data_t cfg_wdata = 0, cfg_rdata;
  logic regi_valid = 0, regi_ready, rego_valid, rego_ready = 0;
  data_t regi_data = 0, rego_data;
  logic mreq_valid, mreq_ready, mrsp_valid, mready_raw;
  mem_req_t mreq;
  data_t mrsp_data;
  logic jvalid = 0, jready, jend = 0, egress, busy;
  idx_t jidx = 0;
  logic stall_now = 0;

  sssr_essr dut (.clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_write_i(cfg_write),
    .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .cfg_ready_o(cfg_ready),
    .regi_valid_i(regi_valid), .regi_ready_o(regi_ready), .regi_data_i(regi_data),
    .rego_valid_o(rego_valid), .rego_ready_i(rego_ready), .rego_data_o(rego_data),
    .mem_req_valid_o(mreq_valid), .mem_req_ready_i(mreq_ready), .mem_req_o(mreq),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_data_i(mrsp_data), .jnt_valid_i(jvalid),
    .jnt_ready_o(jready), .jnt_idx_i(jidx), .jnt_end_i(jend), .egress_o(egress), .busy_o(busy));

  tb_sssr_mem #(.NumPorts(1), .StallPct(0)) mem (.clk_i(clk), .req_valid_i(mreq_valid && !stall_now),
    .req_ready_o(mready_raw), .req_i(mreq), .rsp_valid_o(mrsp_valid), .rsp_data_o(mrsp_data));
  always @(negedge clk) stall_now = ($urandom % 4 == 0);
  assign mreq_ready = mready_raw && !stall_now;

  task automatic cfg_wr(input cfg_addr_t r, input int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_addr = r; cfg_wdata = v;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_valid = 0; cfg_write = 0;
  endtask

  initial begin
    idx_t vals[$];
    data_t dat[$];
    int n, sz, ibase, dbase, sent, pushed, guard, v, got;
    longint unsigned r;
    for (int i = 0; i < 16384; i++) mem.words[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 10; job++) begin
      sz = job % 3;
      n = (job == 9) ? 1 + $urandom % 49 : $urandom % 50;
      ibase = 8 * (100 + 20 * job) + ((($urandom % 8) >> sz) << sz);
      dbase = 8 * (4000 + 100 * job);
      vals = {}; dat = {}; v = 0;
      for (int i = 0; i < n; i++) begin
        v += 1 + $urandom % 3; vals.push_back(idx_t'(v)); dat.push_back({32'($urandom), 32'($urandom)});
      end
      cfg_wr(RegIdxCfg, (ModeIntersect << 2) | sz);
      cfg_wr(RegIdxBase, ibase);
      cfg_wr(RegWptr0, dbase);
      sent = 0; pushed = 0; guard = 0;
      while ((sent <= n || pushed < n) && guard < 5000) begin
        jvalid = (sent <= n) && ($urandom % 2 == 0);
        jend = (sent == n); jidx = jend ? '0 : vals[sent];
        regi_valid = (pushed < n) && ($urandom % 2 == 0);
        regi_data = dat[pushed % (n == 0 ? 1 : n)];
        #1;
        if (jvalid && jready) sent++;
        if (regi_valid && regi_ready) pushed++;
        @(negedge clk); guard++;
      end
      jvalid = 0; jend = 0; regi_valid = 0;
      repeat (30) @(negedge clk);
      for (int i = 0; i < n; i++) begin
        int unsigned a;
        a = ibase + i * (1 << sz); r = 0;
        for (int b = 0; b < (1 << sz); b++) r |= longint'(mem.words[(a + b) >> 3][8*((a + b) % 8) +: 8]) << (8*b);
        checks += 2;
        if (r != longint'(vals[i])) begin failures++; $display("FAIL job %0d index %0d", job, i); end
        if (mem.words[(dbase >> 3) + i] != dat[i]) begin failures++; $display("FAIL job %0d value %0d", job, i); end
      end
      @(negedge clk); cfg_valid = 1; cfg_write = 0; cfg_addr = RegJointLen; #1;
      checks++;
      if (cfg_rdata != cfg_data_t'(n) || busy) begin failures++; $display("FAIL job %0d joint length %0d", job, cfg_rdata); end
      @(negedge clk); cfg_valid = 0;
    end
    // affine read job over the values of the last job
    cfg_wr(RegIdxCfg, 0); cfg_wr(RegBound0, n - 1); cfg_wr(RegStride0, 8); cfg_wr(RegRptr0, dbase);
    got = 0; guard = 0;
    while (got < n && guard < 2000) begin
      rego_ready = ($urandom % 2 == 0);
      #1 if (rego_valid && rego_ready) begin
        checks++;
        if (rego_data != dat[got]) begin failures++; $display("FAIL read %0d", got); end
        got++;
      end
      @(negedge clk); guard++;
    end
    checks++;
    if (got != n) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
