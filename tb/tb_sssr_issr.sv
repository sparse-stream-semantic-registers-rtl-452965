// tb_sssr_issr: one ISSR (indirection address generator, data mover and port arbiter) on a
// single-ported memory model with random stalls. Checks indirect gathers with 8/16/32-bit
// indices against data[index], an affine scatter-free write job (core pushes data), and match
// jobs under a random comparator model, where the core must see the emitted values and a
// zero for every inserted element. Also measures the gather rate on an unstalled memory:
// with n indices per word the arbiter allows n data reads per n+1 cycles.
module tb_sssr_issr;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_write = 0, cfg_ready;
  cfg_addr_t cfg_addr = 0;
  cfg_data_t cfg_wdata = 0, cfg_rdata;
  logic regi_valid = 0, regi_ready, rego_valid, rego_ready = 0;
  data_t regi_data = 0, rego_data;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq;
  data_t mrsp_data;
  logic cmp_valid, cmp_end, cmp_egress, cmp_fire = 0, cmp_ready, busy;
  idx_t cmp_idx;
  idx_mode_e cmp_mode;
  cmp_op_e cmp_op = CmpEmit;
  bit stall = 1;

  sssr_issr dut (.clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_write_i(cfg_write),
    .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .cfg_ready_o(cfg_ready),
    .regi_valid_i(regi_valid), .regi_ready_o(regi_ready), .regi_data_i(regi_data),
    .rego_valid_o(rego_valid), .rego_ready_i(rego_ready), .rego_data_o(rego_data),
    .mem_req_valid_o(mreq_valid), .mem_req_ready_i(mreq_ready), .mem_req_o(mreq),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_data_i(mrsp_data), .cmp_valid_o(cmp_valid),
    .cmp_idx_o(cmp_idx), .cmp_end_o(cmp_end), .cmp_mode_o(cmp_mode), .cmp_egress_o(cmp_egress),
    .cmp_fire_i(cmp_fire), .cmp_op_i(cmp_op), .cmp_ready_o(cmp_ready), .busy_o(busy));

  logic mready_raw;
  logic stall_now = 0;
  tb_sssr_mem #(.NumPorts(1), .StallPct(0)) mem (.clk_i(clk), .req_valid_i(mreq_valid && !stall_now),
    .req_ready_o(mready_raw), .req_i(mreq), .rsp_valid_o(mrsp_valid), .rsp_data_o(mrsp_data));
  always @(negedge clk) stall_now = stall && ($urandom % 4 == 0);
  assign mreq_ready = mready_raw && !stall_now;

  task automatic cfg_wr(input cfg_addr_t r, input int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_addr = r; cfg_wdata = v;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_valid = 0; cfg_write = 0;
  endtask

  function automatic int unsigned rd_idx(int unsigned base, int k, int sz);
    int unsigned a, v;
    a = base + k * (1 << sz); v = 0;
    for (int b = 0; b < (1 << sz); b++) v |= int'(mem.words[(a + b) >> 3][8*((a + b) % 8) +: 8]) << (8*b);
    return v;
  endfunction

  initial begin
    data_t exp[$];
    int n, sz, ibase, dbase, got, guard, pos, first, last;
    for (int i = 0; i < 16384; i++) mem.words[i] = {32'($urandom), 32'($urandom)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- indirect gathers; the last three run on an unstalled memory and check the rate
    for (int job = 0; job < 9; job++) begin
      sz = job % 3; stall = (job < 6);
      n = (job < 6) ? 1 + $urandom % 60 : 120;
      ibase = 8 * (100 + $urandom % 100) + ((($urandom % 8) >> sz) << sz);
      dbase = 8 * (4096 + $urandom % 1000);
      for (int i = 0; i < n; i++) begin
        int unsigned a = ibase + i * (1 << sz), v = $urandom % 2048;
        for (int b = 0; b < (1 << sz); b++) mem.words[(a + b) >> 3][8*((a + b) % 8) +: 8] = 8'(v >> (8*b));
      end
      cfg_wr(RegBound0, n - 1);
      cfg_wr(RegIdxCfg, (3 << 4) | (ModeIndirect << 2) | sz);
      cfg_wr(RegIdxBase, ibase);
      cfg_wr(RegRptr0, dbase);
      exp = {};
      for (int i = 0; i < n; i++) exp.push_back(mem.words[(dbase >> 3) + rd_idx(ibase, i, sz)]);
      got = 0; guard = 0; first = -1; last = 0;
      while (got < n && guard < 10000) begin
        rego_ready = stall ? ($urandom % 4 != 0) : 1;
        #1;
        if (rego_valid && rego_ready) begin
          checks++;
          if (rego_data != exp[got]) begin failures++; $display("FAIL gather size %0d element %0d", 8 << sz, got); end
          got++;
          if (first < 0) first = guard;
          last = guard;
        end
        @(negedge clk); guard++;
      end
      rego_ready = 0;
      checks++;
      if (got != n) begin failures++; $display("FAIL gather: %0d of %0d", got, n); end
      if (!stall) begin
        // steady state: n_idx data reads per n_idx + 1 port cycles
        int per, expc;
        per  = 8 >> sz;
        expc = (n - 1) * (per + 1) / per;
        checks++;
        if ((last - first) > expc + 4 || (last - first) < expc - 4) begin
          failures++; $display("FAIL rate size %0d: %0d cycles for %0d elements, expected %0d", 8 << sz, last - first, n, expc);
        end
      end
    end
    stall = 1;
    // ---- affine write job: 20 words, stride 16
    cfg_wr(RegIdxCfg, 0); cfg_wr(RegBound0, 19); cfg_wr(RegStride0, 16); cfg_wr(RegWptr0, 2000 * 8);
    exp = {};
    for (int i = 0; i < 20; i++) exp.push_back({32'($urandom), 32'($urandom)});
    got = 0;
    while (got < 20) begin
      regi_valid = ($urandom % 3 != 0); regi_data = exp[got];
      #1 if (regi_valid && regi_ready) got++;
      @(negedge clk);
    end
    regi_valid = 0;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      checks++;
      if (mem.words[2000 + 2 * i] != exp[i]) begin failures++; $display("FAIL write %0d", i); end
    end
    // ---- match jobs with a random comparator model
    for (int job = 0; job < 6; job++) begin
      n = 1 + $urandom % 30; ibase = 8 * 300; dbase = 8 * (6000 + 100 * job);
      for (int i = 0; i < n; i++) mem.words[300 + i / 4][16*(i % 4) +: 16] = 16'(3 * i);
      cfg_wr(RegBound0, n - 1);
      cfg_wr(RegIdxCfg, (ModeUnion << 2) | IdxSize16);
      cfg_wr(RegIdxBase, ibase); cfg_wr(RegRptr0, dbase);
      exp = {}; pos = 0; got = 0; guard = 0;
      while (guard < 5000) begin
        cmp_fire = 0;
        rego_ready = ($urandom % 3 != 0);
        #1;
        if (rego_valid && rego_ready) begin
          checks++;
          if (got >= exp.size() || rego_data != exp[got]) begin failures++; $display("FAIL match element %0d", got); end
          got++;
        end
        if (cmp_valid && cmp_ready && ($urandom % 2 == 0)) begin
          cmp_fire = 1;
          if (cmp_end) cmp_op = CmpEnd;
          else begin
            checks++;
            if (cmp_idx != idx_t'(3 * pos)) begin failures++; $display("FAIL match index %0d", pos); end
            cmp_op = cmp_op_e'($urandom % 3);
            if (cmp_op == CmpEmit) exp.push_back(mem.words[(dbase >> 3) + pos]);
            if (cmp_op == CmpZero) exp.push_back('0);
            if (cmp_op != CmpZero) pos++;
          end
        end
        @(negedge clk); guard++;
        if (cmp_fire && cmp_op == CmpEnd && got == exp.size()) break;
        if (cmp_fire && cmp_op == CmpEnd) begin
          cmp_fire = 0;
          while (got < exp.size() && guard < 5000) begin
            rego_ready = 1; #1;
            if (rego_valid) begin
              checks++;
              if (rego_data != exp[got]) begin failures++; $display("FAIL match element %0d", got); end
              got++;
            end
            @(negedge clk); guard++;
          end
          break;
        end
      end
      cmp_fire = 0; rego_ready = 0;
      checks++;
      if (got != exp.size() || pos != n) begin failures++; $display("FAIL match job %0d: %0d/%0d", job, got, exp.size()); end
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
