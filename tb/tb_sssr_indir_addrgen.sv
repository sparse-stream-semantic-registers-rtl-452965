// tb_sssr_indir_addrgen: programs the indirection address generator through its register port
// and checks its address tokens in all three modes: a 2-D affine job with repetition,
// indirect jobs with 8/16/32/64-bit indices at unaligned index bases (addresses must equal
// data base + (index << shift)), and match jobs driven by a random comparator model (emit,
// skip, zero, end). Index words are served by a memory model with random backpressure and a
// one-cycle response. Also checks that the number of outstanding index fetches never exceeds
// the index queue depth.
module tb_sssr_indir_addrgen;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_write = 0, cfg_ready;
  cfg_addr_t cfg_addr = 0;
  cfg_data_t cfg_wdata = 0, cfg_rdata;
  logic ireq_valid, ireq_ready = 0, irsp_valid = 0;
  mem_req_t ireq;
  data_t irsp_data = 0;
  logic tok_valid, tok_ready = 0;
  addr_tok_t tok;
  logic cmp_valid, cmp_end, cmp_egress, cmp_fire = 0, cmp_ready, busy;
  idx_t cmp_idx;
  idx_mode_e cmp_mode;
  cmp_op_e cmp_op = CmpEmit;
  data_t words[2048];
  int outst = 0, max_outst = 0;

  sssr_indir_addrgen dut (.clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_write_i(cfg_write),
    .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .cfg_ready_o(cfg_ready),
    .idx_req_valid_o(ireq_valid), .idx_req_ready_i(ireq_ready), .idx_req_o(ireq),
    .idx_rsp_valid_i(irsp_valid), .idx_rsp_data_i(irsp_data), .tok_valid_o(tok_valid),
    .tok_ready_i(tok_ready), .tok_o(tok), .cmp_valid_o(cmp_valid), .cmp_idx_o(cmp_idx),
    .cmp_end_o(cmp_end), .cmp_mode_o(cmp_mode), .cmp_egress_o(cmp_egress), .cmp_fire_i(cmp_fire),
    .cmp_op_i(cmp_op), .cmp_ready_o(cmp_ready), .busy_o(busy));

  always @(negedge clk) ireq_ready = ($urandom % 3 != 0);
  always @(posedge clk) begin
    irsp_valid <= ireq_valid && ireq_ready;
    irsp_data  <= words[ireq.addr[AddrWidth-1:3] % 2048];
    outst = outst + int'(ireq_valid && ireq_ready) - int'(irsp_valid);
    if (outst > max_outst) max_outst = outst;
  end

  task automatic cfg_wr(input cfg_addr_t r, input int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_addr = r; cfg_wdata = v;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_valid = 0; cfg_write = 0;
  endtask

  function automatic longint unsigned rd_idx(int unsigned base, int k, int sz);
    longint unsigned v = 0;
    int unsigned a;
    a = base + k * (1 << sz);
    for (int b = 0; b < (1 << sz); b++) v |= longint'(words[(a + b) >> 3][8*((a + b) % 8) +: 8]) << (8*b);
    return v;
  endfunction

  // collect n tokens and compare with exp
  task automatic collect(input addr_tok_t exp[$], input string what);
    int got = 0, guard = 0;
    while (got < exp.size() && guard < 20000) begin
      tok_ready = ($urandom % 4 != 0);
      #1;
      if (tok_valid && tok_ready) begin
        checks++;
        if (tok.addr != exp[got].addr || tok.zero != exp[got].zero || tok.write != exp[got].write || tok.reps != exp[got].reps) begin
          failures++; if (failures < 10) $display("FAIL %s token %0d: %h exp %h", what, got, tok.addr, exp[got].addr);
        end
        got++;
      end
      @(negedge clk); guard++;
    end
    tok_ready = 0;
    checks++;
    if (got != exp.size()) begin failures++; $display("FAIL %s: %0d of %0d tokens", what, got, exp.size()); end
  endtask

  initial begin
    addr_tok_t exp[$];
    int n, sz, ibase, dbase, shift, k, pos, guard;
    addr_tok_t t;
    for (int i = 0; i < 2048; i++) words[i] = {32'($urandom), 32'($urandom)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- affine 2-D job, 3 x 4 elements, repetition 1
    cfg_wr(RegRepeat, 1); cfg_wr(RegIdxCfg, 0);
    cfg_wr(RegBound0, 3); cfg_wr(RegBound0 + 1, 2);
    cfg_wr(RegStride0, 16); cfg_wr(RegStride0 + 1, 200 - 3 * 16);
    cfg_wr(RegRptr0 + 1, 4096);
    exp = {};
    for (int j = 0; j < 3; j++) for (int i = 0; i < 4; i++) begin
      t = '{addr: addr_t'(4096 + 200 * j + 16 * i), zero: 0, write: 0, reps: 1}; exp.push_back(t);
    end
    collect(exp, "affine");
    cfg_wr(RegRepeat, 0);
    // ---- indirect jobs
    for (int job = 0; job < 12; job++) begin
      sz = job % 4; n = 1 + $urandom % 40;
      ibase = 8 * (1 + $urandom % 100) + ((($urandom % 8) >> sz) << sz);
      dbase = 8 * ($urandom % 2048); shift = $urandom % 4;
      cfg_wr(RegBound0, n - 1);
      cfg_wr(RegIdxCfg, (shift << 4) | (ModeIndirect << 2) | sz);
      cfg_wr(RegIdxBase, ibase);
      if (job % 3 == 2) cfg_wr(RegWptr0, dbase); else cfg_wr(RegRptr0, dbase);
      exp = {};
      for (int i = 0; i < n; i++) begin
        t = '{addr: addr_t'(dbase + (idx_t'(rd_idx(ibase, i, sz)) << shift)), zero: 0, write: (job % 3 == 2), reps: 0};
        exp.push_back(t);
      end
      collect(exp, $sformatf("indirect size %0d", 8 << sz));
    end
    // ---- match jobs against a random comparator
    for (int job = 0; job < 8; job++) begin
      sz = job % 3; n = 1 + $urandom % 30;
      ibase = 8 * (200 + $urandom % 100); dbase = 8 * ($urandom % 1024);
      cfg_wr(RegBound0, n - 1);
      cfg_wr(RegIdxCfg, (((job % 2) ? ModeUnion : ModeIntersect) << 2) | sz);
      cfg_wr(RegIdxBase, ibase);
      cfg_wr(RegRptr0, dbase);
      exp = {}; k = 0; pos = 0; guard = 0;
      while (guard < 5000) begin
        cmp_fire = 0;
        #1;
        if (cmp_valid && cmp_ready && ($urandom % 2 == 0)) begin
          checks++;
          if (cmp_mode != ((job % 2) ? ModeUnion : ModeIntersect)) failures++;
          if (cmp_end) begin
            checks++;
            if (pos != n) begin failures++; $display("FAIL match end after %0d of %0d", pos, n); end
            cmp_op = CmpEnd; cmp_fire = 1;
          end else begin
            checks++;
            if (cmp_idx != idx_t'(rd_idx(ibase, pos, sz))) begin failures++; $display("FAIL match index %0d", pos); end
            cmp_op = cmp_op_e'($urandom % 3);
            cmp_fire = 1;
            if (cmp_op == CmpEmit) begin t = '{addr: addr_t'(dbase + 8 * pos), zero: 0, write: 0, reps: 0}; exp.push_back(t); end
            if (cmp_op == CmpZero) begin t = '{addr: addr_t'(dbase + 8 * pos), zero: 1, write: 0, reps: 0}; exp.push_back(t); end
            if (cmp_op != CmpZero) pos++;
          end
        end
        tok_ready = 1;
        if (tok_valid) begin
          checks++;
          if (k >= exp.size() || tok.addr != exp[k].addr || tok.zero != exp[k].zero) begin
            failures++; $display("FAIL match token %0d", k);
          end
          k++;
        end
        @(negedge clk); guard++;
        if (cmp_fire && cmp_op == CmpEnd) begin cmp_fire = 0; break; end
      end
      cmp_fire = 0;
      repeat (2) begin
        #1 if (tok_valid) begin
          checks++;
          if (k >= exp.size() || tok.addr != exp[k].addr || tok.zero != exp[k].zero) failures++;
          k++;
        end
        @(negedge clk);
      end
      tok_ready = 0;
      checks++;
      if (k != exp.size() || busy) begin failures++; $display("FAIL match job %0d: %0d/%0d tokens busy=%b", job, k, exp.size(), busy); end
    end
    checks++;
    if (max_outst > 2) begin failures++; $display("FAIL %0d outstanding index fetches", max_outst); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
