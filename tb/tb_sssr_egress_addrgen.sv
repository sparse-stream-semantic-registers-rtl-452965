// tb_sssr_egress_addrgen: programs the egress address generator for index writeback with
// 8/16/32-bit indices at unaligned bases, feeds it a random sorted joint index stream ending
// with the end marker, and checks the data-address tokens (consecutive words from the data
// base), the index array written through the strobed index port, the joint length register,
// and that index writing never runs more than the lead depth ahead of the data tokens. An
// affine write job checks the regular SSR behaviour.
module tb_sssr_egress_addrgen;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_write = 0, cfg_ready;
  cfg_addr_t cfg_addr = 0;
  cfg_data_t cfg_wdata = 0, cfg_rdata;
  logic jvalid = 0, jready, jend = 0, ireq_valid, ireq_ready = 0, tok_valid, tok_ready = 0, egress, busy;
  idx_t jidx = 0;
  mem_req_t ireq;
  addr_tok_t tok;
  byte unsigned img[4096];

  sssr_egress_addrgen dut (.clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_write_i(cfg_write),
    .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .cfg_ready_o(cfg_ready),
    .jnt_valid_i(jvalid), .jnt_ready_o(jready), .jnt_idx_i(jidx), .jnt_end_i(jend),
    .idx_req_valid_o(ireq_valid), .idx_req_ready_i(ireq_ready), .idx_req_o(ireq),
    .tok_valid_o(tok_valid), .tok_ready_i(tok_ready), .tok_o(tok), .egress_o(egress), .busy_o(busy));

  always @(posedge clk) if (ireq_valid && ireq_ready) begin
    if (!ireq.write) begin failures++; $display("FAIL index read"); end
    for (int b = 0; b < 8; b++) if (ireq.strb[b]) img[(int'(ireq.addr) + b) % 4096] = ireq.data[8*b +: 8];
  end

  task automatic cfg_wr(input cfg_addr_t r, input int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_addr = r; cfg_wdata = v;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_valid = 0; cfg_write = 0;
  endtask

  initial begin
    int sz, nb, ibase, dbase, n, sent, ntok, lead, guard, maxlead;
    idx_t vals[$];
    longint unsigned v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    maxlead = 0;
    for (int job = 0; job < 12; job++) begin
      sz = job % 3; nb = 1 << sz;
      for (int i = 0; i < 4096; i++) img[i] = 8'hEE;
      ibase = 8 * (4 + $urandom % 100) + ((($urandom % 8) >> sz) << sz);
      dbase = 8 * (2048 + $urandom % 1000);
      vals = {}; v = 0;
      n = $urandom % 40;
      for (int i = 0; i < n; i++) begin v += 1 + $urandom % 5; vals.push_back(idx_t'(v)); end
      cfg_wr(RegIdxCfg, (((job % 2) ? ModeUnion : ModeIntersect) << 2) | sz);
      cfg_wr(RegIdxBase, ibase);
      cfg_wr(RegWptr0, dbase);
      sent = 0; ntok = 0; guard = 0;
      while ((sent <= n || ntok < n) && guard < 5000) begin
        jvalid     = (sent <= n) && ($urandom % 3 != 0);
        jend       = (sent == n);
        jidx       = jend ? '0 : vals[sent];
        ireq_ready = ($urandom % 4 != 0);
        tok_ready  = ($urandom % 3 == 0);
        #1;
        if (jvalid && jready) sent++;
        if (tok_valid && tok_ready) begin
          checks++;
          if (tok.addr != addr_t'(dbase + 8 * ntok) || !tok.write || tok.zero) begin
            failures++; $display("FAIL job %0d token %0d", job, ntok);
          end
          ntok++;
        end
        lead = (sent > n ? n : sent) - ntok;
        if (lead > maxlead) maxlead = lead;
        @(negedge clk); guard++;
      end
      jvalid = 0; jend = 0; tok_ready = 0; ireq_ready = 1;
      repeat (4) @(negedge clk);
      for (int i = 0; i < n; i++) begin
        v = 0;
        for (int b = 0; b < nb; b++) v |= longint'(img[ibase + i*nb + b]) << (8*b);
        checks++;
        if (v != longint'(vals[i] & ((64'd1 << (8*nb)) - 1))) begin failures++; $display("FAIL job %0d index %0d", job, i); end
      end
      checks++;
      if (img[ibase + n*nb] != 8'hEE || img[ibase - 1] != 8'hEE) begin failures++; $display("FAIL job %0d bytes outside", job); end
      @(negedge clk); cfg_valid = 1; cfg_write = 0; cfg_addr = RegJointLen; #1;
      checks++;
      if (cfg_rdata != cfg_data_t'(n) || busy || ntok != n) begin failures++; $display("FAIL job %0d joint length %0d", job, cfg_rdata); end
      @(negedge clk); cfg_valid = 0;
    end
    checks++;
    if (maxlead > 4 + 1) begin failures++; $display("FAIL index lead %0d", maxlead); end
    // affine write job, 5 elements
    cfg_wr(RegIdxCfg, 0); cfg_wr(RegBound0, 4); cfg_wr(RegStride0, 24); cfg_wr(RegWptr0, 800);
    ntok = 0; tok_ready = 1;
    repeat (10) begin
      #1 if (tok_valid) begin
        checks++;
        if (tok.addr != addr_t'(800 + 24 * ntok) || egress) failures++;
        ntok++;
      end
      @(negedge clk);
    end
    checks++;
    if (ntok != 5) begin failures++; $display("FAIL affine tokens %0d", ntok); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (80000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
