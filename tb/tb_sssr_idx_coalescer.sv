// tb_sssr_idx_coalescer: streams indices of every size into the coalescer at unaligned start
// addresses with random write backpressure, applies the emitted strobed word writes to a
// byte image, and checks that exactly the indices, and no other bytes, were written.
module tb_sssr_idx_coalescer;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, ivalid = 0, iready, evalid = 0, eready, wvalid, wready = 0;
  idx_size_e size = IdxSize8;
  logic [2:0] fpos = 0;
  addr_t base = 0;
  idx_t idx = 0;
  mem_req_t wreq;
  byte unsigned img[512];

  sssr_idx_coalescer dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .size_i(size),
    .first_pos_i(fpos), .base_i(base), .idx_valid_i(ivalid), .idx_ready_o(iready), .idx_i(idx),
    .end_valid_i(evalid), .end_ready_o(eready), .wr_valid_o(wvalid), .wr_ready_i(wready),
    .wr_req_o(wreq));

  always @(posedge clk) if (wvalid && wready)
    for (int b = 0; b < 8; b++) if (wreq.strb[b]) img[(int'(wreq.addr) + b) % 512] = wreq.data[8*b +: 8];

  initial begin
    int sz, nb, n, sent, vals[$];
    longint unsigned v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 16; job++) begin
      sz = job % 4; nb = 1 << sz;
      for (int i = 0; i < 512; i++) img[i] = 8'hEE;
      size = idx_size_e'(sz);
      base = addr_t'(64 + (($urandom % 8) / nb) * nb);
      fpos = 3'(base[2:0] >> sz);
      n = 1 + $urandom % 25;
      vals = {};
      for (int i = 0; i < n; i++) vals.push_back(int'($urandom & ((sz == 0) ? 32'hff : (sz == 1) ? 32'hffff : 32'hffffffff)));
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      sent = 0;
      while (1) begin
        wready = ($urandom % 3 != 0);
        ivalid = (sent < n) && ($urandom % 4 != 0);
        evalid = (sent == n);
        idx = idx_t'(vals[sent % n]);
        #1;
        if (evalid && eready) break;
        if (ivalid && iready) sent++;
        @(negedge clk);
      end
      @(negedge clk); evalid = 0; ivalid = 0;
      wready = 1;
      repeat (3) @(negedge clk);
      wready = 0;
      for (int i = 0; i < n; i++) begin
        v = 0;
        for (int b = 0; b < nb; b++) v |= longint'(img[int'(base) + i*nb + b]) << (8*b);
        checks++;
        if (v != longint'(unsigned'(vals[i]))) begin failures++; $display("FAIL size %0d idx %0d: %h exp %h", nb, i, v, vals[i]); end
      end
      checks++;
      if (img[int'(base) - 1] != 8'hEE || img[int'(base) + n*nb] != 8'hEE) begin
        failures++; $display("FAIL job %0d: bytes outside the array written", job);
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
