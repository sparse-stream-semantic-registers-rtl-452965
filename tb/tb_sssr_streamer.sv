// tb_sssr_streamer: end-to-end test of the SSSR streamer at its default parameters.
//
// A behavioural TCDM (tb_sssr_mem) serves the three lane ports; the testbench plays the
// host core: it writes job configurations on the config port and acts as the FPU on the
// register-switch ports, consuming and producing one stream element per cycle when the
// streams allow. The kernels, after the paper's sparse linear-algebra kernels:
//   1. sV x dV: ISSR 0 streams a's values (affine), ISSR 1 gathers b at a's 16-bit indices
//      (indirection, unaligned index base); checks every operand pair, the dot product, and
//      the rate against the 4/5 limit of 16-bit indices on a shared port.
//   2. sV x sV: both ISSRs in intersection mode; the stream-control queue ends the loop;
//      checks each matched pair against a reference intersection.
//   3. sV + sV: both ISSRs in union mode with egress; the FPU model adds each pair (IEEE
//      doubles) and writes the sum to ft2; the ESSR writes the joint indices and sums; checks
//      memory and the joint-length register.
//   4. Scatter: ISSR 1 in indirect write mode stores core-written values at 8-bit indices.
//   5. Affine 2-D read with repetition, launched into the shadow registers while kernel 4 runs.
// It counts how often each mechanism fired (indirection, skip, zero insertion, egress index
// write, arbitration conflict, shadow launch, repetition, config stall) and fails any that
// never did.
module tb_sssr_streamer;
  import sssr_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------------------------------------------------------- DUT and memory
  logic            cfg_valid = 0, cfg_write = 0;
  logic [6:0]      cfg_addr = 0;
  cfg_data_t       cfg_wdata = 0, cfg_rdata;
  logic            cfg_ready;
  logic            ssr_en = 0;
  logic [2:0][4:0] rd_addr = {5'd2, 5'd1, 5'd0};
  logic [2:0]      rd_en = 0, rd_done = 0, rd_is_ssr, rd_valid;
  data_t [2:0]     rd_data;
  logic [4:0]      wr_addr = 5'd2;
  logic            wr_valid = 0, wr_is_ssr, wr_ready;
  data_t           wr_data = 0;
  logic            seq_valid, seq_ready = 0, seq_data;
  logic [2:0]      mreq_valid, mreq_ready, mrsp_valid, busy;
  mem_req_t [2:0]  mreq;
  data_t [2:0]     mrsp_data;

  sssr_streamer dut (
    .clk_i (clk), .rst_ni (rst_n),
    .cfg_valid_i (cfg_valid), .cfg_write_i (cfg_write), .cfg_addr_i (cfg_addr),
    .cfg_wdata_i (cfg_wdata), .cfg_rdata_o (cfg_rdata), .cfg_ready_o (cfg_ready),
    .ssr_en_i (ssr_en),
    .rd_addr_i (rd_addr), .rd_en_i (rd_en), .rd_done_i (rd_done), .rd_is_ssr_o (rd_is_ssr),
    .rd_valid_o (rd_valid), .rd_data_o (rd_data),
    .wr_addr_i (wr_addr), .wr_valid_i (wr_valid), .wr_data_i (wr_data),
    .wr_is_ssr_o (wr_is_ssr), .wr_ready_o (wr_ready),
    .seq_valid_o (seq_valid), .seq_ready_i (seq_ready), .seq_data_o (seq_data),
    .mem_req_valid_o (mreq_valid), .mem_req_ready_i (mreq_ready), .mem_req_o (mreq),
    .mem_rsp_valid_i (mrsp_valid), .mem_rsp_data_i (mrsp_data),
    .busy_o (busy)
  );

  tb_sssr_mem #(.NumPorts(3), .Words(16384), .StallPct(0)) mem (
    .clk_i (clk), .req_valid_i (mreq_valid), .req_ready_o (mreq_ready), .req_i (mreq),
    .rsp_valid_o (mrsp_valid), .rsp_data_o (mrsp_data)
  );

  // ---------------------------------------------------------------- mechanism counters
  int n_indir = 0, n_skip = 0, n_zero = 0, n_egress_wr = 0, n_conflict = 0;
  int n_shadow = 0, n_reps = 0, n_cfg_stall = 0, n_match = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.gen_issr[1].i_issr.i_addrgen.tok_load && dut.gen_issr[1].i_issr.i_addrgen.run_q.idx_mode == ModeIndirect) n_indir++;
    for (int i = 0; i < 2; i++) begin
      if (dut.op_fire[i] && dut.op[i] == CmpSkip) n_skip++;
      if (dut.op_fire[i] && dut.op[i] == CmpZero) n_zero++;
    end
    if (dut.op_fire == 2'b11 && dut.op[0] == CmpEmit && dut.op[1] == CmpEmit) n_match++;
    if (dut.i_essr.arb_valid[0] && dut.i_essr.arb_ready[0]) n_egress_wr++;
    if (&dut.gen_issr[1].i_issr.arb_valid) n_conflict++;
    if (dut.gen_issr[0].i_issr.i_addrgen.pending_q && dut.gen_issr[0].i_issr.i_addrgen.busy_q) n_shadow++;
    if (dut.rego_valid[0] && dut.rego_ready[0] && dut.gen_issr[0].i_issr.i_mover.rep_q != 0) n_reps++;
    if (cfg_valid && !cfg_ready) n_cfg_stall++;
  end

  // ---------------------------------------------------------------- host helpers
  task automatic cfg_wr(input int lane, input cfg_addr_t r, input int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_addr = {2'(lane), r}; cfg_wdata = v;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_valid = 0; cfg_write = 0;
  endtask

  task automatic cfg_rd(input int lane, input cfg_addr_t r, output int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 0; cfg_addr = {2'(lane), r};
    #1 v = cfg_rdata;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  function automatic void mem_w64(input int unsigned byte_addr, input data_t v);
    mem.words[byte_addr >> 3] = v;
  endfunction
  function automatic data_t mem_r64(input int unsigned byte_addr);
    return mem.words[byte_addr >> 3];
  endfunction
  function automatic void mem_widx(input int unsigned base, input int k, input int size, input int unsigned v);
    int unsigned a = base + k * (1 << size);
    for (int b = 0; b < (1 << size); b++) mem.words[(a + b) >> 3][8*((a + b) % 8) +: 8] = 8'(v >> (8*b));
  endfunction
  function automatic int unsigned mem_ridx(input int unsigned base, input int k, input int size);
    int unsigned a = base + k * (1 << size), v = 0;
    for (int b = 0; b < (1 << size); b++) v |= int'(mem.words[(a + b) >> 3][8*((a + b) % 8) +: 8]) << (8*b);
    return v;
  endfunction

  task automatic wait_idle();
    int guard = 0;
    do begin @(negedge clk); guard++; end while (busy != 0 && guard < 100000);
  endtask

  // random sorted index set of dimension dim with density pct
  task automatic gen_sparse(input int dim, input int pct, output int idcs[$]);
    idcs = {};
    for (int i = 0; i < dim; i++) if (($urandom % 100) < pct) idcs.push_back(i);
  endtask

  localparam int unsigned A_VAL = 'h00000, A_IDX = 'h04002, B_DEN = 'h08000;
  localparam int unsigned B_VAL = 'h0C000, B_IDX = 'h10006, C_VAL = 'h14000, C_IDX = 'h18004;
  localparam int unsigned S_DST = 'h1C000, S_IDX = 'h1E003;

  // ---------------------------------------------------------------- test sequence
  initial begin : main
    int a_idx[$], b_idx[$];
    int n, k, t0, t1, ia, ib;
    int unsigned v;
    real dot, ref_dot;
    data_t x, y;

    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    ssr_en = 1;

    // ========== 1. sV x dV with 16-bit indices
    gen_sparse(2000, 10, a_idx);
    n = a_idx.size();
    for (int i = 0; i < 2048; i++) mem_w64(B_DEN + 8*i, $realtobits(real'(i) * 0.5));
    for (int i = 0; i < n; i++) begin
      mem_w64(A_VAL + 8*i, $realtobits(real'(i + 1)));
      mem_widx(A_IDX, i, 1, a_idx[i]);
    end
    cfg_wr(0, RegBound0, n - 1);  cfg_wr(0, RegStride0, 8); cfg_wr(0, RegIdxCfg, 0);
    cfg_wr(0, RegRptr0, A_VAL);
    cfg_wr(1, RegBound0, n - 1);
    cfg_wr(1, RegIdxCfg, (3 << 4) | (ModeIndirect << 2) | IdxSize16);
    cfg_wr(1, RegIdxBase, A_IDX);
    cfg_wr(1, RegRptr0, B_DEN);
    ref_dot = 0; dot = 0;
    for (int i = 0; i < n; i++) ref_dot += real'(i + 1) * real'(a_idx[i]) * 0.5;
    k = 0; t0 = -1; t1 = 0;
    rd_en = 3'b011;
    while (k < n) begin
      @(negedge clk);
      rd_done = (rd_valid[0] && rd_valid[1]) ? 3'b011 : 3'b000;
      if (rd_done[0]) begin
        if (k == n / 4) t0 = int'(cycle);
        if (k == (3 * n) / 4) t1 = int'(cycle);
        check(rd_data[0] == $realtobits(real'(k + 1)), $sformatf("sVxdV a[%0d]", k));
        check(rd_data[1] == $realtobits(real'(a_idx[k]) * 0.5), $sformatf("sVxdV b[a_idx[%0d]] got %f exp %0d", k, $bitstoreal(rd_data[1]), a_idx[k]));
        dot += $bitstoreal(rd_data[0]) * $bitstoreal(rd_data[1]);
        k++;
      end
    end
    @(negedge clk); rd_done = 0; rd_en = 0;
    check(dot == ref_dot, "sVxdV dot product");
    // steady state: 16-bit indices -> 4 of 5 port cycles carry data (80 %)
    $display("sVxdV: %0d nonzeros, %0d cycles for %0d elements in steady state", n, t1 - t0, (3*n)/4 - n/4);
    check((t1 - t0) <= ((((3*n)/4 - n/4) * 5) / 4) + 4, "sVxdV steady-state rate reaches 4/5");
    check((t1 - t0) >= ((((3*n)/4 - n/4) * 5) / 4) - 4, "sVxdV rate bounded by shared port (4/5)");
    wait_idle();

    // ========== 2. sV x sV intersection, 16-bit indices
    gen_sparse(600, 30, a_idx);
    gen_sparse(600, 20, b_idx);
    for (int i = 0; i < a_idx.size(); i++) begin
      mem_w64(A_VAL + 8*i, 64'(1000 + i)); mem_widx(A_IDX, i, 1, a_idx[i]);
    end
    for (int i = 0; i < b_idx.size(); i++) begin
      mem_w64(B_VAL + 8*i, 64'(5000 + i)); mem_widx(B_IDX, i, 1, b_idx[i]);
    end
    cfg_wr(0, RegBound0, a_idx.size() - 1);
    cfg_wr(0, RegIdxCfg, (ModeIntersect << 2) | IdxSize16);
    cfg_wr(0, RegIdxBase, A_IDX); cfg_wr(0, RegRptr0, A_VAL);
    cfg_wr(1, RegBound0, b_idx.size() - 1);
    cfg_wr(1, RegIdxCfg, (ModeIntersect << 2) | IdxSize16);
    cfg_wr(1, RegIdxBase, B_IDX); cfg_wr(1, RegRptr0, B_VAL);
    ia = 0; ib = 0; k = 0;
    rd_en = 3'b011;
    forever begin
      @(negedge clk);
      rd_done = 0; seq_ready = 0;
      if (seq_valid && !seq_data) begin seq_ready = 1; break; end
      if (seq_valid && rd_valid[0] && rd_valid[1]) begin
        while (ia < a_idx.size() && ib < b_idx.size() && a_idx[ia] != b_idx[ib])
          if (a_idx[ia] < b_idx[ib]) ia++; else ib++;
        check(rd_data[0] == 64'(1000 + ia) && rd_data[1] == 64'(5000 + ib),
              $sformatf("sVxsV pair %0d", k));
        ia++; ib++; k++;
        rd_done = 3'b011; seq_ready = 1;
      end
    end
    @(negedge clk); seq_ready = 0; rd_en = 0; rd_done = 0;
    while (ia < a_idx.size() && ib < b_idx.size() && a_idx[ia] != b_idx[ib])
      if (a_idx[ia] < b_idx[ib]) ia++; else ib++;
    check(ia >= a_idx.size() || ib >= b_idx.size(), "sVxsV: no intersection left unreported");
    $display("sVxsV: %0d x %0d nonzeros, %0d matches", a_idx.size(), b_idx.size(), k);
    wait_idle();

    // ========== 3. sV + sV union with egress, 16-bit indices
    begin
      int c_idx[$];
      real c_val[$];
      data_t wq[$];
      int m;
      gen_sparse(500, 15, a_idx);
      gen_sparse(500, 25, b_idx);
      for (int i = 0; i < a_idx.size(); i++) begin
        mem_w64(A_VAL + 8*i, $realtobits(real'(i) + 0.25)); mem_widx(A_IDX, i, 1, a_idx[i]);
      end
      for (int i = 0; i < b_idx.size(); i++) begin
        mem_w64(B_VAL + 8*i, $realtobits(real'(i) * 2.0)); mem_widx(B_IDX, i, 1, b_idx[i]);
      end
      ia = 0; ib = 0;
      while (ia < a_idx.size() || ib < b_idx.size()) begin
        if (ib >= b_idx.size() || (ia < a_idx.size() && a_idx[ia] < b_idx[ib])) begin
          c_idx.push_back(a_idx[ia]); c_val.push_back(real'(ia) + 0.25); ia++;
        end else if (ia >= a_idx.size() || b_idx[ib] < a_idx[ia]) begin
          c_idx.push_back(b_idx[ib]); c_val.push_back(real'(ib) * 2.0); ib++;
        end else begin
          c_idx.push_back(a_idx[ia]); c_val.push_back(real'(ia) + 0.25 + real'(ib) * 2.0); ia++; ib++;
        end
      end
      cfg_wr(0, RegBound0, a_idx.size() - 1);
      cfg_wr(0, RegIdxCfg, (1 << 8) | (ModeUnion << 2) | IdxSize16);
      cfg_wr(0, RegIdxBase, A_IDX); cfg_wr(0, RegRptr0, A_VAL);
      cfg_wr(1, RegBound0, b_idx.size() - 1);
      cfg_wr(1, RegIdxCfg, (ModeUnion << 2) | IdxSize16);
      cfg_wr(1, RegIdxBase, B_IDX); cfg_wr(1, RegRptr0, B_VAL);
      cfg_wr(2, RegIdxCfg, (ModeUnion << 2) | IdxSize16);
      cfg_wr(2, RegIdxBase, C_IDX); cfg_wr(2, RegWptr0, C_VAL);
      rd_en = 3'b011; m = 0;
      forever begin
        @(negedge clk);
        rd_done = 0; seq_ready = 0;
        // result write port: present the oldest pending sum
        wr_valid = (wq.size() > 0);
        wr_data  = wr_valid ? wq[0] : '0;
        if (wr_valid && wr_ready) void'(wq.pop_front());
        if (seq_valid && !seq_data) begin seq_ready = 1; break; end
        if (seq_valid && rd_valid[0] && rd_valid[1] && wq.size() < 2) begin
          wq.push_back($realtobits($bitstoreal(rd_data[0]) + $bitstoreal(rd_data[1])));
          rd_done = 3'b011; seq_ready = 1; m++;
        end
      end
      @(negedge clk); seq_ready = 0; rd_done = 0; rd_en = 0;
      while (wq.size() > 0) begin
        wr_valid = 1; wr_data = wq[0];
        if (wr_ready) void'(wq.pop_front());
        @(negedge clk);
      end
      wr_valid = 0;
      wait_idle();
      repeat (4) @(negedge clk);
      cfg_rd(2, RegJointLen, v);
      check(v == c_idx.size(), $sformatf("sV+sV joint length %0d, expected %0d", v, c_idx.size()));
      check(m == c_idx.size(), "sV+sV element count");
      for (int i = 0; i < c_idx.size(); i++) begin
        check(mem_ridx(C_IDX, i, 1) == c_idx[i], $sformatf("sV+sV index %0d", i));
        check(mem_r64(C_VAL + 8*i) == $realtobits(c_val[i]), $sformatf("sV+sV value %0d", i));
      end
      check(mem_ridx(C_IDX, c_idx.size(), 1) == 0, "sV+sV: no index written past the end");
      $display("sV+sV: %0d + %0d nonzeros -> %0d", a_idx.size(), b_idx.size(), c_idx.size());
    end

    // ========== 4. scatter with 8-bit indices (ISSR 1 indirect write) and
    // ========== 5. shadow-launched affine 2-D read with repetition on ISSR 0
    begin
      int perm[$];
      data_t wq[$];
      for (int i = 0; i < 200; i++) perm.push_back(i);
      perm.shuffle();
      for (int i = 0; i < 120; i++) mem_widx(S_IDX, i, 0, perm[i]);
      // ISSR 0: first job long affine stream, second job (shadowed) 2-D with repetition
      for (int i = 0; i < 64; i++) mem_w64(A_VAL + 8*i, 64'(i * 3));
      cfg_wr(0, RegRepeat, 0);
      cfg_wr(0, RegIdxCfg, 0);
      cfg_wr(0, RegBound0, 31); cfg_wr(0, RegStride0, 8);
      cfg_wr(0, RegRptr0, A_VAL);
      // job 2: 4 x 3 tile of an 8-column matrix, each element presented twice
      cfg_wr(0, RegRepeat, 1);
      cfg_wr(0, RegBound0, 3); cfg_wr(0, RegBound0 + 1, 2);
      cfg_wr(0, RegStride0, 8); cfg_wr(0, RegStride0 + 1, 64 - 3 * 8);
      cfg_wr(0, RegRptr0 + 1, A_VAL + 16);
      // the core plays the FPU in a parallel thread: it writes 120 values to ft1 and reads
      // 32 + 24 + 1 values from ft0
      for (int i = 0; i < 120; i++) wq.push_back(64'(7000 + i));
      k = 0;
      fork
        begin
          while (wq.size() > 0 || k < 57) begin
            @(negedge clk);
            wr_valid = (wq.size() > 0) && (wr_addr == 5'd1);
            wr_data  = wr_valid ? wq[0] : '0;
            if (wr_valid && wr_ready) void'(wq.pop_front());
            rd_en   = 3'b001;
            rd_done = 0;
            if (k < 57 && rd_valid[0]) begin
              if (k < 32) check(rd_data[0] == 64'(k * 3), $sformatf("affine job 1 elem %0d", k));
              else if (k < 56) begin
                int e;
                e = (k - 32) / 2;
                check(rd_data[0] == 64'((2 + e % 4 + 8 * (e / 4)) * 3), $sformatf("affine 2-D rep elem %0d got %0d", k, rd_data[0]));
              end else check(rd_data[0] == 64'(3), "third shadow job");
              rd_done = 3'b001; k++;
            end
          end
        end
        begin
          // a third launch stalls on the config port until job 2 has started
          cfg_wr(0, RegRepeat, 0);
          cfg_wr(0, RegBound0, 0);
          cfg_wr(0, RegRptr0, A_VAL + 8);
          cfg_wr(1, RegBound0, 119);
          cfg_wr(1, RegIdxCfg, (3 << 4) | (ModeIndirect << 2) | IdxSize8);
          cfg_wr(1, RegIdxBase, S_IDX);
          cfg_wr(1, RegWptr0, S_DST);
          wr_addr = 5'd1;
        end
      join
      @(negedge clk); wr_valid = 0; rd_done = 0; rd_en = 0; wr_addr = 5'd2;
      wait_idle();
      repeat (4) @(negedge clk);
      for (int i = 0; i < 120; i++)
        check(mem_r64(S_DST + 8*perm[i]) == 64'(7000 + i), $sformatf("scatter %0d", i));
    end

    // ---------------------------------------------------------------- mechanism coverage
    $display("events: indirection=%0d skip=%0d zero=%0d match=%0d egress_idx_writes=%0d conflicts=%0d shadow=%0d reps=%0d cfg_stall=%0d",
             n_indir, n_skip, n_zero, n_match, n_egress_wr, n_conflict, n_shadow, n_reps, n_cfg_stall);
    check(n_indir > 0, "indirection happened");
    check(n_skip > 0, "intersection skip happened");
    check(n_zero > 0, "union zero insertion happened");
    check(n_match > 0, "index match happened");
    check(n_egress_wr > 0, "egress index write happened");
    check(n_conflict > 0, "index/data port arbitration happened");
    check(n_shadow > 0, "shadowed job launch happened");
    check(n_reps > 0, "repetition happened");
    check(n_cfg_stall > 0, "config stall on second pending launch happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: busy=%b seq_valid=%b rd_valid=%b wr_ready=%b", busy, seq_valid, rd_valid, wr_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
