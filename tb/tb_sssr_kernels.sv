// tb_sssr_kernels: sparse linear-algebra kernels run on the SSSR streamer at its default
// parameters, with the testbench acting as host core (configuration port) and FPU (register
// switch ports), and a behavioural memory (tb_sssr_mem) on the three lane ports.
//   1. sM x dV: CSR matrix (16-bit column indices) times a dense vector, one pair of jobs per
//      row (ISSR 0 streams the row's values, ISSR 1 gathers x at its column indices). The
//      configuration thread writes each next row into the shadow registers while the current
//      row streams. Every row result is compared with a reference.
//   2. sV + dV: b[idx] += a, ISSR 0 gathers b at a's 32-bit indices, the ESSR streams a's
//      values affinely, ISSR 1 scatters the sums back through the same indices. Checks memory
//      and that the rate reaches, but does not beat, the 2/3 limit of 32-bit indices.
//   3. sM x sV: the same CSR matrix times a sparse vector, one intersection per row; the loop
//      runs on the stream-control bits. Every row result is compared with a reference.
//   4. Intersection edge cases with 16-bit indices: identical index sets (every step a match,
//      limited to 4 pairs per 5 cycles by index fetches) and interleaved disjoint sets (every
//      step a skip, one index per cycle).
// Values are small integers held as doubles, so all sums are exact.
module tb_sssr_kernels;
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

  logic            cfg_valid = 0, cfg_write = 0;
  logic [6:0]      cfg_addr = 0;
  cfg_data_t       cfg_wdata = 0, cfg_rdata;
  logic            cfg_ready;
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
    .ssr_en_i (1'b1),
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

  task automatic cfg_wr(input int lane, input cfg_addr_t r, input int unsigned v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_addr = {2'(lane), r}; cfg_wdata = v;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_valid = 0; cfg_write = 0;
  endtask

  function automatic void w64(input int unsigned a, input data_t v); mem.words[a >> 3] = v; endfunction
  function automatic data_t r64(input int unsigned a); return mem.words[a >> 3]; endfunction
  function automatic void widx(input int unsigned base, input int k, input int size, input int unsigned v);
    int unsigned a;
    a = base + k * (1 << size);
    for (int b = 0; b < (1 << size); b++) mem.words[(a + b) >> 3][8*((a + b) % 8) +: 8] = 8'(v >> (8*b));
  endfunction

  task automatic wait_idle();
    int guard = 0;
    do begin @(negedge clk); guard++; end while (busy != 0 && guard < 100000);
  endtask

  // CSR matrix, 40 x 256, 16-bit column indices
  localparam int Rows = 40, Cols = 256;
  localparam int unsigned M_VAL = 'h00000, M_COL = 'h06002, X_DEN = 'h08000;
  localparam int unsigned A_VAL = 'h0A000, A_IDX = 'h0C004, B_DEN = 'h0E000;
  localparam int unsigned XS_VAL = 'h12000, XS_IDX = 'h13006, E_IDX = 'h14000, F_IDX = 'h15002;
  int row_ptr[Rows+1];
  int col[$];

  initial begin : main
    int n, k, t0, t1, nnz;
    real acc, ref_y;
    int xs_idx[$];
    real xs_val[Cols];
    bit  xs_has[Cols];

    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // build the matrix: row lengths 1..40, sorted random columns
    row_ptr[0] = 0; col = {};
    for (int r = 0; r < Rows; r++) begin
      int len;
      len = 1 + $urandom % 40;
      for (int c = 0; c < Cols && len > 0; c++)
        if (($urandom % (Cols - c)) < len) begin col.push_back(c); len--; end
      row_ptr[r+1] = col.size();
    end
    nnz = col.size();
    for (int i = 0; i < nnz; i++) begin
      w64(M_VAL + 8*i, $realtobits(real'(1 + $urandom % 7)));
      widx(M_COL, i, 1, col[i]);
    end
    for (int c = 0; c < Cols; c++) w64(X_DEN + 8*c, $realtobits(real'(c % 13) - 6.0));

    // ========== 1. sM x dV
    t0 = int'(cycle);
    fork
      for (int r = 0; r < Rows; r++) begin
        n = row_ptr[r+1] - row_ptr[r];
        cfg_wr(0, RegBound0, n - 1); cfg_wr(0, RegStride0, 8); cfg_wr(0, RegIdxCfg, 0);
        cfg_wr(0, RegRptr0, M_VAL + 8*row_ptr[r]);
        cfg_wr(1, RegBound0, n - 1);
        cfg_wr(1, RegIdxCfg, (3 << 4) | (ModeIndirect << 2) | IdxSize16);
        cfg_wr(1, RegIdxBase, M_COL + 2*row_ptr[r]);
        cfg_wr(1, RegRptr0, X_DEN);
      end
      for (int r = 0; r < Rows; r++) begin
        acc = 0; ref_y = 0;
        for (int i = row_ptr[r]; i < row_ptr[r+1]; i++)
          ref_y += $bitstoreal(r64(M_VAL + 8*i)) * $bitstoreal(r64(X_DEN + 8*col[i]));
        k = row_ptr[r];
        rd_en = 3'b011;
        while (k < row_ptr[r+1]) begin
          @(negedge clk);
          rd_done = (rd_valid[0] && rd_valid[1]) ? 3'b011 : 3'b000;
          if (rd_done[0]) begin acc += $bitstoreal(rd_data[0]) * $bitstoreal(rd_data[1]); k++; end
        end
        @(negedge clk); rd_done = 0;
        check(acc == ref_y, $sformatf("sMxdV row %0d: %f expected %f", r, acc, ref_y));
      end
    join
    rd_en = 0;
    t1 = int'(cycle);
    $display("sMxdV: %0d rows, %0d nonzeros in %0d cycles (%0d%% of the 80%% port limit)", Rows, nnz, t1 - t0,
             (100 * nnz * 5 / 4) / (t1 - t0));
    check(t1 - t0 >= nnz * 5 / 4, "sMxdV cannot beat the 16-bit index limit");
    wait_idle();

    // ========== 2. sV + dV, 32-bit indices: b[idx] += a
    begin
      int idx[$];
      real bref[1024];
      for (int i = 0; i < 1024; i++) begin bref[i] = real'(i % 17); w64(B_DEN + 8*i, $realtobits(bref[i])); end
      idx = {};
      for (int i = 0; i < 1024; i++) if ($urandom % 4 == 0) idx.push_back(i);
      n = idx.size();
      for (int i = 0; i < n; i++) begin
        w64(A_VAL + 8*i, $realtobits(real'(i % 5 + 1)));
        widx(A_IDX, i, 2, idx[i]);
        bref[idx[i]] += real'(i % 5 + 1);
      end
      cfg_wr(0, RegBound0, n - 1); cfg_wr(0, RegIdxCfg, (3 << 4) | (ModeIndirect << 2) | IdxSize32);
      cfg_wr(0, RegIdxBase, A_IDX); cfg_wr(0, RegRptr0, B_DEN);
      cfg_wr(2, RegBound0, n - 1); cfg_wr(2, RegStride0, 8); cfg_wr(2, RegIdxCfg, 0);
      cfg_wr(2, RegRptr0, A_VAL);
      cfg_wr(1, RegBound0, n - 1); cfg_wr(1, RegIdxCfg, (3 << 4) | (ModeIndirect << 2) | IdxSize32);
      cfg_wr(1, RegIdxBase, A_IDX); cfg_wr(1, RegWptr0, B_DEN);
      // fadd ft1, ft0, ft2
      rd_addr = {5'd31, 5'd2, 5'd0}; rd_en = 3'b011; wr_addr = 5'd1;
      k = 0; t0 = -1; t1 = 0;
      while (k < n) begin
        @(negedge clk);
        wr_valid = 0; rd_done = 0;
        if (rd_valid[0] && rd_valid[1]) begin
          wr_valid = 1;
          wr_data  = $realtobits($bitstoreal(rd_data[0]) + $bitstoreal(rd_data[1]));
          #1;
          if (wr_ready) begin
            rd_done = 3'b011;
            if (k == n / 4) t0 = int'(cycle);
            if (k == (3 * n) / 4) t1 = int'(cycle);
            k++;
          end
        end
      end
      @(negedge clk); wr_valid = 0; rd_done = 0; rd_en = 0;
      rd_addr = {5'd2, 5'd1, 5'd0}; wr_addr = 5'd2;
      wait_idle();
      repeat (5) @(negedge clk);
      for (int i = 0; i < 1024; i++) check(r64(B_DEN + 8*i) == $realtobits(bref[i]), $sformatf("sV+dV b[%0d]", i));
      $display("sV+dV: %0d nonzeros, %0d cycles for %0d elements (limit %0d)", n, t1 - t0, (3*n)/4 - n/4, (((3*n)/4 - n/4) * 3) / 2);
      check((t1 - t0) >= ((((3*n)/4 - n/4) * 3) / 2) - 4, "sV+dV bounded by the 2/3 port limit");
      check((t1 - t0) <= ((((3*n)/4 - n/4) * 3) / 2) + 8, "sV+dV reaches the 2/3 port limit");
    end

    // ========== 3. sM x sV, one intersection per row
    xs_idx = {};
    for (int c = 0; c < Cols; c++) begin
      xs_has[c] = ($urandom % 3 == 0);
      xs_val[c] = real'(c % 9 + 1);
      if (xs_has[c]) begin
        widx(XS_IDX, xs_idx.size(), 1, c);
        w64(XS_VAL + 8 * xs_idx.size(), $realtobits(xs_val[c]));
        xs_idx.push_back(c);
      end
    end
    fork
      for (int r = 0; r < Rows; r++) begin
        n = row_ptr[r+1] - row_ptr[r];
        cfg_wr(0, RegBound0, n - 1); cfg_wr(0, RegIdxCfg, (ModeIntersect << 2) | IdxSize16);
        cfg_wr(0, RegIdxBase, M_COL + 2*row_ptr[r]); cfg_wr(0, RegRptr0, M_VAL + 8*row_ptr[r]);
        cfg_wr(1, RegBound0, xs_idx.size() - 1); cfg_wr(1, RegIdxCfg, (ModeIntersect << 2) | IdxSize16);
        cfg_wr(1, RegIdxBase, XS_IDX); cfg_wr(1, RegRptr0, XS_VAL);
      end
      for (int r = 0; r < Rows; r++) begin
        acc = 0; ref_y = 0;
        for (int i = row_ptr[r]; i < row_ptr[r+1]; i++)
          if (xs_has[col[i]]) ref_y += $bitstoreal(r64(M_VAL + 8*i)) * xs_val[col[i]];
        rd_en = 3'b011;
        forever begin
          @(negedge clk);
          rd_done = 0; seq_ready = 0;
          if (seq_valid && !seq_data) begin seq_ready = 1; break; end
          if (seq_valid && rd_valid[0] && rd_valid[1]) begin
            acc += $bitstoreal(rd_data[0]) * $bitstoreal(rd_data[1]);
            rd_done = 3'b011; seq_ready = 1;
          end
        end
        @(negedge clk); seq_ready = 0; rd_done = 0;
        check(acc == ref_y, $sformatf("sMxsV row %0d: %f expected %f", r, acc, ref_y));
      end
    join
    rd_en = 0;
    wait_idle();

    // ========== 4. intersection edge cases, 16-bit indices
    for (int mode = 0; mode < 2; mode++) begin
      int len, ends;
      len = 200;
      for (int i = 0; i < len; i++) begin
        widx(E_IDX, i, 1, mode ? 2*i : i);
        widx(F_IDX, i, 1, mode ? 2*i + 1 : i);
        w64(A_VAL + 8*i, 64'(i)); w64(XS_VAL + 8*i, 64'(i));
      end
      cfg_wr(0, RegBound0, len - 1); cfg_wr(0, RegIdxCfg, (ModeIntersect << 2) | IdxSize16);
      cfg_wr(0, RegIdxBase, E_IDX);
      cfg_wr(1, RegBound0, len - 1); cfg_wr(1, RegIdxCfg, (ModeIntersect << 2) | IdxSize16);
      cfg_wr(1, RegIdxBase, F_IDX); cfg_wr(1, RegRptr0, XS_VAL);
      cfg_wr(0, RegRptr0, A_VAL);
      t0 = int'(cycle); t1 = 0; k = 0; ends = 0;
      rd_en = 3'b011;
      while (!ends) begin
        @(negedge clk);
        rd_done = 0; seq_ready = 0;
        if (seq_valid && !seq_data) begin seq_ready = 1; ends = 1; t1 = int'(cycle); end
        else if (seq_valid && rd_valid[0] && rd_valid[1]) begin
          check(rd_data[0] == 64'(k) && rd_data[1] == 64'(k), "edge-case match data");
          rd_done = 3'b011; seq_ready = 1; k++;
        end
      end
      @(negedge clk); seq_ready = 0; rd_done = 0; rd_en = 0;
      if (mode == 0) begin
        $display("all-match intersection: %0d pairs in %0d cycles", k, t1 - t0);
        check(k == len, "all-match pair count");
        check((t1 - t0) >= (len * 5) / 4 && (t1 - t0) <= (len * 5) / 4 + 20, "all-match: 1.25 cycles per pair");
      end else begin
        $display("no-match intersection: %0d indices scanned in %0d cycles", 2 * len, t1 - t0);
        check(k == 0, "no-match pair count");
        check((t1 - t0) >= 2 * len && (t1 - t0) <= 2 * len + 20, "no-match: one cycle per scanned index");
      end
      wait_idle();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: busy=%b seq_valid=%b rd_valid=%b", busy, seq_valid, rd_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
