// tb_sssr_idx_cmp: two sorted random index sets are offered to the comparator by models of
// the ISSR matching ports (random readiness, ends signalled after the last index). Checks, for
// intersection and union, that the joint index stream to the egress side and the per-ISSR
// operations (emit, skip, zero, end) implement the set operation exactly, and that the
// stream-control queue holds one '1' per joint element followed by a single '0'.
module tb_sssr_idx_cmp;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] cvalid = 0, cend, cready = 0, fire;
  idx_t [1:0] cidx;
  idx_mode_e [1:0] cmode = {ModeIntersect, ModeIntersect};
  cmp_op_e [1:0] op;
  logic jvalid, jready = 0, jend, svalid, sready = 0, sdata, match, zero, egress = 1;
  idx_t jidx;

  sssr_idx_cmp dut (.clk_i(clk), .rst_ni(rst_n), .cmp_valid_i(cvalid), .cmp_idx_i(cidx),
    .cmp_end_i(cend), .cmp_mode_i(cmode), .cmp_egress_i(egress), .cmp_ready_i(cready),
    .op_fire_o(fire), .op_o(op), .jnt_valid_o(jvalid), .jnt_ready_i(jready), .jnt_idx_o(jidx),
    .jnt_end_o(jend), .seq_valid_o(svalid), .seq_ready_i(sready), .seq_data_o(sdata),
    .match_o(match), .zero_o(zero));

  initial begin
    idx_t a[2][$], ref_j[$], got_j[$];
    int pos[2], ended[2], seq_ones, seq_zero, jend_seen, k, nz;
    bit ina, inb, done;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 30; job++) begin
      cmode = (job % 2) ? {ModeUnion, ModeUnion} : {ModeIntersect, ModeIntersect};
      for (int s = 0; s < 2; s++) begin
        a[s] = {};
        for (int v = 0; v < 48; v++) if ($urandom % 3 == 0) a[s].push_back(idx_t'(v));
      end
      ref_j = {};
      for (int v = 0; v < 48; v++) begin
        ina = 0; inb = 0;
        foreach (a[0][i]) if (a[0][i] == idx_t'(v)) ina = 1;
        foreach (a[1][i]) if (a[1][i] == idx_t'(v)) inb = 1;
        if ((job % 2) ? (ina || inb) : (ina && inb)) ref_j.push_back(idx_t'(v));
      end
      got_j = {}; pos = '{0, 0}; ended = '{0, 0}; seq_ones = 0; seq_zero = 0; jend_seen = 0; nz = 0;
      done = 0;
      k = 0;
      while (!done || svalid) begin
        for (int s = 0; s < 2; s++) begin
          cvalid[s] = !ended[s] && ($urandom % 4 != 0);
          cend[s]   = (pos[s] == a[s].size());
          cidx[s]   = cend[s] ? '0 : a[s][pos[s]];
          cready[s] = ($urandom % 4 != 0);
        end
        jready = ($urandom % 4 != 0);
        sready = ($urandom % 3 != 0);
        #1;
        for (int s = 0; s < 2; s++) if (fire[s]) begin
          checks++;
          case (op[s])
            CmpEnd:  begin ended[s] = 1; if (!cend[s]) begin failures++; $display("FAIL end before stream end"); end end
            CmpZero: begin nz++; if ((job % 2) == 0) begin failures++; $display("FAIL zero in intersection"); end end
            CmpSkip: begin
              if (job % 2) begin failures++; $display("FAIL skip in union"); end
              pos[s]++;
            end
            default: begin
              // an emitted element must belong to the joint set at the joint index
              if (cidx[s] != jidx) begin failures++; $display("FAIL emitted %0d at joint %0d", cidx[s], jidx); end
              pos[s]++;
            end
          endcase
        end
        if (jvalid) begin
          if (jend) jend_seen++; else got_j.push_back(jidx);
        end
        if (svalid && sready) begin if (sdata) seq_ones++; else seq_zero++; end
        if (ended[0] && ended[1]) done = 1;
        @(negedge clk);
        if (++k > 2000) break;
      end
      cvalid = 0;
      checks++;
      if (got_j != ref_j || jend_seen != 1 || seq_ones != ref_j.size() || seq_zero != 1) begin
        failures++;
        $display("FAIL job %0d: joint %0d/%0d ends %0d seq %0d/%0d", job, got_j.size(), ref_j.size(), jend_seen, seq_ones, seq_zero);
      end
      checks++;
      if ((job % 2) && nz != 2 * ref_j.size() - a[0].size() - a[1].size()) begin
        failures++; $display("FAIL job %0d: %0d zeros", job, nz);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
