// tb_sssr_affine_iter: checks the four-level affine iterator. Each job is described by
// absolute per-level strides S[k]; the testbench converts them into the iterator's relative
// strides and compares every emitted address with base + sum(i[k] * S[k]), the last flag and
// the one-address-per-cycle rate under random backpressure-free streaming.
module tb_sssr_affine_iter;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, valid, ready = 0, last;
  addr_t base = 0, addr;
  bound_t [3:0] bounds = '0;
  addr_t  [3:0] strides = '0;
  logic [1:0] dims = 0;

  sssr_affine_iter dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .base_i(base),
    .bounds_i(bounds), .strides_i(strides), .dims_i(dims), .busy_o(busy), .valid_o(valid),
    .ready_i(ready), .addr_o(addr), .last_o(last));

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    int S[4], b[4], n, cyc, cnt;
    int i0, i1, i2, i3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 12; job++) begin
      dims = 2'(job % 4);
      for (int k = 0; k < 4; k++) begin
        b[k] = (k <= dims) ? int'($urandom % 4) + (k == 0 ? 1 : 0) : 0;
        S[k] = 8 * (int'($urandom % 40) + 1);
      end
      base = addr_t'(8 * ($urandom % 512));
      // relative stride of level k = S[k] - sum_{j<k} b[j]*S[j]
      for (int k = 0; k < 4; k++) begin
        int r;
        r = S[k];
        for (int j = 0; j < k; j++) r -= b[j] * S[j];
        strides[k] = addr_t'(r);
        bounds[k]  = bound_t'(b[k]);
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      ready = 1; cnt = 0; cyc = 0;
      n = (b[0]+1)*(b[1]+1)*(b[2]+1)*(b[3]+1);
      for (i3 = 0; i3 <= b[3]; i3++)
        for (i2 = 0; i2 <= b[2]; i2++)
          for (i1 = 0; i1 <= b[1]; i1++)
            for (i0 = 0; i0 <= b[0]; i0++) begin
              check(valid, "valid while streaming");
              check(addr == addr_t'(int'(base) + i0*S[0] + i1*S[1] + i2*S[2] + i3*S[3]),
                    $sformatf("job %0d addr %0d: got %h", job, cnt, addr));
              cnt++;
              check(last == (cnt == n), $sformatf("job %0d last flag at %0d", job, cnt));
              @(negedge clk); cyc++;
            end
      ready = 0;
      check(!busy, "idle after the last address");
      check(cyc == n, "one address per cycle");
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
