// tb_sssr_idx_serializer: feeds index words (with random gaps) to the serializer for every
// index size and several first positions and counts, and compares the emitted indices with
// indices read independently from the same byte image.
module tb_sssr_idx_serializer;
  import sssr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, wvalid = 0, wready, ivalid, iready = 0, done;
  idx_size_e size = IdxSize8;
  logic [2:0] fpos = 0;
  logic [BoundWidth:0] count = 0;
  data_t word = 0;
  idx_t idx;
  byte unsigned img[256];

  sssr_idx_serializer dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .size_i(size),
    .first_pos_i(fpos), .count_i(count), .word_valid_i(wvalid), .word_ready_o(wready),
    .word_i(word), .idx_valid_o(ivalid), .idx_ready_i(iready), .idx_o(idx), .done_o(done));

  initial begin
    int sz, nb, got, w;
    longint unsigned ref_idx;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 24; job++) begin
      sz = job % 4; nb = 1 << sz;
      for (int i = 0; i < 256; i++) img[i] = 8'($urandom);
      size  = idx_size_e'(sz);
      fpos  = 3'(($urandom % 8) >> sz);
      count = (BoundWidth+1)'(1 + $urandom % 20);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      got = 0; w = 0;
      while (got < int'(count)) begin
        wvalid = ($urandom % 4 != 0);
        for (int b = 0; b < 8; b++) word[8*b +: 8] = img[8*w + b];
        iready = ($urandom % 4 != 0);
        #1;
        if (ivalid && iready) begin
          ref_idx = 0;
          for (int b = 0; b < nb; b++) ref_idx |= longint'(img[fpos*nb + got*nb + b]) << (8*b);
          checks++;
          if (idx != idx_t'(ref_idx)) begin
            failures++; $display("FAIL size %0d idx %0d: %h exp %h", nb, got, idx, ref_idx);
          end
          got++;
        end
        if (wvalid && wready) w++;
        @(negedge clk);
      end
      wvalid = 0; iready = 0;
      checks++;
      if (!done || w != (int'(fpos)*nb + int'(count)*nb + 7) / 8) begin
        failures++; $display("FAIL job %0d: done=%b words=%0d", job, done, w);
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
