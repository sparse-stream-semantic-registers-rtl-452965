// tb_sssr_fifo: random push/pop test of sssr_fifo against a queue reference model, including
// simultaneous push and pop, full/empty flags and the occupancy count.
module tb_sssr_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push = 0, pop = 0, full, empty;
  logic [15:0] din = 0, dout;
  logic [2:0] cnt;
  logic [15:0] model[$];

  sssr_fifo #(.T(logic [15:0]), .Depth(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(1'b0), .push_i(push), .data_i(din), .pop_i(pop),
    .data_o(dout), .full_o(full), .empty_o(empty), .count_o(cnt));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (full != (model.size() == 4) || empty != (model.size() == 0) || cnt != 3'(model.size())) begin
        failures++; $display("FAIL flags at %0d", i);
      end
      if (!empty) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("FAIL data %h exp %h", dout, model[0]); end
      end
      pop  = !empty && ($urandom % 3 != 0);
      push = (!full || pop) && ($urandom % 2 == 0);
      din  = 16'($urandom);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
