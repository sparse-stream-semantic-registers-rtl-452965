// sssr_idx_serializer: extracts single indices from fetched index words.
//
// The indirection address generator fetches whole 64-bit memory words holding indices (which
// uses the memory bus fully, as the paper notes) and this block cuts them into indices of the
// configured size (8, 16, 32 or 64 bit). The index array may start at any index-aligned byte
// address: start_i gives the position of the first index within the first word
// (first_pos_i, in units of indices) and the number of indices to emit (count_i). Words are
// consumed when their last needed index has been emitted. Indices wider than IdxWidth are
// truncated to their low IdxWidth bits (design choice).
//
// Timing: fully combinational from the head word to idx_o; one index per cycle.
module sssr_idx_serializer
  import sssr_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                start_i,
  input  idx_size_e           size_i,
  input  logic [2:0]          first_pos_i,
  input  logic [BoundWidth:0] count_i,
  // index words
  input  logic                word_valid_i,
  output logic                word_ready_o,
  input  data_t               word_i,
  // indices
  output logic                idx_valid_o,
  input  logic                idx_ready_i,
  output idx_t                idx_o,
  output logic                done_o      // all indices of the job emitted
);
  idx_size_e           size_q;
  logic [2:0]          pos_q;
  logic [BoundWidth:0] rem_q;
  logic [3:0]          per_word;      // indices per word - 1 (7, 3, 1, 0)
  data_t               shifted;
  logic                fire;

  assign per_word = 4'(8 >> size_q) - 4'd1;
  assign shifted  = word_i >> ({3'b0, pos_q} << (3'(size_q) + 3'd3));

  always_comb begin
    unique case (size_q)
      IdxSize8:  idx_o = idx_t'(shifted[7:0]);
      IdxSize16: idx_o = idx_t'(shifted[15:0]);
      IdxSize32: idx_o = idx_t'(shifted[31:0]);
      default:   idx_o = shifted[IdxWidth-1:0];
    endcase
  end

  assign done_o       = (rem_q == '0);
  assign idx_valid_o  = word_valid_i && !done_o;
  assign fire         = idx_valid_o && idx_ready_i;
  // pop the word after its last slot or after the job's final index
  assign word_ready_o = fire && (({1'b0, pos_q} == per_word) || (rem_q == 1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      size_q <= IdxSize8;
      pos_q  <= '0;
      rem_q  <= '0;
    end else if (start_i) begin
      size_q <= size_i;
      pos_q  <= first_pos_i;
      rem_q  <= count_i;
    end else if (fire) begin
      rem_q <= rem_q - 1'b1;
      pos_q <= ({1'b0, pos_q} == per_word) ? '0 : pos_q + 1'b1;
    end
  end

endmodule
