// sssr_idx_coalescer: packs a stream of indices into memory words for egress writeback.
//
// The reverse of the index serializer: the egress address generator hands it one joint index
// per element and it collects them, at the configured size (8..64 bit), into a 64-bit word with
// byte strobes. A word is written when its last slot is filled, or, partially, when the stream
// ends (end_i). The index array may start at any index-aligned byte address (first_pos_i gives
// the first slot). The paper names the coalescer; its construction here is the design's own.
//
// Interface: idx_valid_i/idx_ready_o carries indices, end_valid_i/end_ready_o the end-of-stream
// marker (accepted once the final partial word is on its way); wr_* is a valid/ready write
// request. A full word leaves through an output register, so index input stalls only while
// that register is occupied.
module sssr_idx_coalescer
  import sssr_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      start_i,
  input  idx_size_e size_i,
  input  logic [2:0] first_pos_i,
  input  addr_t     base_i,          // byte address of the index array
  // indices
  input  logic      idx_valid_i,
  output logic      idx_ready_o,
  input  idx_t      idx_i,
  input  logic      end_valid_i,
  output logic      end_ready_o,
  // word writes
  output logic      wr_valid_o,
  input  logic      wr_ready_i,
  output mem_req_t  wr_req_o
);
  idx_size_e  size_q;
  logic [2:0] pos_q;
  addr_t      waddr_q;
  data_t      buf_q;
  strb_t      bstrb_q;
  logic       out_valid_q;
  mem_req_t   out_q;
  logic [3:0] per_word;
  data_t      lane_data;
  strb_t      lane_strb;
  logic       out_free;

  assign per_word = 4'(8 >> size_q) - 4'd1;

  always_comb begin
    lane_data = '0;
    lane_strb = '0;
    unique case (size_q)
      IdxSize8:  begin lane_data = data_t'(idx_i[7:0]);  lane_strb = strb_t'(8'h01); end
      IdxSize16: begin lane_data = data_t'(idx_i[15:0]); lane_strb = strb_t'(8'h03); end
      IdxSize32: begin lane_data = data_t'(idx_i[31:0]); lane_strb = strb_t'(8'h0f); end
      default:   begin lane_data = data_t'(idx_i);       lane_strb = strb_t'(8'hff); end
    endcase
    lane_data = lane_data << ({3'b0, pos_q} << (3'(size_q) + 3'd3));
    lane_strb = lane_strb << ({3'b0, pos_q} << size_q);
  end

  assign out_free    = !out_valid_q || wr_ready_i;
  assign idx_ready_o = out_free;
  // the end marker waits until any partial word has been handed to the output register
  assign end_ready_o = out_free && !(idx_valid_i);
  assign wr_valid_o  = out_valid_q;
  assign wr_req_o    = out_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      size_q      <= IdxSize8;
      pos_q       <= '0;
      waddr_q     <= '0;
      buf_q       <= '0;
      bstrb_q     <= '0;
      out_valid_q <= 1'b0;
      out_q       <= '0;
    end else begin
      if (wr_valid_o && wr_ready_i) out_valid_q <= 1'b0;
      if (start_i) begin
        size_q  <= size_i;
        pos_q   <= first_pos_i;
        waddr_q <= {base_i[AddrWidth-1:WordOffBits], {WordOffBits{1'b0}}};
        buf_q   <= '0;
        bstrb_q <= '0;
      end else if (idx_valid_i && idx_ready_o) begin
        if ({1'b0, pos_q} == per_word) begin
          out_valid_q <= 1'b1;
          out_q       <= '{addr: waddr_q, write: 1'b1, data: buf_q | lane_data,
                           strb: bstrb_q | lane_strb};
          waddr_q     <= waddr_q + addr_t'(StrbWidth);
          buf_q       <= '0;
          bstrb_q     <= '0;
          pos_q       <= '0;
        end else begin
          buf_q   <= buf_q | lane_data;
          bstrb_q <= bstrb_q | lane_strb;
          pos_q   <= pos_q + 1'b1;
        end
      end else if (end_valid_i && end_ready_o) begin
        if (bstrb_q != '0) begin
          out_valid_q <= 1'b1;
          out_q       <= '{addr: waddr_q, write: 1'b1, data: buf_q, strb: bstrb_q};
        end
        buf_q   <= '0;
        bstrb_q <= '0;
      end
    end
  end

endmodule
