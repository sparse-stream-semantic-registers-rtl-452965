// sssr_affine_iter: nested affine address iterator of an SSR address generator.
//
// Generates the address sequence of up to NumLoops (four, as in the paper) nested loops.
// Following the paper's figure of the indirection generator, the current address lives in a
// single pointer register that is advanced by an adder: when loop level k increments (all
// levels below it wrap to zero), the pointer grows by strides[k]. Strides are thus the byte
// increment applied at that level, i.e. already relative to the wrap of the inner loops; this
// relative-stride convention is the design's own choice.
//
// Interface: start_i loads base/bounds/strides/dims (dims = levels used - 1) and makes the
// iterator busy; the address stream is a valid/ready handshake with last_o marking the final
// address. bounds[k] holds iterations - 1. One address per cycle.
module sssr_affine_iter
  import sssr_pkg::*;
#(
  parameter int unsigned Loops = NumLoops
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   start_i,
  input  addr_t                  base_i,
  input  bound_t [Loops-1:0]     bounds_i,
  input  addr_t  [Loops-1:0]     strides_i,
  input  logic [1:0]             dims_i,
  output logic                   busy_o,
  output logic                   valid_o,
  input  logic                   ready_i,
  output addr_t                  addr_o,
  output logic                   last_o
);
  logic                   busy_q;
  addr_t                  ptr_q;
  bound_t [Loops-1:0]     cnt_q, bounds_q;
  addr_t  [Loops-1:0]     strides_q;
  logic [1:0]             dims_q;
  logic [Loops-1:0]       lvl_done;   // level k at its bound (or unused)
  logic [Loops-1:0]       wrap;       // levels that wrap on this step

  always_comb begin
    for (int k = 0; k < Loops; k++) begin
      lvl_done[k] = (k > int'(dims_q)) || (cnt_q[k] == bounds_q[k]);
    end
  end

  // Level k wraps when all levels 0..k are at their bound; the first level not at its bound
  // increments.
  assign wrap[0] = lvl_done[0];
  for (genvar k = 1; k < Loops; k++) begin : gen_wrap
    assign wrap[k] = wrap[k-1] && lvl_done[k];
  end

  assign busy_o  = busy_q;
  assign valid_o = busy_q;
  assign addr_o  = ptr_q;
  assign last_o  = wrap[Loops-1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q    <= 1'b0;
      ptr_q     <= '0;
      cnt_q     <= '0;
      bounds_q  <= '0;
      strides_q <= '0;
      dims_q    <= '0;
    end else if (start_i) begin
      busy_q    <= 1'b1;
      ptr_q     <= base_i;
      cnt_q     <= '0;
      bounds_q  <= bounds_i;
      strides_q <= strides_i;
      dims_q    <= dims_i;
    end else if (valid_o && ready_i) begin
      if (last_o) begin
        busy_q <= 1'b0;
      end else begin
        for (int k = 0; k < Loops; k++) begin
          if ((k == 0 || wrap[k-1]) && !wrap[k]) begin
            // this level increments
            cnt_q[k] <= cnt_q[k] + 1'b1;
            ptr_q    <= ptr_q + strides_q[k];
          end else if (wrap[k]) begin
            cnt_q[k] <= '0;
          end
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> !busy_q || (valid_o && ready_i && last_o))
    else $error("sssr_affine_iter: start while busy");

endmodule
