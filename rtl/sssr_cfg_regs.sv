// sssr_cfg_regs: shadowed configuration registers of one SSR address generator.
//
// The host core writes the job description (repetition, loop bounds and strides, index
// configuration and base) into a shadow copy. Writing a data pointer, rptr[d] or wptr[d]
// (d = loop levels - 1), marks the shadow job pending; it is copied into the runtime copy, and
// the launch_o pulse starts the address generator, as soon as the running job ends
// (job_done_i). Thus a new job can be set up while the previous one still streams, as the
// paper describes. While a job is pending, the shadow copy is occupied and every further
// write is stalled (cfg_ready_o low) until the pending job starts. The register map (sssr_pkg) is this design's
// own. Reads return the shadow copy, the status bits, and the joint length supplied by the
// egress generator (joint_len_i, zero for an ISSR).
module sssr_cfg_regs
  import sssr_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cfg_valid_i,
  input  logic      cfg_write_i,
  input  cfg_addr_t cfg_addr_i,
  input  cfg_data_t cfg_wdata_i,
  output cfg_data_t cfg_rdata_o,
  output logic      cfg_ready_o,
  input  cfg_data_t joint_len_i,
  input  logic      job_done_i,
  output cfg_t      shadow_o,
  output cfg_t      run_o,
  output logic      launch_o,
  output logic      busy_o,      // a job is running
  output logic      pending_o    // a job waits in the shadow registers
);
  cfg_t shadow_q, run_q;
  logic pending_q, busy_q;
  logic is_launch;

  assign is_launch   = (cfg_addr_i >= RegRptr0) && (cfg_addr_i < RegWptr0 + 5'd4);
  assign cfg_ready_o = !(cfg_valid_i && cfg_write_i && pending_q);
  assign launch_o    = pending_q && (!busy_q || job_done_i);
  assign shadow_o    = shadow_q;
  assign run_o       = run_q;
  assign busy_o      = busy_q;
  assign pending_o   = pending_q;

  always_comb begin
    cfg_rdata_o = '0;
    unique case (cfg_addr_i)
      RegStatus:   cfg_rdata_o = cfg_data_t'({pending_q, busy_q});
      RegRepeat:   cfg_rdata_o = cfg_data_t'(shadow_q.reps);
      RegIdxCfg:   cfg_rdata_o = cfg_data_t'({shadow_q.egress, shadow_q.idx_shift,
                                              shadow_q.idx_mode, shadow_q.idx_size});
      RegIdxBase:  cfg_rdata_o = cfg_data_t'(shadow_q.idx_base);
      RegJointLen: cfg_rdata_o = joint_len_i;
      default: begin
        for (int k = 0; k < NumLoops; k++) begin
          if (cfg_addr_i == RegBound0 + cfg_addr_t'(k))  cfg_rdata_o = cfg_data_t'(shadow_q.bounds[k]);
          if (cfg_addr_i == RegStride0 + cfg_addr_t'(k)) cfg_rdata_o = cfg_data_t'(shadow_q.strides[k]);
        end
      end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      shadow_q  <= '0;
      pending_q <= 1'b0;
    end else begin
      if (launch_o) pending_q <= 1'b0;
      if (cfg_valid_i && cfg_write_i && cfg_ready_o) begin
        if (cfg_addr_i == RegRepeat) shadow_q.reps <= rep_t'(cfg_wdata_i);
        if (cfg_addr_i == RegIdxCfg) begin
          shadow_q.idx_size  <= idx_size_e'(cfg_wdata_i[1:0]);
          shadow_q.idx_mode  <= idx_mode_e'(cfg_wdata_i[3:2]);
          shadow_q.idx_shift <= cfg_wdata_i[7:4];
          shadow_q.egress    <= cfg_wdata_i[8];
        end
        if (cfg_addr_i == RegIdxBase) shadow_q.idx_base <= addr_t'(cfg_wdata_i);
        for (int k = 0; k < NumLoops; k++) begin
          if (cfg_addr_i == RegBound0 + cfg_addr_t'(k))  shadow_q.bounds[k]  <= bound_t'(cfg_wdata_i);
          if (cfg_addr_i == RegStride0 + cfg_addr_t'(k)) shadow_q.strides[k] <= addr_t'(cfg_wdata_i);
        end
        if (is_launch) begin
          shadow_q.data_base <= addr_t'(cfg_wdata_i);
          shadow_q.dims      <= cfg_addr_i[1:0];
          shadow_q.write     <= (cfg_addr_i >= RegWptr0);
          pending_q          <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      run_q  <= '0;
      busy_q <= 1'b0;
    end else if (launch_o) begin
      run_q  <= shadow_q;
      busy_q <= 1'b1;
    end else if (job_done_i) begin
      busy_q <= 1'b0;
    end
  end

endmodule
