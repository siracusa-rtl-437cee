// nk_regfile: controller register file of N-EUREKA with two job contexts.
//
// A core programs a job by writing the job registers (word offsets 4..19, see neureka_pkg) and
// then writing any value to TRIGGER (offset 0). Writes go to the context selected by the write
// pointer; TRIGGER marks that context queued and moves the write pointer to the other context,
// so a second job can be programmed while the first runs. The engine always executes the context
// under the read pointer (job_valid_o/job_o) and pulses job_done_i when it finishes, which frees
// the context. While both contexts hold jobs, a write is held off (cfg_gnt_o low) until the
// running job completes. STATUS (offset 1) reads {28'b0, queued jobs[1:0], 1'b0, busy}.
// Reads return data in the cycle after the grant (cfg_rvalid_o).
//
// The two contexts and queueing of two tasks are as published; the register map, the write
// hold-off and the use of flip-flops instead of latches are this design's choices.
module nk_regfile
  import neureka_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cfg_req_i,
  input  logic        cfg_we_i,
  input  logic [7:0]  cfg_addr_i,   // 32-bit word offset
  input  logic [31:0] cfg_wdata_i,
  output logic        cfg_gnt_o,
  output logic        cfg_rvalid_o,
  output logic [31:0] cfg_rdata_o,
  output logic        job_valid_o,
  output nk_job_t     job_o,
  input  logic        job_done_i,
  input  logic        busy_i
);
  logic [1:0][N_JOB_REGS-1:0][31:0] ctx_q;
  logic [1:0]                       valid_q;
  logic                             wr_ptr_q, rd_ptr_q;
  logic [1:0]                       n_queued;

  assign n_queued    = 2'(valid_q[0]) + 2'(valid_q[1]);
  assign cfg_gnt_o   = cfg_req_i && !(cfg_we_i && valid_q[wr_ptr_q]);
  assign job_valid_o = valid_q[rd_ptr_q];
  assign job_o       = regs_to_job(ctx_q[rd_ptr_q]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctx_q        <= '0;
      valid_q      <= '0;
      wr_ptr_q     <= 1'b0;
      rd_ptr_q     <= 1'b0;
      cfg_rvalid_o <= 1'b0;
      cfg_rdata_o  <= '0;
    end else begin
      cfg_rvalid_o <= cfg_gnt_o && !cfg_we_i;
      if (job_done_i && valid_q[rd_ptr_q]) begin
        valid_q[rd_ptr_q] <= 1'b0;
        rd_ptr_q          <= !rd_ptr_q;
      end
      if (cfg_gnt_o) begin
        if (cfg_we_i) begin
          if (32'(cfg_addr_i) == REG_TRIGGER) begin
            valid_q[wr_ptr_q] <= 1'b1;
            wr_ptr_q          <= !wr_ptr_q;
          end else if (32'(cfg_addr_i) >= REG_JOB0 && 32'(cfg_addr_i) < REG_JOB0 + N_JOB_REGS) begin
            ctx_q[wr_ptr_q][cfg_addr_i - 8'(REG_JOB0)] <= cfg_wdata_i;
          end
        end else begin
          if (32'(cfg_addr_i) == REG_STATUS)
            cfg_rdata_o <= {28'b0, n_queued, 1'b0, busy_i};
          else if (32'(cfg_addr_i) >= REG_JOB0 && 32'(cfg_addr_i) < REG_JOB0 + N_JOB_REGS)
            cfg_rdata_o <= ctx_q[wr_ptr_q][cfg_addr_i - 8'(REG_JOB0)];
          else
            cfg_rdata_o <= '0;
        end
      end
    end
  end
endmodule
