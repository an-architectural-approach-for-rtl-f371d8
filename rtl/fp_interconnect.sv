// fp_interconnect -- the functional processor interconnect bus between the
// scheduler and the eight FPUs.
//
// Issue direction: a function assigned by the scheduler is registered and
// presented to all FPUs on fpu_job, with fpu_issue[i] high for one cycle at
// the chosen FPU only (one cycle of bus latency).
// Response direction: every FPU raises fpu_rsp_valid[i] with its response and
// holds both until fpu_rsp_ack[i]. A round-robin arbiter grants one FPU per
// cycle; the grant is shown to the scheduler as rsp_valid/rsp_fpu/rsp, and
// when the scheduler accepts it (rsp_ready) the granted FPU gets its
// acknowledge in the same cycle. The round-robin pointer moves past the
// granted FPU after each accepted response, so no FPU waits for more than
// NUM_FPU-1 others.
//
// The bus is only named in the architecture; the broadcast issue, the
// acknowledge handshake and round-robin arbitration are this design's choices.
module fp_interconnect
  import fps_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // from the scheduler
  input  logic                issue_valid,
  input  logic [FPU_W-1:0]    issue_fpu,
  input  job_t                issue_job,
  // to the FPUs
  output logic [NUM_FPU-1:0]  fpu_issue,
  output job_t                fpu_job,
  // from the FPUs
  input  logic [NUM_FPU-1:0]  fpu_rsp_valid,
  input  fpu_rsp_t            fpu_rsp [NUM_FPU],
  output logic [NUM_FPU-1:0]  fpu_rsp_ack,
  // to the scheduler
  output logic                rsp_valid,
  output logic [FPU_W-1:0]    rsp_fpu,
  output fpu_rsp_t            rsp,
  input  logic                rsp_ready
);

  logic [FPU_W-1:0] rr_ptr;   // FPU with the highest priority this cycle

  // ---- issue --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fpu_issue <= '0;
      fpu_job   <= '0;
    end else begin
      fpu_issue <= '0;
      if (issue_valid) begin
        fpu_issue[issue_fpu] <= 1'b1;
        fpu_job              <= issue_job;
      end
    end
  end

  // ---- response arbitration -----------------------------------------------
  always_comb begin
    rsp_valid = 1'b0;
    rsp_fpu   = '0;
    for (int k = NUM_FPU - 1; k >= 0; k--) begin
      automatic logic [FPU_W-1:0] idx = rr_ptr + FPU_W'(k);
      if (fpu_rsp_valid[idx]) begin
        rsp_valid = 1'b1;
        rsp_fpu   = idx;
      end
    end
  end
  assign rsp = fpu_rsp[rsp_fpu];

  always_comb begin
    fpu_rsp_ack = '0;
    if (rsp_valid && rsp_ready) fpu_rsp_ack[rsp_fpu] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     rr_ptr <= '0;
    else if (rsp_valid && rsp_ready) rr_ptr <= rsp_fpu + 1'b1;
  end

endmodule
