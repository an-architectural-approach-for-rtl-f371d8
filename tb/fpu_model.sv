// fpu_model -- behavioural stand-in for one Functional Processor Unit.
//
// Not synthesizable and not part of the design: the FPUs are outside the RTL.
// On fpu_issue it takes the job from the bus, waits 1 + code[3:0] cycles and
// answers with one response held until acknowledged: RSP_IO on the first run
// of a function with code[7] set, RSP_YIELD (asking for priority code[1:0]) on
// the first run of one with code[6] set, otherwise RSP_DONE with the result of
// fps_tb_pkg::ref_result. It counts an error if it is given a job while busy
// or a job whose class is not its own.
module fpu_model
  import fps_pkg::*;
  import fps_tb_pkg::*;
#(
  parameter int IDX = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     issue,
  input  job_t     job,
  output logic     rsp_valid,
  output fpu_rsp_t rsp,
  input  logic     ack,
  output int       errors,
  output int       jobs
);
  job_t cur;
  int   remaining;
  logic running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
      remaining <= 0;
      errors    <= 0;
      jobs      <= 0;
      cur       <= '0;
    end else begin
      if (ack) rsp_valid <= 1'b0;
      if (issue) begin
        if (running || rsp_valid) errors <= errors + 1;
        if (job.fid.cls != FPU_CLASS[IDX]) errors <= errors + 1;
        cur       <= job;
        running   <= 1'b1;
        remaining <= 1 + int'(job.code[3:0]);
        jobs      <= jobs + 1;
      end else if (running) begin
        if (remaining > 1) remaining <= remaining - 1;
        else begin
          running       <= 1'b0;
          rsp_valid     <= 1'b1;
          rsp.new_prio  <= cur.code[PRIO_W-1:0];
          rsp.result    <= '0;
          if (!cur.resume && cur.code[7])      rsp.kind <= RSP_IO;
          else if (!cur.resume && cur.code[6]) rsp.kind <= RSP_YIELD;
          else begin
            rsp.kind   <= RSP_DONE;
            rsp.result <= ref_result(cur.fid.cls, cur.code, cur.op_a, cur.op_b);
          end
        end
      end
    end
  end
endmodule
