// fps_scheduler -- first-come first-served assignment of functions to FPUs.
//
// Each cycle the scheduler looks at the head of the priority queue (the oldest
// function of the highest non-empty priority) and assigns it to the
// lowest-numbered idle FPU of its class. The head waits if no such FPU is
// idle; nothing behind it overtakes it. Once assigned, a function keeps its
// FPU until the FPU reports back (no preemption). The scheduler keeps a copy
// of the function running on each FPU for that report:
//   RSP_DONE  - the result goes to the integration unit, the FPU is free;
//   RSP_IO    - the function leaves for the I/O queue, the FPU is free;
//   RSP_YIELD - the function goes back to the end of its priority queue; its
//               priority becomes new_prio if the function's priority is
//               dynamic, a static priority is kept; the FPU is free.
// Functions that go back to a queue are marked 'resume'. The return path
// into the priority queue is shared by functions woken from I/O and yielding
// functions; a woken one goes first and a yield waits (its response is not
// acknowledged) until the path is free.
//
// Interface: head_valid/head_job/pop to the priority queue; issue_valid/
// issue_fpu/issue_job to the interconnect bus (one issue per cycle);
// rsp_valid/rsp_fpu/rsp/rsp_ready from the bus; rob_* writes a result;
// io_* pushes to the I/O queue; wake_* comes from the I/O queue; ret_* goes
// to the priority queue. fpu_busy shows which FPUs are running a function and
// 'stall' that the head is waiting for an FPU.
//
// The non-preemptive FIFO policy and the static/dynamic priority rule follow
// the paper; the strict head-of-line order, the lowest-index choice and the
// return precedence are this design's choices.
module fps_scheduler
  import fps_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // priority queue head
  input  logic                head_valid,
  input  job_t                head_job,
  output logic                pop,
  // issue towards the FPUs
  output logic                issue_valid,
  output logic [FPU_W-1:0]    issue_fpu,
  output job_t                issue_job,
  // responses from the FPUs
  input  logic                rsp_valid,
  input  logic [FPU_W-1:0]    rsp_fpu,
  input  fpu_rsp_t            rsp,
  output logic                rsp_ready,
  // integration unit
  output logic                rob_valid,
  output logic [SEQ_W-1:0]    rob_seq,
  output logic [DATA_W-1:0]   rob_data,
  // I/O queue
  output logic                io_valid,
  input  logic                io_ready,
  output job_t                io_job,
  input  logic                wake_valid,
  output logic                wake_ready,
  input  job_t                wake_job,
  // back into the priority queue
  output logic                ret_valid,
  input  logic                ret_ready,
  output job_t                ret_job,
  // status
  output logic [NUM_FPU-1:0]  fpu_busy,
  output logic                stall
);

  job_t               held [NUM_FPU];
  logic [NUM_FPU-1:0] cand;
  logic               found;
  logic [FPU_W-1:0]   pick;
  job_t               rjob;
  job_t               yjob;

  // ---- issue -----------------------------------------------------------
  assign cand = head_job.fpu_mask & ~fpu_busy;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int i = NUM_FPU - 1; i >= 0; i--)
      if (cand[i]) begin
        found = 1'b1;
        pick  = FPU_W'(i);
      end
  end

  assign issue_valid = head_valid && found;
  assign issue_fpu   = pick;
  assign issue_job   = head_job;
  assign pop         = issue_valid;
  assign stall       = head_valid && !found;

  // ---- responses ---------------------------------------------------------
  assign rjob = held[rsp_fpu];
  always_comb begin
    yjob        = rjob;
    yjob.resume = 1'b1;
    if (rjob.dyn) yjob.prio = rsp.new_prio;
  end

  always_comb begin
    rsp_ready = 1'b0;
    if (rsp_valid) begin
      unique case (rsp.kind)
        RSP_DONE:  rsp_ready = 1'b1;
        RSP_IO:    rsp_ready = io_ready;
        RSP_YIELD: rsp_ready = !wake_valid && ret_ready;
        default:   rsp_ready = 1'b1;   // unknown code: treated as done
      endcase
    end
  end

  assign rob_valid = rsp_valid && rsp_ready && (rsp.kind != RSP_IO) && (rsp.kind != RSP_YIELD);
  assign rob_seq   = rjob.seq;
  assign rob_data  = rsp.result;

  assign io_valid      = rsp_valid && (rsp.kind == RSP_IO);
  always_comb begin
    io_job        = rjob;
    io_job.resume = 1'b1;
  end

  // return path: woken functions first, then yielding ones
  assign wake_ready = ret_ready;
  assign ret_valid  = wake_valid || (rsp_valid && rsp.kind == RSP_YIELD);
  assign ret_job    = wake_valid ? wake_job : yjob;

  // ---- FPU occupancy ------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fpu_busy <= '0;
    end else begin
      if (rsp_valid && rsp_ready) fpu_busy[rsp_fpu] <= 1'b0;
      if (issue_valid)            fpu_busy[issue_fpu] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (issue_valid) held[issue_fpu] <= issue_job;
  end

  // an FPU only answers while it runs a function
  a_rsp_from_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    rsp_valid |-> fpu_busy[rsp_fpu]);

endmodule
