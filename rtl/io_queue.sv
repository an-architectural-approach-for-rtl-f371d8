// io_queue -- functions waiting for I/O.
//
// A function that has to wait for an I/O transfer leaves its FPU and is kept
// here, in order of request. Each one-cycle io_complete pulse marks the oldest
// still-waiting function as runnable; runnable functions leave from the
// output (out_valid/out_ready/out_job) on their way back to the end of their
// priority queue. An io_complete pulse with no waiting function is ignored.
//
// Interface: in_valid/in_ready/in_job from the scheduler; io_complete from
// the I/O side; out_* towards the priority queue. A function can leave in the
// cycle after its completion pulse. 'waiting' is the number of functions
// still waiting for their I/O, 'count' the total held.
//
// The in-order completion and the depth are this design's choices; the
// request queue and the return to the priority queue follow the paper.
module io_queue
  import fps_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  job_t                    in_job,
  input  logic                    io_complete,
  output logic                    out_valid,
  input  logic                    out_ready,
  output job_t                    out_job,
  output logic [$clog2(DEPTH):0]  count,
  output logic [$clog2(DEPTH):0]  waiting
);

  localparam int AW = $clog2(DEPTH);

  job_t          mem [DEPTH];
  logic [AW-1:0] rd_p, wr_p;
  logic [AW:0]   ready_cnt;    // completed functions at the front
  logic          push, popq, wake;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign push      = in_valid && in_ready;
  assign out_valid = (ready_cnt != '0);
  assign out_job   = mem[rd_p];
  assign popq      = out_valid && out_ready;
  assign waiting   = count - ready_cnt;
  assign wake      = io_complete && (waiting != '0);

  always_ff @(posedge clk) begin
    if (push) mem[wr_p] <= in_job;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p      <= '0;
      wr_p      <= '0;
      count     <= '0;
      ready_cnt <= '0;
    end else begin
      if (push) wr_p <= wr_p + 1'b1;
      if (popq) rd_p <= rd_p + 1'b1;
      count     <= count + (AW+1)'(push) - (AW+1)'(popq);
      ready_cnt <= ready_cnt + (AW+1)'(wake) - (AW+1)'(popq);
    end
  end

endmodule
