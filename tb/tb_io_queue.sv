// tb_io_queue -- self-checking test of the I/O wait queue.
//
// Random jobs are pushed, random io_complete pulses arrive (also when nothing
// waits, which must be ignored) and the output is taken at random. A reference
// queue plus a count of completed-but-not-yet-left jobs predicts in_ready (not
// full), out_valid (at least one completed job), the job shown (the oldest)
// and the 'count' and 'waiting' outputs. A job may not leave before its I/O
// completed: out_valid must stay low while every held job still waits.
module tb_io_queue;
  import fps_pkg::*;

  localparam int D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_ready, io_complete = 1'b0, out_valid, out_ready = 1'b0;
  job_t in_job = '0, out_job;
  logic [$clog2(D):0] count, waiting;

  io_queue #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  job_t q [$];
  int done_cnt = 0;
  int n_out = 0, n_ignored = 0, n_full = 0, n_held = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (in_ready !== (q.size() < D) || out_valid !== (done_cnt > 0) ||
        int'(count) != q.size() || int'(waiting) != q.size() - done_cnt) begin
      failures++;
      $display("FAIL status q=%0d done=%0d count=%0d waiting=%0d ov=%b", q.size(), done_cnt, count, waiting, out_valid);
    end
    if (done_cnt > 0) begin
      checks++;
      if (out_job !== q[0]) begin failures++; $display("FAIL order"); end
    end
    if (q.size() > 0 && done_cnt == 0) n_held++;
    if (in_valid && q.size() == D) n_full++;
    if (io_complete && q.size() == done_cnt) n_ignored++;
    // update reference
    if (io_complete && q.size() > done_cnt) done_cnt++;
    if (out_valid && out_ready && done_cnt > 0) begin
      void'(q.pop_front());
      done_cnt--;
      n_out++;
    end
    if (in_valid && in_ready) q.push_back(in_job);
  end

  always @(negedge clk) if (rst_n) begin
    in_valid    = ($urandom_range(0, 2) == 0);
    in_job      = job_t'({$urandom, $urandom, $urandom, $urandom});
    io_complete = ($urandom_range(0, 3) == 0);
    out_ready   = ($urandom_range(0, 1) == 0);
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3000) @(negedge clk);
    checks++;
    if (n_out < 100 || n_ignored == 0 || n_full == 0 || n_held == 0) begin
      failures++; $display("FAIL coverage out=%0d ignored=%0d full=%0d held=%0d", n_out, n_ignored, n_full, n_held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
