// tb_fps_scheduler -- self-checking test of the FIFO scheduler.
//
// The testbench plays the priority queue (a list of random jobs with random
// FPU masks), the interconnect (it answers for a random busy FPU with a
// random response kind), the I/O queue (random wake-ups and ready) and the
// priority queue's return port (random ready). A reference FPU occupancy
// table predicts every cycle: whether the head issues and to which FPU (the
// lowest idle one of its mask), 'stall', where each response goes (result to
// the integration unit with the function's sequence number, I/O to the I/O
// queue, yield back to the queue with the new priority only for a dynamic
// function), the 'resume' mark, and the precedence of wake-ups over yields.
module tb_fps_scheduler;
  import fps_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               head_valid, pop;
  job_t               head_job;
  logic               issue_valid;
  logic [FPU_W-1:0]   issue_fpu;
  job_t               issue_job;
  logic               rsp_valid = 1'b0, rsp_ready;
  logic [FPU_W-1:0]   rsp_fpu = '0;
  fpu_rsp_t           rsp = '0;
  logic               rob_valid;
  logic [SEQ_W-1:0]   rob_seq;
  logic [DATA_W-1:0]  rob_data;
  logic               io_valid, io_ready = 1'b1;
  job_t               io_job;
  logic               wake_valid = 1'b0, wake_ready;
  job_t               wake_job = '0;
  logic               ret_valid, ret_ready = 1'b1;
  job_t               ret_job;
  logic [NUM_FPU-1:0] fpu_busy;
  logic               stall;

  fps_scheduler dut (.*);

  int checks = 0, failures = 0;
  job_t list [$];
  job_t held [NUM_FPU];
  logic [NUM_FPU-1:0] rbusy = '0;
  int n_issue = 0, n_stall = 0, n_done = 0, n_io = 0, n_yield = 0, n_dyn = 0, n_wake_first = 0;

  assign head_valid = list.size() != 0;
  assign head_job   = head_valid ? list[0] : '0;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", s, $time);
  endtask

  always @(posedge clk) if (rst_n) begin
    int pick;
    job_t h, e;
    logic exp_rr;
    // ---- issue
    pick = -1;
    if (head_valid)
      for (int i = NUM_FPU - 1; i >= 0; i--) if (head_job.fpu_mask[i] && !rbusy[i]) pick = i;
    checks++;
    if (issue_valid !== (pick >= 0) || pop !== issue_valid || stall !== (head_valid && pick < 0))
      fail("issue/pop/stall");
    if (pick >= 0) begin
      checks++;
      if (int'(issue_fpu) != pick || issue_job !== head_job) fail("issue target");
      n_issue++;
    end
    if (stall) n_stall++;
    checks++;
    if (fpu_busy !== rbusy) fail("busy table");
    // ---- return path precedence
    checks++;
    if (wake_valid && (!ret_valid || ret_job !== wake_job || wake_ready !== ret_ready)) fail("wake path");
    // ---- responses
    if (rsp_valid) begin
      h = held[rsp_fpu];
      e = h;
      e.resume = 1'b1;
      unique case (rsp.kind)
        RSP_DONE: begin
          checks++;
          if (!rsp_ready || !rob_valid || rob_seq !== h.seq || rob_data !== rsp.result || io_valid)
            fail("done routing");
          exp_rr = 1'b1;
          n_done++;
        end
        RSP_IO: begin
          checks++;
          if (rsp_ready !== io_ready || !io_valid || io_job !== e || rob_valid) fail("io routing");
          exp_rr = io_ready;
          if (exp_rr) n_io++;
        end
        default: begin
          if (h.dyn) e.prio = rsp.new_prio;
          exp_rr = !wake_valid && ret_ready;
          checks++;
          if (rsp_ready !== exp_rr || rob_valid || io_valid) fail("yield ready");
          if (!wake_valid) begin
            checks++;
            if (!ret_valid || ret_job !== e) fail("yield job");
          end else n_wake_first++;
          if (exp_rr) begin n_yield++; if (h.dyn && rsp.new_prio != h.prio) n_dyn++; end
        end
      endcase
      if (exp_rr) rbusy[rsp_fpu] = 1'b0;
    end else begin
      checks++;
      if (rob_valid || io_valid) fail("spurious output");
    end
    if (pick >= 0) begin
      rbusy[pick] = 1'b1;
      held[pick]  = head_job;
      void'(list.pop_front());
    end
  end

  always @(negedge clk) if (rst_n) begin
    logic [NUM_FPU-1:0] b;
    int k;
    // supply new jobs
    if (list.size() < 4 && $urandom_range(0, 1) == 0) begin
      job_t j;
      j = job_t'({$urandom, $urandom, $urandom, $urandom});
      j.resume = 1'b0;
      j.fpu_mask = NUM_FPU'($urandom_range(1, 255));
      list.push_back(j);
    end
    // one response from a random busy FPU
    b = rbusy;
    rsp_valid = 1'b0;
    if (b != 0 && $urandom_range(0, 1) == 0) begin
      do k = $urandom_range(0, NUM_FPU - 1); while (!b[k]);
      rsp_valid = 1'b1;
      rsp_fpu   = FPU_W'(k);
      rsp       = fpu_rsp_t'({$urandom, $urandom});
      if (rsp.kind == 2'd3) rsp.kind = RSP_DONE;
    end
    io_ready   = ($urandom_range(0, 3) != 0);
    ret_ready  = ($urandom_range(0, 3) != 0);
    wake_valid = ($urandom_range(0, 3) == 0);
    wake_job   = job_t'({$urandom, $urandom, $urandom, $urandom});
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (5000) @(negedge clk);
    checks++;
    if (n_issue < 100 || n_stall == 0 || n_done == 0 || n_io == 0 || n_yield == 0 ||
        n_dyn == 0 || n_wake_first == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("issue=%0d stall=%0d done=%0d io=%0d yield=%0d dyn=%0d wake_first=%0d",
             n_issue, n_stall, n_done, n_io, n_yield, n_dyn, n_wake_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
