// tb_fp_interconnect -- self-checking test of the interconnect bus.
//
// Issue side: random issues must reach exactly the addressed FPU one cycle
// later with the job unchanged. Response side: random FPUs raise responses and
// hold them until acknowledged while the scheduler accepts at random. A
// reference round-robin pointer predicts which FPU is granted (the first
// requesting one at or after the FPU following the last grant), the
// acknowledge must be one-hot at that FPU and only when accepted, and with all
// eight FPUs requesting every FPU must be served once in eight grants.
module tb_fp_interconnect;
  import fps_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               issue_valid = 1'b0;
  logic [FPU_W-1:0]   issue_fpu = '0;
  job_t               issue_job = '0;
  logic [NUM_FPU-1:0] fpu_issue;
  job_t               fpu_job;
  logic [NUM_FPU-1:0] fpu_rsp_valid = '0, fpu_rsp_ack;
  fpu_rsp_t           fpu_rsp [NUM_FPU];
  logic               rsp_valid, rsp_ready = 1'b0;
  logic [FPU_W-1:0]   rsp_fpu;
  fpu_rsp_t           rsp;

  fp_interconnect dut (.*);

  int checks = 0, failures = 0;
  int rr = 0;
  logic               p_issue = 1'b0;
  logic [FPU_W-1:0]   p_fpu;
  job_t               p_job;
  int served [NUM_FPU];
  int all_phase = 0, grants_in_phase = 0;

  always @(posedge clk) if (rst_n) begin
    int g;
    // issue path (one cycle latency)
    checks++;
    if (p_issue) begin
      if (fpu_issue !== (NUM_FPU'(1) << p_fpu) || fpu_job !== p_job) begin
        failures++; $display("FAIL issue delivery");
      end
    end else if (fpu_issue !== '0) begin
      failures++; $display("FAIL spurious issue");
    end
    p_issue = issue_valid;
    p_fpu   = issue_fpu;
    p_job   = issue_job;
    // response arbitration
    g = -1;
    for (int k = 0; k < NUM_FPU; k++)
      if (g < 0 && fpu_rsp_valid[(rr + k) % NUM_FPU]) g = (rr + k) % NUM_FPU;
    checks++;
    if (rsp_valid !== (g >= 0)) begin failures++; $display("FAIL rsp_valid"); end
    if (g >= 0) begin
      checks++;
      if (int'(rsp_fpu) != g || rsp !== fpu_rsp[g]) begin
        failures++; $display("FAIL grant %0d expected %0d", rsp_fpu, g);
      end
      checks++;
      if (fpu_rsp_ack !== (rsp_ready ? (NUM_FPU'(1) << g) : '0)) begin
        failures++; $display("FAIL ack");
      end
      if (rsp_ready) begin
        rr = (g + 1) % NUM_FPU;
        if (all_phase) begin served[g]++; grants_in_phase++; end
      end
    end else begin
      checks++;
      if (fpu_rsp_ack !== '0) begin failures++; $display("FAIL ack without grant"); end
    end
  end

  // FPUs: hold a response until acknowledged
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < NUM_FPU; i++) begin
      if (fpu_rsp_ack[i]) fpu_rsp_valid[i] = 1'b0;
      if (!fpu_rsp_valid[i] && (all_phase || $urandom_range(0, 3) == 0)) begin
        fpu_rsp_valid[i] = 1'b1;
        fpu_rsp[i]       = fpu_rsp_t'({$urandom, $urandom});
      end
    end
    rsp_ready   = all_phase ? 1'b1 : ($urandom_range(0, 2) != 0);
    issue_valid = ($urandom_range(0, 1) == 0);
    issue_fpu   = FPU_W'($urandom);
    issue_job   = job_t'({$urandom, $urandom, $urandom, $urandom});
  end

  initial begin
    foreach (fpu_rsp[i]) fpu_rsp[i] = '0;
    foreach (served[i]) served[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2000) @(negedge clk);
    all_phase = 1;                   // every FPU requests all the time
    repeat (8 * 20) @(negedge clk);
    all_phase = 0;
    foreach (served[i]) begin
      checks++;
      if (served[i] * NUM_FPU < grants_in_phase - NUM_FPU || served[i] * NUM_FPU > grants_in_phase + NUM_FPU) begin
        failures++; $display("FAIL FPU%0d served %0d of %0d", i + 1, served[i], grants_in_phase);
      end
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
