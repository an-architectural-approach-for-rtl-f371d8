// tb_fig5_fifo -- the FIFO scheduling example: fifteen functions of one
// priority fed to the eight FPUs, three of which wait for I/O.
//
// Functions are numbered 1..15 in program order. Their classes repeat the FPU
// roles FPU1..FPU8 (graphics, maths, DSP, string, multimedia, maths, DSP,
// graphics), so the first eight can all run at once; functions 4, 10 and 14
// need one I/O transfer, which the testbench completes 20 cycles after each
// request. Checks: first runs are issued strictly in arrival order 1..15; the
// I/O queue receives 4, 10, 14 in that order and they run again in that
// order; the first eight are issued on consecutive cycles (one function
// per cycle) and all eight FPUs are busy at the same time; every
// result in the integration memory is right.
module tb_fig5_fifo;
  import fps_pkg::*;
  import fps_tb_pkg::*;

  localparam int N = 15;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               prog_we = 1'b0;
  logic [7:0]         prog_addr = '0;
  prog_word_t         prog_word = '0;
  logic               start = 1'b0, busy, done;
  logic [SEQ_W:0]     n_funcs;
  fps_status_t        status;
  logic [SEQ_W-1:0]   host_addr = '0;
  logic [DATA_W-1:0]  host_data;
  logic               io_complete = 1'b0;
  logic [NUM_FPU-1:0] fpu_issue, fpu_rsp_valid, fpu_rsp_ack;
  job_t               fpu_job;
  fpu_rsp_t           fpu_rsp [NUM_FPU];
  int                 fpu_err [NUM_FPU];
  int                 fpu_jobs [NUM_FPU];

  fps_top dut (.*);

  for (genvar i = 0; i < NUM_FPU; i++) begin : g_fpu
    fpu_model #(.IDX(i)) u_fpu (
      .clk, .rst_n, .issue(fpu_issue[i]), .job(fpu_job),
      .rsp_valid(fpu_rsp_valid[i]), .rsp(fpu_rsp[i]), .ack(fpu_rsp_ack[i]),
      .errors(fpu_err[i]), .jobs(fpu_jobs[i])
    );
  end

  int checks = 0, failures = 0;
  int first_q [$], io_q [$], resume_q [$];
  int issue_cyc [$];
  int cyc = 0;
  int max_busy = 0;
  int io_timer [$];
  fn_class_e roles [8] = '{CLS_GRAPHICS, CLS_MATHS, CLS_DSP, CLS_STRING,
                           CLS_MULTIMEDIA, CLS_MATHS, CLS_DSP, CLS_GRAPHICS};
  logic [DATA_W-1:0] expect_r [N];

  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (dut.issue_valid) issue_cyc.push_back(cyc);
    if (dut.issue_valid) begin
      if (dut.issue_job.resume) resume_q.push_back(int'(dut.issue_job.seq) + 1);
      else                      first_q.push_back(int'(dut.issue_job.seq) + 1);
    end
    if (dut.io_valid && dut.io_ready) begin
      io_q.push_back(int'(dut.io_job.seq) + 1);
      io_timer.push_back(20);
    end
    if ($countones(dut.fpu_busy) > max_busy) max_busy = $countones(dut.fpu_busy);
    // complete I/O transfers in order, 20 cycles after their request
    io_complete <= 1'b0;
    foreach (io_timer[k]) if (io_timer[k] > 0) io_timer[k]--;
    if (io_timer.size() != 0 && io_timer[0] == 0) begin
      io_complete <= 1'b1;
      void'(io_timer.pop_front());
    end
  end

  task automatic write_word(input int a, input prog_word_t pw);
    @(negedge clk);
    prog_we = 1'b1; prog_addr = 8'(a); prog_word = pw;
    @(negedge clk);
    prog_we = 1'b0;
  endtask

  task automatic expect_list(input string what, input int got [$], input int want [$]);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %p expected %p", what, got, want);
    end
  endtask

  initial begin
    prog_word_t w;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 1; n <= N; n++) begin
      w = '0;
      w.kind         = W_FUNC;
      w.rec.fn_class = 3'(roles[(n - 1) % 8]);
      w.rec.code     = 8'(8 + (n % 4));            // 9..12 cycles of work
      w.rec.code[7]  = (n == 4 || n == 10 || n == 14);
      w.rec.prio     = PRIO_W'(1);
      w.rec.operand  = DATA_W'(n * 1000);
      expect_r[n - 1] = ref_result(roles[(n - 1) % 8], w.rec.code, w.rec.operand, '0);
      write_word(n - 1, w);
    end
    w = '0;
    w.kind = W_END;
    write_word(N, w);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);

    expect_list("first-run issue order", first_q, '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15});
    expect_list("I/O request order", io_q, '{4, 10, 14});
    expect_list("resumed issue order", resume_q, '{4, 10, 14});
    // feed rate: the first eight functions reach the eight FPUs on consecutive cycles
    checks++;
    if (issue_cyc.size() < 8 || issue_cyc[7] - issue_cyc[0] != 7) begin
      failures++; $display("FAIL first eight issues not one per cycle: %p", issue_cyc);
    end
    checks++;
    if (max_busy != NUM_FPU) begin
      failures++; $display("FAIL at most %0d FPUs busy at once", max_busy);
    end
    for (int f = 0; f < N; f++) begin
      host_addr = SEQ_W'(f);
      #1;
      checks++;
      if (host_data !== expect_r[f]) begin
        failures++; $display("FAIL result of function %0d", f + 1);
      end
    end
    foreach (fpu_err[i]) begin
      checks++;
      if (fpu_err[i] != 0) begin failures++; $display("FAIL FPU%0d errors", i + 1); end
    end
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
