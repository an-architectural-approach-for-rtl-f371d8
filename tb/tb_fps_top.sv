// tb_fps_top -- end-to-end test of the whole front end with eight behavioural
// FPUs, at the design's default sizes.
//
// Two programs are generated at random and run one after the other. Each has
// process-data words between its functions, all five classes plus
// out-of-range class codes, all priority levels, static and dynamic
// priorities, functions that take an earlier function's result, functions
// that wait for I/O and functions that give up their FPU. The expected result
// of every function is computed in program order with fps_tb_pkg::ref_result
// and compared with the integration memory after 'done'. The test also counts
// how often each mechanism of the design happened and fails if one never did:
// scheduler stall, dependency hold, reorder-window hold, out-of-order
// completion, I/O request, I/O wake-up, yield, dynamic and static priority on
// yield, a higher priority overtaking queued lower-priority work, class
// remapping, skipped words, several FPUs answering at once and a yield
// waiting behind a wake-up.
module tb_fps_top;
  import fps_pkg::*;
  import fps_tb_pkg::*;

  localparam int PROG_DEPTH = 256;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    prog_we = 1'b0;
  logic [7:0]              prog_addr = '0;
  prog_word_t              prog_word = '0;
  logic                    start = 1'b0;
  logic                    busy, done;
  logic [SEQ_W:0]          n_funcs;
  fps_status_t             status;
  logic [SEQ_W-1:0]        host_addr = '0;
  logic [DATA_W-1:0]       host_data;
  logic                    io_complete = 1'b0;
  logic [NUM_FPU-1:0]      fpu_issue, fpu_rsp_valid, fpu_rsp_ack;
  job_t                    fpu_job;
  fpu_rsp_t                fpu_rsp [NUM_FPU];
  int                      fpu_err [NUM_FPU];
  int                      fpu_jobs [NUM_FPU];

  fps_top dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_word, .start, .busy, .done, .n_funcs, .status,
    .host_addr, .host_data, .io_complete,
    .fpu_issue, .fpu_job, .fpu_rsp_valid, .fpu_rsp, .fpu_rsp_ack
  );

  for (genvar i = 0; i < NUM_FPU; i++) begin : g_fpu
    fpu_model #(.IDX(i)) u_fpu (
      .clk, .rst_n, .issue(fpu_issue[i]), .job(fpu_job),
      .rsp_valid(fpu_rsp_valid[i]), .rsp(fpu_rsp[i]), .ack(fpu_rsp_ack[i]),
      .errors(fpu_err[i]), .jobs(fpu_jobs[i])
    );
  end

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- mechanism counters -----------------------------------------------------
  int n_stall = 0, n_dep = 0, n_win = 0, n_ooo = 0, n_io = 0, n_wake = 0, n_yield = 0;
  int n_dyn = 0, n_static = 0, n_overtake = 0, n_remap = 0, n_skip = 0, n_multi = 0;
  int n_retwait = 0;
  always @(posedge clk) if (rst_n) begin
    if (status.stall) n_stall++;
    if (dut.dep_wait) n_dep++;
    if (dut.window_wait) n_win++;
    if (status.reorder) n_ooo++;
    if (dut.io_valid && dut.io_ready) n_io++;
    if (dut.wake_valid && dut.wake_ready) n_wake++;
    if (dut.rsp_valid && dut.rsp_ready && dut.rsp.kind == RSP_YIELD) begin
      n_yield++;
      if (dut.u_scheduler.rjob.dyn) n_dyn++; else n_static++;
    end
    if (dut.rsp_valid && dut.rsp.kind == RSP_YIELD && dut.wake_valid) n_retwait++;
    if (dut.issue_valid)
      for (int l = 0; l < NUM_PRIO; l++)
        if (l > int'(dut.issue_job.prio) && dut.level_cnt[l] != 0) begin
          n_overtake++;
          break;
        end
    if (dut.fd_valid && dut.fd_ready && dut.fd_rec.fn_class >= 3'(NUM_CLASS)) n_remap++;
    if (dut.u_func_decoder.busy && (dut.u_func_decoder.cur.kind == W_SKIP ||
                                    dut.u_func_decoder.cur.kind == W_RSVD)) n_skip++;
    if ($countones(fpu_rsp_valid) > 1) n_multi++;
  end

  // I/O side: complete a pending transfer now and then
  // (also timed, now and then, to land with a yield response so that the
  // shared return path into the priority queue sees both at once)
  logic [NUM_FPU-1:0] yield_next;
  for (genvar i = 0; i < NUM_FPU; i++) begin : g_yn
    assign yield_next[i] = g_fpu[i].u_fpu.running && g_fpu[i].u_fpu.remaining == 2 &&
                           !g_fpu[i].u_fpu.cur.resume && !g_fpu[i].u_fpu.cur.code[7] &&
                           g_fpu[i].u_fpu.cur.code[6];
  end
  always @(posedge clk) begin
    io_complete <= (dut.io_waiting != 0) &&
                   (($urandom_range(0, 3) == 0) || (|yield_next));
  end

  // ---- program generation and reference --------------------------------------
  func_rec_t         recs [$];
  logic [DATA_W-1:0] expect_q [$];

  task automatic make_program(input int nfunc, input int seed_mod);
    int w = 0;
    recs.delete();
    expect_q.delete();
    for (int f = 0; f < nfunc; f++) begin
      func_rec_t r;
      fn_class_e c;
      logic [DATA_W-1:0] b;
      r.fn_class = 3'($urandom_range(0, 6));
      r.code     = 8'($urandom);
      r.code[7]  = ($urandom_range(0, (seed_mod == 1) ? 2 : 9) == 0);
      r.code[6]  = ($urandom_range(0, (seed_mod == 1) ? 2 : 9) == 0);
      r.prio     = PRIO_W'($urandom);
      r.dyn      = 1'($urandom);
      r.has_dep  = (f > 0) && ($urandom_range(0, 3) == 0);
      r.dep      = (f > 0) ? SEQ_W'(f - 1 - $urandom_range(0, (f > 20) ? 19 : f - 1)) : '0;
      if (seed_mod == 1 && f == nfunc - 1) begin r.has_dep = 1'b1; r.dep = SEQ_W'(f + 3); end
      r.operand  = $urandom;
      c = class_of(r.fn_class);
      b = (r.has_dep && int'(r.dep) < f) ? expect_q[r.dep] : '0;
      expect_q.push_back(ref_result(c, r.code, r.operand, b));
      recs.push_back(r);
      // occasional process-data words between functions
      if ($urandom_range(0, 4) == 0) begin
        prog_word_t s;
        s = '0;
        s.kind = ($urandom_range(0, 1) == 0) ? W_SKIP : W_RSVD;
        s.rec.operand = $urandom;
        write_word(w++, s);
      end
      begin
        prog_word_t fw;
        fw.kind = W_FUNC;
        fw.rec  = r;
        write_word(w++, fw);
      end
    end
    if (w < PROG_DEPTH) begin
      prog_word_t e;
      e = '0;
      e.kind = W_END;
      write_word(w, e);
    end
  endtask

  task automatic write_word(input int a, input prog_word_t pw);
    @(negedge clk);
    prog_we   = 1'b1;
    prog_addr = 8'(a);
    prog_word = pw;
    @(negedge clk);
    prog_we   = 1'b0;
  endtask

  task automatic run_and_check(input int nfunc);
    int t0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cycle;
    while (!done) @(negedge clk);
    $display("program of %0d functions finished in %0d cycles", nfunc, cycle - t0);
    checks++;
    if (int'(n_funcs) != nfunc) begin
      failures++;
      $display("FAIL n_funcs=%0d expected %0d", n_funcs, nfunc);
    end
    checks++;
    if (int'(status.committed) != nfunc || status.queued != 0 || status.io_held != 0 ||
        status.fpu_busy != 0 || status.dec_busy) begin
      failures++;
      $display("FAIL status at done: %p", status);
    end
    for (int f = 0; f < nfunc; f++) begin
      host_addr = SEQ_W'(f);
      #1;
      checks++;
      if (host_data !== expect_q[f]) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d = %h expected %h", f, host_data, expect_q[f]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // program 1: nearly fills the program array
    make_program(200, 0);
    run_and_check(200);
    // program 2: shorter, last function names a later one (link dropped)
    make_program(60, 1);
    run_and_check(60);

    for (int i = 0; i < NUM_FPU; i++) begin
      checks++;
      if (fpu_err[i] != 0) begin
        failures++;
        $display("FAIL FPU%0d protocol/class errors %0d", i + 1, fpu_err[i]);
      end
      checks++;
      if (fpu_jobs[i] == 0) begin
        failures++;
        $display("FAIL FPU%0d never used", i + 1);
      end
    end
    $display("mechanisms: stall=%0d dep_hold=%0d window_hold=%0d out_of_order=%0d io=%0d wake=%0d",
             n_stall, n_dep, n_win, n_ooo, n_io, n_wake);
    $display("            yield=%0d dynamic=%0d static=%0d overtake=%0d remap=%0d skip=%0d multi_rsp=%0d ret_wait=%0d",
             n_yield, n_dyn, n_static, n_overtake, n_remap, n_skip, n_multi, n_retwait);
    begin
      int m [14];
      m = '{n_stall, n_dep, n_win, n_ooo, n_io, n_wake, n_yield, n_dyn, n_static,
                     n_overtake, n_remap, n_skip, n_multi, n_retwait};
      foreach (m[k]) begin
        checks++;
        if (m[k] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
