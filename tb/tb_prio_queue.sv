// tb_prio_queue -- self-checking test of the multilevel priority queue.
//
// Random jobs of random priority are pushed on the 'new' and 'ret' ports
// (sometimes both in one cycle) and popped at random. A reference of one
// SystemVerilog queue per level predicts the head (oldest job of the highest
// non-empty level, level 0 highest), the ready signals (level not full, 'ret'
// first) and the occupancy of every level. A fill phase with no pops checks
// that a full level refuses pushes while other levels still accept them.
module tb_prio_queue;
  import fps_pkg::*;

  localparam int QD = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic new_valid = 1'b0, new_ready, ret_valid = 1'b0, ret_ready, head_valid, pop = 1'b0;
  job_t new_job = '0, ret_job = '0, head_job;
  logic [$clog2(QD):0] level_cnt [NUM_PRIO];

  prio_queue #(.QDEPTH(QD)) dut (.*);

  int checks = 0, failures = 0;
  job_t q [NUM_PRIO][$];
  int nopop = 0;
  int n_full = 0, n_both = 0, n_pops = 0;

  always @(posedge clk) if (rst_n) begin
    int hl;
    logic exp_rr, exp_nr;
    hl = -1;
    for (int l = NUM_PRIO - 1; l >= 0; l--) if (q[l].size() != 0) hl = l;
    checks++;
    if (head_valid !== (hl >= 0)) begin failures++; $display("FAIL head_valid"); end
    if (hl >= 0) begin
      checks++;
      if (head_job !== q[hl][0]) begin failures++; $display("FAIL head job level %0d", hl); end
    end
    for (int l = 0; l < NUM_PRIO; l++) begin
      checks++;
      if (int'(level_cnt[l]) != q[l].size()) begin failures++; $display("FAIL level %0d count", l); end
    end
    exp_rr = q[ret_job.prio].size() < QD;
    exp_nr = !ret_valid && q[new_job.prio].size() < QD;
    checks++;
    if (ret_ready !== exp_rr || new_ready !== exp_nr) begin failures++; $display("FAIL ready"); end
    if (new_valid && !exp_nr && q[new_job.prio].size() == QD) n_full++;
    if (new_valid && ret_valid) n_both++;
    // update the reference
    if (pop && hl >= 0) begin void'(q[hl].pop_front()); n_pops++; end
    if (ret_valid && exp_rr)      q[ret_job.prio].push_back(ret_job);
    else if (new_valid && exp_nr) q[new_job.prio].push_back(new_job);
  end

  always @(negedge clk) if (rst_n) begin
    job_t a, b;
    a = job_t'({$urandom, $urandom, $urandom, $urandom});
    b = job_t'({$urandom, $urandom, $urandom, $urandom});
    new_valid = ($urandom_range(0, 1) == 0);
    ret_valid = ($urandom_range(0, 3) == 0);
    new_job   = a;
    ret_job   = b;
    pop       = head_valid && (nopop == 0) && ($urandom_range(0, 2) != 0);
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2000) @(negedge clk);
    nopop = 1;                       // fill everything
    repeat (200) @(negedge clk);
    nopop = 0;
    repeat (1000) @(negedge clk);
    checks++;
    if (n_full == 0 || n_both == 0 || n_pops < 100) begin
      failures++; $display("FAIL coverage full=%0d both=%0d pops=%0d", n_full, n_both, n_pops);
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
