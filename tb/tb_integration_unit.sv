// tb_integration_unit -- self-checking test of the reorder buffer.
//
// Results of a 200-function program arrive in a random order that respects the
// window the fine decoder guarantees (never more than ROB_DEPTH functions
// past the oldest uncommitted one), at most one per cycle. The memory writes
// must come out in program order with the right data, one commit per cycle,
// the commit of a function in the cycle after its result arrived when all
// older ones are already committed, and commit_cnt must follow. A start pulse
// must clear the count.
module tb_integration_unit;
  import fps_pkg::*;

  localparam int RD = 16;
  localparam int N  = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, wr_valid = 1'b0, mem_we, out_of_order;
  logic [SEQ_W-1:0]  wr_seq = '0, mem_addr;
  logic [DATA_W-1:0] wr_data = '0, mem_data;
  logic [SEQ_W:0]    commit_cnt;

  integration_unit #(.ROB_DEPTH(RD)) dut (.*);

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] val [N];
  logic sent [N];
  int exp_commit = 0;
  int n_ooo = 0;
  int last_arrival = -1;
  int cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && !start) begin
      checks++;
      if (int'(commit_cnt) != exp_commit) begin failures++; $display("FAIL commit_cnt"); end
      if (mem_we) begin
        checks++;
        if (int'(mem_addr) != exp_commit || mem_data !== val[exp_commit]) begin
          failures++; $display("FAIL commit %0d: addr %0d data %h", exp_commit, mem_addr, mem_data);
        end
        exp_commit++;
      end
      if (wr_valid && out_of_order) n_ooo++;
    end
  end

  initial begin
    foreach (val[i]) begin val[i] = $urandom; sent[i] = 1'b0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // in-order single result: committed in the next cycle
    @(negedge clk);
    wr_valid = 1'b1; wr_seq = 0; wr_data = val[0]; sent[0] = 1'b1;
    @(negedge clk);
    wr_valid = 1'b0;
    checks++;
    if (commit_cnt != 0 || !mem_we) begin failures++; $display("FAIL commit latency"); end
    @(negedge clk);
    // the rest in random order within the window
    while (exp_commit < N) begin
      int s, lo, hi;
      wr_valid = 1'b0;
      lo = int'(commit_cnt);
      hi = (lo + RD - 1 < N - 1) ? lo + RD - 1 : N - 1;
      if ($urandom_range(0, 3) != 0) begin
        s = $urandom_range(lo, hi);
        if (!sent[s]) begin
          wr_valid = 1'b1; wr_seq = SEQ_W'(s); wr_data = val[s]; sent[s] = 1'b1;
        end
      end
      @(negedge clk);
    end
    wr_valid = 1'b0;
    @(negedge clk);
    checks++;
    if (n_ooo == 0) begin failures++; $display("FAIL no out-of-order arrival"); end
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (commit_cnt != 0 || mem_we) begin failures++; $display("FAIL start"); end
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
