// tb_fine_decoder -- self-checking test of fine decoding.
//
// Random function records (all class codes, with valid, backward and
// forward-pointing dependencies) are offered while the consumer stalls at
// random and the testbench itself plays the integration side: it advances the
// committed count at random and serves a fixed random memory on the forwarding
// port. A reference model kept here predicts, every cycle, whether the record
// may be taken (output stage free, producer integrated, fewer than ROB_DEPTH
// outstanding), and for each taken record the job that must come out: sequence
// number, class (unknown codes become maths), per-class FID counting from 1,
// FPU mask from the FPU role table, and the forwarded operand. A start pulse
// in the middle must restart the numbering.
module tb_fine_decoder;
  import fps_pkg::*;
  import fps_tb_pkg::*;

  localparam int RD = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  func_rec_t         in_rec = '0;
  job_t              out_job;
  logic [SEQ_W:0]    commit_cnt = '0, seq_cnt;
  logic [SEQ_W-1:0]  fwd_addr;
  logic [DATA_W-1:0] fwd_data;
  logic              dep_wait, window_wait;
  logic [DATA_W-1:0] fmem [2**SEQ_W];

  fine_decoder #(.ROB_DEPTH(RD)) dut (.*);
  assign fwd_data = fmem[fwd_addr];

  int checks = 0, failures = 0;
  int ref_seq = 0;
  int ref_fid [NUM_CLASS];
  job_t exp_q [$];
  int n_dep = 0, n_win = 0, n_taken = 0;

  function automatic logic [NUM_FPU-1:0] ref_mask(fn_class_e c);
    logic [NUM_FPU-1:0] m = '0;
    // FPU1 graphics, FPU2 maths, FPU3 DSP, FPU4 string, FPU5 multimedia,
    // FPU6 maths, FPU7 DSP, FPU8 graphics
    unique case (c)
      CLS_MATHS:      m = 8'b0010_0010;
      CLS_DSP:        m = 8'b0100_0100;
      CLS_STRING:     m = 8'b0000_1000;
      CLS_GRAPHICS:   m = 8'b1000_0001;
      default:        m = 8'b0001_0000;
    endcase
    return m;
  endfunction

  // reference checks at every rising edge, before the design updates
  always @(posedge clk) if (rst_n && !start) begin
    logic dep_v, dep_ok, win_ok, exp_ready;
    dep_v     = in_rec.has_dep && int'(in_rec.dep) < ref_seq;
    dep_ok    = !dep_v || int'(in_rec.dep) < int'(commit_cnt);
    win_ok    = (ref_seq - int'(commit_cnt)) < RD;
    exp_ready = (!out_valid || out_ready) && dep_ok && win_ok;
    if (in_valid) begin
      checks++;
      if (in_ready !== exp_ready) begin
        failures++;
        $display("FAIL in_ready=%b expected %b (seq %0d commit %0d)", in_ready, exp_ready, ref_seq, commit_cnt);
      end
      if (!dep_ok) n_dep++;
      if (dep_ok && !win_ok) n_win++;
    end
    if (out_valid && out_ready) begin
      job_t e;
      checks++;
      e = exp_q.pop_front();
      if (out_job !== e) begin
        failures++;
        $display("FAIL job seq %0d: got %h expected %h", e.seq, out_job, e);
      end
    end
    if (in_valid && in_ready) begin
      job_t j;
      fn_class_e c;
      c = class_of(in_rec.fn_class);
      ref_fid[c]++;
      j.seq = SEQ_W'(ref_seq);
      j.fid.cls = c;
      j.fid.idx = SEQ_W'(ref_fid[c]);
      j.fpu_mask = ref_mask(c);
      j.code = in_rec.code;
      j.prio = in_rec.prio;
      j.dyn = in_rec.dyn;
      j.resume = 1'b0;
      j.op_a = in_rec.operand;
      j.op_b = dep_v ? fmem[in_rec.dep] : '0;
      exp_q.push_back(j);
      ref_seq++;
      n_taken++;
    end
  end

  // stimulus, changed at falling edges
  always @(negedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (!in_valid || in_ready || $urandom_range(0, 7) == 0) begin
      in_valid <= ($urandom_range(0, 4) != 0);
      in_rec   <= func_rec_t'({$urandom, $urandom});
      in_rec.has_dep <= ($urandom_range(0, 2) == 0);
      in_rec.dep     <= SEQ_W'($urandom_range(0, ref_seq + 2));
    end
    if (int'(commit_cnt) < ref_seq - int'(out_valid) && $urandom_range(0, 2) == 0)
      commit_cnt <= commit_cnt + 1'b1;
  end

  initial begin
    foreach (fmem[i]) fmem[i] = $urandom;
    foreach (ref_fid[c]) ref_fid[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (n_taken >= 150);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    // restart: numbering and counters begin again
    start = 1'b0;
    ref_seq = 0;
    foreach (ref_fid[c]) ref_fid[c] = 0;
    exp_q.delete();
    commit_cnt = '0;
    checks++;
    if (out_valid || seq_cnt != 0) begin failures++; $display("FAIL start did not clear"); end
    wait (n_taken >= 300);
    @(negedge clk);
    checks++;
    if (n_dep == 0 || n_win == 0) begin
      failures++;
      $display("FAIL holds not exercised dep=%0d win=%0d", n_dep, n_win);
    end
    $display("taken=%0d dependency holds=%0d window holds=%0d", n_taken, n_dep, n_win);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
