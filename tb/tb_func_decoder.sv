// tb_func_decoder -- self-checking test of the functional decoder.
//
// Loads a 32-word program with function words, skip words of both kinds and
// an END word, runs it with a randomly stalling consumer and checks that
// exactly the function records come out, in order. With an always-ready
// consumer it checks the rate: one word per cycle, so 'done' rises
// END-index + 1 cycles after start. A second program without END must stop at
// the last word of the array.
module tb_func_decoder;
  import fps_pkg::*;

  localparam int PD = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             load_we = 1'b0;
  logic [4:0]       load_addr = '0;
  prog_word_t       load_word = '0;
  logic             start = 1'b0, busy, done, out_valid, out_ready = 1'b1;
  func_rec_t        out_rec;

  func_decoder #(.PROG_DEPTH(PD)) dut (.*);

  int checks = 0, failures = 0;
  func_rec_t exp_q [$];
  int rand_ready = 0;

  always @(negedge clk) out_ready = rand_ready ? 1'($urandom) : 1'b1;

  always @(posedge clk) if (out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected record");
    end else begin
      func_rec_t e;
      e = exp_q.pop_front();
      if (out_rec !== e) begin failures++; $display("FAIL record mismatch %h %h t=%0t ptr=%0d", out_rec, e, $time, dut.rd_ptr); end
    end
  end

  task automatic load(input int end_at);
    exp_q.delete();
    for (int a = 0; a < PD; a++) begin
      prog_word_t w;
      int k = $urandom_range(0, 3);
      w.rec = func_rec_t'({$urandom, $urandom});
      case (k)
        0: w.kind = W_SKIP;
        1: w.kind = W_RSVD;
        default: w.kind = W_FUNC;
      endcase
      if (a == end_at) w.kind = W_END;
      if (a < end_at && w.kind == W_FUNC) exp_q.push_back(w.rec);
      @(negedge clk);
      load_we = 1'b1; load_addr = 5'(a); load_word = w;
    end
    @(negedge clk);
    load_we = 1'b0;
  endtask

  task automatic run(input int expect_cycles);
    int n = 0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d records missing", exp_q.size()); end
    if (expect_cycles >= 0) begin
      checks++;
      if (n != expect_cycles) begin
        failures++; $display("FAIL took %0d cycles, expected %0d", n, expect_cycles);
      end
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rand_ready = 0; load(20); run(21);       // END at word 20: 21 words, one per cycle
    rand_ready = 1; load(20); run(-1);
    rand_ready = 1; load(PD); run(-1);       // no END word
    rand_ready = 0; load(PD); run(PD);
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
