// fine_decoder -- fine decoding ("Funpiler") of one function per cycle.
//
// For every function record from the functional decoder it does the three
// jobs of the fine decoding block:
//   * FPU locate:      maps the class code to the mask of FPUs of that class
//                      (an unknown class code is treated as maths);
//   * temporal locate: gives the function its program-order sequence number;
//   * connectivity fix: if the function takes the output of an earlier
//                      function, it is held until that result has been
//                      integrated, and the result is then read through the
//                      forwarding port and attached as operand B.
// It also assigns the function identifier: the class plus a running index
// within that class (A1, A2, ... for maths, D1, D2, ... for DSP).
//
// Interface: in_valid/in_ready/in_rec from the functional decoder;
// out_valid/out_ready/out_job to the priority queue (registered, one cycle
// latency); fwd_addr/fwd_data is a combinational read of the integration
// memory; commit_cnt is the number of functions integrated so far. 'start'
// clears the sequence and FID counters for a new program. A new function is
// also held while ROB_DEPTH functions are outstanding, so that every sequence
// number in flight has a reorder-buffer slot. seq_cnt reports how many
// functions have been decoded.
//
// The FID scheme follows the paper; the encodings, the in-order hold on a
// dependency and the window check are this design's choices.
module fine_decoder
  import fps_pkg::*;
#(
  parameter int ROB_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  output logic               in_ready,
  input  func_rec_t          in_rec,
  output logic               out_valid,
  input  logic               out_ready,
  output job_t               out_job,
  input  logic [SEQ_W:0]     commit_cnt,
  output logic [SEQ_W-1:0]   fwd_addr,
  input  logic [DATA_W-1:0]  fwd_data,
  output logic [SEQ_W:0]     seq_cnt,
  output logic               dep_wait,     // held for a producer this cycle
  output logic               window_wait   // held for a reorder slot this cycle
);

  logic [SEQ_W:0]   seq_next;
  logic [SEQ_W-1:0] fid_cnt [NUM_CLASS];
  fn_class_e        cls;
  logic             dep_valid;
  logic             dep_ok;
  logic             win_ok;
  logic             stage_free;
  logic             take;

  // FPU locate: class code to class (unknown codes become maths)
  always_comb begin
    if (in_rec.fn_class < 3'(NUM_CLASS)) cls = fn_class_e'(in_rec.fn_class);
    else                                 cls = CLS_MATHS;
  end

  // connectivity fix: a link must point to an earlier function
  assign dep_valid = in_rec.has_dep && ({1'b0, in_rec.dep} < seq_next);
  assign dep_ok    = !dep_valid || ({1'b0, in_rec.dep} < commit_cnt);
  assign win_ok    = (seq_next - commit_cnt) < (SEQ_W+1)'(ROB_DEPTH);
  assign fwd_addr  = in_rec.dep;

  assign stage_free = !out_valid || out_ready;
  assign in_ready   = stage_free && dep_ok && win_ok && !start;
  assign take       = in_valid && in_ready;
  assign seq_cnt    = seq_next;

  assign dep_wait    = in_valid && stage_free && !dep_ok;
  assign window_wait = in_valid && stage_free && dep_ok && !win_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_job   <= '0;
      seq_next  <= '0;
      for (int c = 0; c < NUM_CLASS; c++) fid_cnt[c] <= '0;
    end else if (start) begin
      out_valid <= 1'b0;
      seq_next  <= '0;
      for (int c = 0; c < NUM_CLASS; c++) fid_cnt[c] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid        <= 1'b1;
        out_job.seq      <= seq_next[SEQ_W-1:0];
        out_job.fid.cls  <= cls;
        out_job.fid.idx  <= fid_cnt[cls] + 1'b1;   // ids count from 1
        out_job.fpu_mask <= class_mask(cls);
        out_job.code     <= in_rec.code;
        out_job.prio     <= in_rec.prio;
        out_job.dyn      <= in_rec.dyn;
        out_job.resume   <= 1'b0;
        out_job.op_a     <= in_rec.operand;
        out_job.op_b     <= dep_valid ? fwd_data : '0;
        seq_next         <= seq_next + 1'b1;
        fid_cnt[cls]     <= fid_cnt[cls] + 1'b1;
      end
    end
  end

endmodule
