// prio_queue -- the multilevel functional priority queue.
//
// A dispatch array of NUM_PRIO first-in first-out queues, one per priority
// class. Every function is placed at the end of the queue of its own
// priority: new functions from fine decoding on the 'new' port, functions
// that ran before and are runnable again (woken after I/O, or having given up
// their FPU) on the 'ret' port. Only one function is written per cycle, and
// the 'ret' port has precedence. The head of the highest non-empty level
// (level 0 is the highest) is shown on head_job; 'pop' removes it. Within a
// level, functions leave in arrival order.
//
// Timing: a pushed function can be at the head in the next cycle; pop and push
// may hit the same level in one cycle. level_cnt reports each level's
// occupancy.
//
// The per-level FIFO order and the end-of-queue placement follow the paper;
// the number of levels, their depth, level 0 being highest and the return
// precedence are this design's choices.
module prio_queue
  import fps_pkg::*;
#(
  parameter int QDEPTH = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        new_valid,
  output logic                        new_ready,
  input  job_t                        new_job,
  input  logic                        ret_valid,
  output logic                        ret_ready,
  input  job_t                        ret_job,
  output logic                        head_valid,
  output job_t                        head_job,
  input  logic                        pop,
  output logic [$clog2(QDEPTH):0]     level_cnt [NUM_PRIO]
);

  localparam int AW = $clog2(QDEPTH);

  job_t             mem   [NUM_PRIO][QDEPTH];
  logic [AW-1:0]    rd_p  [NUM_PRIO];
  logic [AW-1:0]    wr_p  [NUM_PRIO];
  logic [AW:0]      cnt   [NUM_PRIO];
  logic [NUM_PRIO-1:0] full, nonempty;
  logic [PRIO_W-1:0]   head_lvl;

  logic              wr_en;
  job_t              wr_job;
  logic [PRIO_W-1:0] wr_lvl;

  always_comb begin
    for (int l = 0; l < NUM_PRIO; l++) begin
      full[l]      = (cnt[l] == (AW+1)'(QDEPTH));
      nonempty[l]  = (cnt[l] != '0);
      level_cnt[l] = cnt[l];
    end
  end

  // highest non-empty level
  always_comb begin
    head_lvl = '0;
    for (int l = NUM_PRIO - 1; l >= 0; l--)
      if (nonempty[l]) head_lvl = PRIO_W'(l);
  end
  assign head_valid = |nonempty;
  assign head_job   = mem[head_lvl][rd_p[head_lvl]];

  // one write per cycle, returning functions first
  assign ret_ready = !full[ret_job.prio];
  assign new_ready = !ret_valid && !full[new_job.prio];
  always_comb begin
    wr_en  = 1'b0;
    wr_job = new_job;
    if (ret_valid && ret_ready) begin
      wr_en  = 1'b1;
      wr_job = ret_job;
    end else if (new_valid && new_ready) begin
      wr_en  = 1'b1;
    end
  end
  assign wr_lvl = wr_job.prio;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_lvl][wr_p[wr_lvl]] <= wr_job;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NUM_PRIO; l++) begin
        rd_p[l] <= '0;
        wr_p[l] <= '0;
        cnt[l]  <= '0;
      end
    end else begin
      for (int l = 0; l < NUM_PRIO; l++) begin
        automatic logic do_wr = wr_en && (wr_lvl == PRIO_W'(l));
        automatic logic do_rd = pop && head_valid && (head_lvl == PRIO_W'(l));
        if (do_wr) wr_p[l] <= wr_p[l] + 1'b1;
        if (do_rd) rd_p[l] <= rd_p[l] + 1'b1;
        if (do_wr && !do_rd)      cnt[l] <= cnt[l] + 1'b1;
        else if (do_rd && !do_wr) cnt[l] <= cnt[l] - 1'b1;
      end
    end
  end

  // a pop must only be requested while something is queued
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);

endmodule
