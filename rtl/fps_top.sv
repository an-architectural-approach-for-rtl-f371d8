// fps_top -- front end of a functional processor system: decodes a program of
// functions and feeds them to eight heterogeneous FPUs.
//
// Dataflow, one function per cycle at best:
//   program array -> func_decoder (separates the functions, stops at END)
//   -> fine_decoder (FID, FPU class mask, sequence number, dependency hold
//      and result forwarding) -> prio_queue (one FIFO per priority level)
//   -> fps_scheduler (head to an idle FPU of its class, non-preemptive)
//   -> fp_interconnect -> FPU ports
//   FPU responses -> fp_interconnect -> fps_scheduler
//      done  -> integration_unit (reorder buffer) -> integration_memory
//      I/O   -> io_queue -> (io_complete) -> back into prio_queue
//      yield -> back into prio_queue
//
// The FPUs themselves are outside: each FPU i sees fpu_issue[i] for one cycle
// with the function on fpu_job, runs it, and answers by holding
// fpu_rsp_valid[i]/fpu_rsp[i] until fpu_rsp_ack[i]. The I/O side signals the
// end of each I/O transfer, oldest first, with a one-cycle io_complete.
//
// Use: write the program with prog_we/prog_addr/prog_word, pulse 'start', wait
// for 'done' (the end word reached and every decoded function integrated),
// then read results by sequence number on host_addr/host_data. n_funcs is the
// number of functions in the program run; 'status' shows FPU occupancy,
// stalls, holds and queue levels while it runs.
//
// The block structure follows the architecture's block diagram; the placement
// of the priority queue, scheduler and I/O queue between fine decoding and the
// bus, and all interfaces, are this design's choices.
module fps_top
  import fps_pkg::*;
#(
  parameter int PROG_DEPTH = 256,
  parameter int QDEPTH     = 16,
  parameter int IOQ_DEPTH  = 8,
  parameter int ROB_DEPTH  = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // program load and control
  input  logic                          prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  prog_word_t                    prog_word,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [SEQ_W:0]                n_funcs,
  output fps_status_t                   status,
  // result read-out
  input  logic [SEQ_W-1:0]              host_addr,
  output logic [DATA_W-1:0]             host_data,
  // I/O completion
  input  logic                          io_complete,
  // FPU ports
  output logic [NUM_FPU-1:0]            fpu_issue,
  output job_t                          fpu_job,
  input  logic [NUM_FPU-1:0]            fpu_rsp_valid,
  input  fpu_rsp_t                      fpu_rsp [NUM_FPU],
  output logic [NUM_FPU-1:0]            fpu_rsp_ack
);

  // functional decoder -> fine decoder
  logic       fd_valid, fd_ready, dec_busy, dec_done;
  func_rec_t  fd_rec;
  // fine decoder -> priority queue
  logic       fn_valid, fn_ready;
  job_t       fn_job;
  logic [SEQ_W-1:0]  fwd_addr;
  logic [DATA_W-1:0] fwd_data;
  logic [SEQ_W:0]    seq_cnt, commit_cnt;
  logic       dep_wait, window_wait;
  // priority queue <-> scheduler
  logic       head_valid, pop, ret_valid, ret_ready;
  job_t       head_job, ret_job;
  logic [$clog2(QDEPTH):0] level_cnt [NUM_PRIO];
  // scheduler <-> bus
  logic             issue_valid;
  logic [FPU_W-1:0] issue_fpu;
  job_t             issue_job;
  logic             rsp_valid, rsp_ready;
  logic [FPU_W-1:0] rsp_fpu;
  fpu_rsp_t         rsp;
  // results
  logic             rob_valid;
  logic [SEQ_W-1:0] rob_seq;
  logic [DATA_W-1:0] rob_data;
  logic             mem_we, out_of_order;
  logic [SEQ_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_data;
  // I/O queue
  logic       io_valid, io_ready, wake_valid, wake_ready;
  job_t       io_job, wake_job;
  logic [$clog2(IOQ_DEPTH):0] io_count, io_waiting;
  logic [NUM_FPU-1:0] fpu_busy;
  logic       stall;

  func_decoder #(.PROG_DEPTH(PROG_DEPTH)) u_func_decoder (
    .clk, .rst_n,
    .load_we(prog_we), .load_addr(prog_addr), .load_word(prog_word),
    .start, .busy(dec_busy), .done(dec_done),
    .out_valid(fd_valid), .out_ready(fd_ready), .out_rec(fd_rec)
  );

  fine_decoder #(.ROB_DEPTH(ROB_DEPTH)) u_fine_decoder (
    .clk, .rst_n, .start,
    .in_valid(fd_valid), .in_ready(fd_ready), .in_rec(fd_rec),
    .out_valid(fn_valid), .out_ready(fn_ready), .out_job(fn_job),
    .commit_cnt, .fwd_addr, .fwd_data, .seq_cnt, .dep_wait, .window_wait
  );

  prio_queue #(.QDEPTH(QDEPTH)) u_prio_queue (
    .clk, .rst_n,
    .new_valid(fn_valid), .new_ready(fn_ready), .new_job(fn_job),
    .ret_valid, .ret_ready, .ret_job,
    .head_valid, .head_job, .pop, .level_cnt
  );

  fps_scheduler u_scheduler (
    .clk, .rst_n,
    .head_valid, .head_job, .pop,
    .issue_valid, .issue_fpu, .issue_job,
    .rsp_valid, .rsp_fpu, .rsp, .rsp_ready,
    .rob_valid, .rob_seq, .rob_data,
    .io_valid, .io_ready, .io_job,
    .wake_valid, .wake_ready, .wake_job,
    .ret_valid, .ret_ready, .ret_job,
    .fpu_busy, .stall
  );

  fp_interconnect u_bus (
    .clk, .rst_n,
    .issue_valid, .issue_fpu, .issue_job,
    .fpu_issue, .fpu_job, .fpu_rsp_valid, .fpu_rsp, .fpu_rsp_ack,
    .rsp_valid, .rsp_fpu, .rsp, .rsp_ready
  );

  io_queue #(.DEPTH(IOQ_DEPTH)) u_io_queue (
    .clk, .rst_n,
    .in_valid(io_valid), .in_ready(io_ready), .in_job(io_job),
    .io_complete,
    .out_valid(wake_valid), .out_ready(wake_ready), .out_job(wake_job),
    .count(io_count), .waiting(io_waiting)
  );

  integration_unit #(.ROB_DEPTH(ROB_DEPTH)) u_integration_unit (
    .clk, .rst_n, .start,
    .wr_valid(rob_valid), .wr_seq(rob_seq), .wr_data(rob_data),
    .mem_we, .mem_addr, .mem_data, .commit_cnt, .out_of_order
  );

  integration_memory #(.DEPTH(2**SEQ_W)) u_integration_memory (
    .clk, .we(mem_we), .waddr(mem_addr), .wdata(mem_data),
    .fwd_addr, .fwd_data, .host_addr, .host_data
  );

  logic run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     run <= 1'b0;
    else if (start) run <= 1'b1;
    else if (done)  run <= 1'b0;
  end

  assign done    = run && dec_done && !fn_valid && (commit_cnt == seq_cnt);
  assign busy    = run && !done;
  assign n_funcs = seq_cnt;

  always_comb begin
    automatic logic [7:0] q = '0;
    for (int l = 0; l < NUM_PRIO; l++) q = q + 8'(level_cnt[l]);
    status.fpu_busy    = fpu_busy;
    status.stall       = stall;
    status.dep_wait    = dep_wait;
    status.window_wait = window_wait;
    status.dec_busy    = dec_busy;
    status.reorder     = rob_valid && out_of_order;
    status.queued      = q;
    status.io_waiting  = 8'(io_waiting);
    status.io_held     = 8'(io_count);
    status.committed   = commit_cnt;
  end

endmodule
