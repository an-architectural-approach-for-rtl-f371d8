// integration_unit -- reorder buffer that integrates function results in
// program order.
//
// FPUs finish in any order. Each result arrives with the sequence number its
// function received in fine decoding and is parked in slot seq mod ROB_DEPTH.
// Whenever the slot of the next function in program order holds a result,
// that result is written to the integration memory (mem_we/mem_addr/mem_data)
// and the slot is freed: one commit per cycle, in the cycle after the result
// arrived at the earliest. commit_cnt counts the committed functions; fine
// decoding uses it to keep at most ROB_DEPTH functions outstanding, which is
// what makes slot = seq mod ROB_DEPTH collision-free. 'start' clears the
// count for a new program.
//
// The reorder buffer is named in the architecture; its depth, slot indexing
// and commit rate are this design's choices.
module integration_unit
  import fps_pkg::*;
#(
  parameter int ROB_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               wr_valid,
  input  logic [SEQ_W-1:0]   wr_seq,
  input  logic [DATA_W-1:0]  wr_data,
  output logic               mem_we,
  output logic [SEQ_W-1:0]   mem_addr,
  output logic [DATA_W-1:0]  mem_data,
  output logic [SEQ_W:0]     commit_cnt,
  output logic               out_of_order   // a result arrived ahead of an older one
);

  localparam int AW = $clog2(ROB_DEPTH);

  logic [DATA_W-1:0]    data [ROB_DEPTH];
  logic [ROB_DEPTH-1:0] full;
  logic [AW-1:0]        head, wslot;

  assign head     = commit_cnt[AW-1:0];
  assign wslot    = wr_seq[AW-1:0];
  assign mem_we   = full[head];
  assign mem_addr = commit_cnt[SEQ_W-1:0];
  assign mem_data = data[head];
  assign out_of_order = wr_valid && (wr_seq != commit_cnt[SEQ_W-1:0]);

  always_ff @(posedge clk) begin
    if (wr_valid) data[wslot] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full       <= '0;
      commit_cnt <= '0;
    end else if (start) begin
      full       <= '0;
      commit_cnt <= '0;
    end else begin
      if (mem_we) begin
        full[head] <= 1'b0;
        commit_cnt <= commit_cnt + 1'b1;
      end
      if (wr_valid) full[wslot] <= 1'b1;
    end
  end

  // a slot is written only while it is free
  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n)
                                wr_valid |-> !full[wslot]);

endmodule
