// func_decoder -- the functional decoder: stores the application program and
// separates its functions from the rest of it.
//
// The program is written word by word into an internal array through the load
// port ("store in memory"). A one-cycle 'start' pulse rewinds the read pointer
// to word 0. From then on one word is examined per cycle: a W_FUNC word is
// offered on the output until the next stage takes it, W_SKIP/W_RSVD words
// (process data, global variables) are stepped over, and a W_END word or the
// end of the array finishes the run and raises 'done'. This is the loop of the
// decoder flow chart: read from memory, check for end of program, hand the
// function on, read the next one.
//
// Interface: load_we/load_addr/load_word write the program; start begins a
// run; out_valid/out_ready/out_rec is a valid-ready stream of function
// records, one per cycle at best; busy is high during a run, done from its end
// until the next start.
//
// The word layout, the skip words and the one-word-per-cycle rate are this
// design's choices; the paper gives only the flow chart.
module func_decoder
  import fps_pkg::*;
#(
  parameter int PROG_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] load_addr,
  input  prog_word_t                    load_word,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic                          out_valid,
  input  logic                          out_ready,
  output func_rec_t                     out_rec
);

  localparam int AW = $clog2(PROG_DEPTH);

  prog_word_t       prog [PROG_DEPTH];
  logic [AW-1:0]    rd_ptr;
  prog_word_t       cur;
  logic             last;

  always_ff @(posedge clk) begin
    if (load_we) prog[load_addr] <= load_word;
  end

  assign cur  = prog[rd_ptr];
  assign last = (rd_ptr == AW'(PROG_DEPTH - 1));

  assign out_valid = busy && (cur.kind == W_FUNC);
  assign out_rec   = cur.rec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else if (start) begin
      rd_ptr <= '0;
      busy   <= 1'b1;
      done   <= 1'b0;
    end else if (busy) begin
      unique case (cur.kind)
        W_END: begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        W_FUNC: begin
          if (out_ready) begin
            if (last) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              rd_ptr <= rd_ptr + 1'b1;
            end
          end
        end
        default: begin
          if (last) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            rd_ptr <= rd_ptr + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
