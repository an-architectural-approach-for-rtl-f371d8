// integration_memory -- storage for the integrated results of a program.
//
// One word per function, addressed by the function's program-order sequence
// number. The integration unit writes results in program order; a
// combinational read port serves fine decoding, which forwards a producer's
// result to the function that depends on it, and a second one serves the host
// reading the program's outputs. A write becomes visible to both read ports in
// the next cycle.
//
// Size and ports are this design's choices; the architecture says only that
// the integrated output is kept in memory for further use.
module integration_memory
  import fps_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [DATA_W-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0]  fwd_addr,
  output logic [DATA_W-1:0]         fwd_data,
  input  logic [$clog2(DEPTH)-1:0]  host_addr,
  output logic [DATA_W-1:0]         host_data
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign fwd_data  = mem[fwd_addr];
  assign host_data = mem[host_addr];

endmodule
