// tb_integration_memory -- self-checking test of the integration memory.
//
// Writes random data to random addresses and reads random addresses on both
// read ports, comparing with a reference array. Checks that a write is
// visible on both ports from the next cycle and that a non-written cycle
// leaves the contents alone.
module tb_integration_memory;
  import fps_pkg::*;

  localparam int D = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              we = 1'b0;
  logic [7:0]        waddr = '0, fwd_addr = '0, host_addr = '0;
  logic [DATA_W-1:0] wdata = '0, fwd_data, host_data;

  integration_memory #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] ref_mem [D];

  initial begin
    // fill every word once
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 8'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check reads of the previous cycle's state
      fwd_addr = 8'($urandom); host_addr = 8'($urandom);
      #1;
      checks++;
      if (fwd_data !== ref_mem[fwd_addr] || host_data !== ref_mem[host_addr]) begin
        failures++; $display("FAIL read %0d/%0d", fwd_addr, host_addr);
      end
      we = ($urandom_range(0, 1) == 0); waddr = 8'($urandom); wdata = $urandom;
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      we = 1'b0;
      fwd_addr = waddr; host_addr = waddr;
      #1;
      checks++;
      if (fwd_data !== ref_mem[waddr] || host_data !== ref_mem[waddr]) begin
        failures++; $display("FAIL write-then-read %0d", waddr);
      end
    end
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
