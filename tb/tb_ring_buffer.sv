// Testbench of ring_buffer: streams a known ramp through the buffer and reads
// back samples up to DEPTH-1 old; checks wr_ptr counting and wrap-around.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_ring_buffer;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 10000)
  logic [15:0] adc_data, rdata;
  logic [31:0] wr_ptr;
  logic [5:0] raddr;
  ring_buffer #(.DEPTH(64), .W(16)) dut (.clk, .rst_n, .adc_data, .wr_ptr, .raddr, .rdata);
  function automatic logic [15:0] smp(int n); return 16'(n * 7 + 3); endfunction
  initial begin
    rst_n = 0; raddr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    `TB_EQ(wr_ptr, 32'd0, "reset pointer")
    for (int n = 0; n < 300; n++) begin
      int back, want;
      adc_data = smp(n);
      back = int'($urandom % 63);                      // read a sample 1..63 old
      want = int'(wr_ptr) - 1 - back;
      raddr = 6'(want);
      @(negedge clk);
      `TB_EQ(wr_ptr, 32'(n + 1), "write pointer counts samples")
      if (want >= 0) `TB_EQ(rdata, smp(want), "sample read back")
    end
    `TB_DONE
  end
endmodule
