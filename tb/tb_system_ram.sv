// Testbench of system_ram: writes random words to random addresses of the
// full 0x1400-word region, reads them back against a model, and checks that
// a read returns data one cycle later and that out-of-range addresses are
// harmless.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_system_ram;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 20000)
  logic [FMR_AW-1:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic we;
  system_ram dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);
  logic [31:0] model [int];
  initial begin
    rst_n = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      waddr = FMR_AW'($urandom % FMR_WORDS); wdata = $urandom; we = 1;
      model[int'(waddr)] = wdata; @(negedge clk);
    end
    waddr = FMR_AW'(FMR_WORDS + 3); wdata = 32'hbad; @(negedge clk);   // out of range: dropped
    we = 0;
    waddr = FMR_AW'(FMR_WORDS - 1); wdata = 32'h600d; we = 1; @(negedge clk); we = 0;
    model[FMR_WORDS - 1] = 32'h600d;
    foreach (model[a]) begin
      raddr = FMR_AW'(a); @(negedge clk);
      `TB_EQ(rdata, model[a], "read back")
    end
    raddr = FMR_AW'(FMR_WORDS + 3); @(negedge clk);
    `TB_EQ(rdata, 32'd0, "out-of-range read returns 0")
    `TB_DONE
  end
endmodule
