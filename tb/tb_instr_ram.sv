// Testbench of instr_ram: fills part of the memory, reads it back with the
// one-cycle latency, and checks that en low neither writes nor reads.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_instr_ram;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 20000)
  logic en, we;
  logic [13:0] addr;
  logic [31:0] wdata, rdata;
  instr_ram dut (.clk, .en, .we, .addr, .wdata, .rdata);
  function automatic logic [31:0] pat(int a); return 32'(a) * 32'h9e3779b1 ^ 32'h1234; endfunction
  initial begin
    rst_n = 0; en = 0; we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < 16384; a += 37) begin
      en = 1; we = 1; addr = 14'(a); wdata = pat(a); @(negedge clk);
    end
    en = 0; we = 1; addr = 0; wdata = 32'hffff_ffff; @(negedge clk);   // disabled write
    we = 0;
    for (int a = 0; a < 16384; a += 37) begin
      en = 1; addr = 14'(a); @(negedge clk);
      `TB_EQ(rdata, pat(a), "read back")
    end
    en = 0; addr = 14'd37; @(negedge clk);
    `TB_EQ(rdata, pat(16383 / 37 * 37), "output held while disabled")
    `TB_DONE
  end
endmodule
