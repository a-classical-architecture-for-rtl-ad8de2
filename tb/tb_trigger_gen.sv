// Testbench of trigger_gen: trigger trains of several lengths and intervals;
// checks the cycle of every pulse, its mask and last flag, busy, the count-0
// rule and that an issue while busy is ignored.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_trigger_gen;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 3000)
  logic issue, busy;
  logic [31:0] count, interval, mask;
  trig_t trig;
  trigger_gen dut (.clk, .rst_n, .issue, .count, .interval, .mask, .trig, .busy);

  int cyc = 0;
  int pulses[$];
  logic lasts[$];
  always @(posedge clk) begin
    cyc++;
    if (trig.valid) begin pulses.push_back(cyc); lasts.push_back(trig.last);
      `TB_EQ(trig.mask, mask_exp, "mask") end
  end
  logic [31:0] mask_exp;

  task automatic run(input int n, input int ival, input logic [31:0] m);
    int t0, en, iv;
    pulses.delete(); lasts.delete(); mask_exp = m;
    count = n; interval = ival; mask = m; issue = 1;
    @(negedge clk); issue = 0; t0 = cyc;       // issue sampled at edge number t0
    en = (n == 0) ? 1 : n; iv = (ival == 0) ? 1 : ival;
    repeat (en * iv + 5) @(negedge clk);
    `TB_EQ(pulses.size(), en, "number of pulses")
    for (int k = 0; k < pulses.size(); k++) begin
      `TB_EQ(pulses[k], t0 + 1 + k * iv, "pulse cycle")
      `TB_EQ(lasts[k], (k == en - 1), "last flag")
    end
    `TB_EQ(busy, 1'b0, "idle after train")
  endtask

  initial begin
    issue = 0; count = 0; interval = 0; mask = 0; rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run(1, 10, 32'h1);
    run(4, 7, 32'hA5);
    run(3, 1, 32'hFFFF0000);
    run(0, 0, 32'h3);
    // issue while busy is ignored
    pulses.delete(); mask_exp = 32'h9;
    count = 3; interval = 20; mask = 32'h9; issue = 1; @(negedge clk);
    count = 5; interval = 2; mask = 32'h9; issue = 1; @(negedge clk); issue = 0;
    `TB_EQ(busy, 1'b1, "busy during train")
    repeat (70) @(negedge clk);
    `TB_EQ(pulses.size(), 3, "second issue ignored")
    `TB_DONE
  end
endmodule
