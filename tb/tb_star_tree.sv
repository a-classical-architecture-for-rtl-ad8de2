// Testbench of star_tree: random words at the root must appear on every
// output after the same latency (levels + 1 cycles), for a one-level and a
// three-level tree.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_star_tree;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 2000)
  logic [15:0] din;
  logic [9:0][15:0]  d1;
  logic [29:0][15:0] d3;
  star_tree #(.W(16), .N_OUT(10), .FANOUT(10)) u1 (.clk, .rst_n, .din, .dout(d1));  // 1 level
  star_tree #(.W(16), .N_OUT(30), .FANOUT(4))  u3 (.clk, .rst_n, .din, .dout(d3));  // 3 levels

  logic [15:0] hist [0:7];
  initial begin
    din = 0; rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      for (int k = 7; k > 0; k--) hist[k] = hist[k-1];
      din = 16'($urandom); hist[0] = din;
      if (t > 6) begin
        // values visible just before the next edge: output of root = din one edge ago
        for (int j = 0; j < 10; j++) `TB_EQ(d1[j], hist[2], "1-level output")
        for (int j = 0; j < 30; j++) `TB_EQ(d3[j], hist[4], "3-level output")
      end
    end
    `TB_DONE
  end
endmodule
