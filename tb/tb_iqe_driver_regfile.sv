// Testbench of iqe_driver_regfile: reset values of the partition bases,
// register writes, gate-map rows kept apart, and the sequence table.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_iqe_driver_regfile;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 20000)
  logic reg_we; logic [19:0] reg_addr; logic [31:0] reg_wdata;
  logic [3:0][PID_W-1:0] part_base; logic [31:0] play_param;
  logic [1:0] gm_region; logic [7:0] gm_index; logic [9:0] gm_start, seq_addr; logic [4:0] gm_len;
  seq_entry_t seq_entry;
  iqe_driver_regfile dut (.*);
  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    reg_we = 1; reg_addr = a; reg_wdata = d; @(negedge clk); reg_we = 0;
  endtask
  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; gm_region = 0; gm_index = 0; seq_addr = 0; rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    `TB_EQ(part_base[0], 17'h0, "SQ base")
    `TB_EQ(part_base[1], 17'h4000, "TQ base")
    `TB_EQ(part_base[2], 17'hC000, "PLAY base")
    `TB_EQ(part_base[3], 17'h14000, "APP base")
    wr(20'h00002, 32'h1_2345); wr(20'h00004, 32'hCAFE_0001);
    `TB_EQ(part_base[2], 17'h1_2345, "base write")
    `TB_EQ(play_param, 32'hCAFE_0001, "play param")
    for (int r = 0; r < 3; r++)
      for (int g = 0; g < 256; g += 17) wr(20'h01000 + 20'(r * 256 + g), {11'd0, 5'(g + r), 16'(g * 3 + r)});
    for (int r = 0; r < 3; r++)
      for (int g = 0; g < 256; g += 17) begin
        gm_region = 2'(r); gm_index = 8'(g); #1;
        `TB_EQ(gm_len, 5'(g + r), "gate-map length")
        `TB_EQ(gm_start, 10'(g * 3 + r), "gate-map start")
      end
    @(negedge clk);
    for (int i = 0; i < 1024; i += 13) begin
      wr(20'h10000 + 20'(2 * i), {2'(i % 3), 30'(i * 5)});
      wr(20'h10001 + 20'(2 * i), 32'(i) ^ 32'h5555_0000);
    end
    for (int i = 0; i < 1024; i += 13) begin
      seq_addr = 10'(i); #1;
      `TB_EQ(seq_entry.op, iqe_op_e'(i % 3), "sequence op")
      `TB_EQ(seq_entry.operand, 30'(i * 5), "sequence operand")
      `TB_EQ(seq_entry.param, 32'(i) ^ 32'h5555_0000, "sequence param")
    end
    `TB_DONE
  end
endmodule
