// Testbench of dig_regfile: mask, trigger base, discriminator registers,
// result base with its write pulse, the per-channel demodulation tables and
// real-time mask writes.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_dig_regfile;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 20000)
  logic reg_we; logic [19:0] reg_addr; logic [31:0] reg_wdata;
  logic [15:0] mask_valid; logic [15:0][PID_W-1:0] mask_pid; logic [15:0][3:0] mask_ch;
  logic [4:0] trig_base;
  logic [3:0][15:0] w_i, w_q, lut_cos, lut_sin; logic [3:0][31:0] thr;
  logic [3:0][FMR_AW-1:0] res_base; logic [3:0] res_base_wr; logic [3:0][5:0] lut_idx;
  logic rt_we; logic [7:0] rt_entry; logic [31:0] rt_data; logic [PID_W-1:0] rt_pid;
  dig_regfile dut (.*);
  int pulses = 0;
  always @(posedge clk) if (res_base_wr != 0) pulses++;
  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    reg_we = 1; reg_addr = a; reg_wdata = d; @(negedge clk); reg_we = 0;
  endtask
  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; lut_idx = 0; rst_n = 0;
    rt_we = 0; rt_entry = 0; rt_data = 0; rt_pid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    wr(20'h3, {1'b1, 3'd0, 4'hA, 7'd0, 17'h1ABCD});
    `TB_EQ({mask_valid[3], mask_ch[3], mask_pid[3]}, {1'b1, 4'hA, 17'h1ABCD}, "mask entry")
    // real-time mask writes
    rt_we = 1; rt_entry = 8'd9; rt_data = 32'h8500_0000; rt_pid = 17'd4242; @(negedge clk); rt_we = 0;
    `TB_EQ({mask_valid[9], mask_ch[9], mask_pid[9]}, {1'b1, 4'h5, 17'd4242}, "real-time mask entry")
    rt_we = 1; rt_entry = 8'd3; rt_data = 32'h8F00_0000; rt_pid = 17'd1;
    reg_we = 1; reg_addr = 20'h3; reg_wdata = {1'b1, 3'd0, 4'h6, 7'd0, 17'h00123}; @(negedge clk); rt_we = 0; reg_we = 0;
    `TB_EQ({mask_valid[3], mask_ch[3], mask_pid[3]}, {1'b1, 4'h6, 17'h00123}, "command write wins")
    rt_we = 1; rt_entry = 8'd25; rt_data = 32'h0; rt_pid = 17'd1; @(negedge clk); rt_we = 0;
    `TB_EQ({mask_valid[9], mask_ch[9], mask_pid[9]}, {1'b1, 4'h5, 17'd4242}, "out-of-range entry ignored")
    wr(20'h00100, 32'd7);
    `TB_EQ(trig_base, 5'd7, "trig base")
    for (int c = 0; c < 4; c++) begin
      wr(20'h00200 + 20'(c), {16'(c * 3 + 1), 16'(c * 5 + 2)});
      wr(20'h00210 + 20'(c), 32'(-c * 1000));
      wr(20'h00220 + 20'(c), 32'(c * 64 + 9));
    end
    @(negedge clk);
    `TB_EQ(pulses, 4, "result-base write pulses")
    for (int c = 0; c < 4; c++) begin
      `TB_EQ(w_i[c], 16'(c * 5 + 2), "wI")
      `TB_EQ(w_q[c], 16'(c * 3 + 1), "wQ")
      `TB_EQ(thr[c], 32'(-c * 1000), "threshold")
      `TB_EQ(res_base[c], FMR_AW'(c * 64 + 9), "result base")
    end
    for (int c = 0; c < 4; c++)
      for (int k = 0; k < 64; k++) wr(20'h02000 + 20'(c * 256 + k), {16'(c * 100 + k), 16'(k * 3 - c)});
    for (int k = 0; k < 64; k++) begin
      for (int c = 0; c < 4; c++) lut_idx[c] = 6'((k + c) % 64);
      #1;
      for (int c = 0; c < 4; c++) begin
        `TB_EQ(lut_sin[c], 16'(c * 100 + (k + c) % 64), "sin table")
        `TB_EQ(lut_cos[c], 16'(((k + c) % 64) * 3 - c), "cos table")
      end
    end
    `TB_DONE
  end
endmodule
