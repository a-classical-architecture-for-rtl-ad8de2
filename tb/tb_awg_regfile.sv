// Testbench of awg_regfile: partition-mask entries, trigger base, Mapping
// lookups, the waveform-load decode and real-time mask writes.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_awg_regfile;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 20000)
  logic reg_we; logic [19:0] reg_addr; logic [31:0] reg_wdata;
  logic [15:0] mask_valid; logic [15:0][PID_W-1:0] mask_pid; logic [15:0][3:0] mask_ch;
  logic [4:0] trig_base; logic [7:0] map_idx; logic [9:0] map_start; logic [10:0] map_len;
  logic wave_we; logic [1:0] wave_ch; logic [9:0] wave_addr; logic [15:0] wave_data;
  logic rt_we; logic [7:0] rt_entry; logic [31:0] rt_data; logic [PID_W-1:0] rt_pid;
  awg_regfile dut (.*);
  int nwave = 0;
  always @(posedge clk) if (wave_we) begin
    nwave++;
    `TB_EQ({wave_ch, wave_addr, wave_data}, {2'(nwave % 4), 10'(nwave * 7), 16'(nwave * 11)}, "waveform load")
  end
  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    reg_we = 1; reg_addr = a; reg_wdata = d; #1; @(negedge clk); reg_we = 0;
  endtask
  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; map_idx = 0; rst_n = 0;
    rt_we = 0; rt_entry = 0; rt_data = 0; rt_pid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    `TB_EQ(mask_valid, 16'h0, "mask empty after reset")
    for (int e = 0; e < 16; e++) wr(20'(e), {1'(e % 2), 3'd0, 4'(e), 7'd0, 17'(e * 1000)});
    for (int e = 0; e < 16; e++) begin
      `TB_EQ(mask_valid[e], 1'(e % 2), "mask valid")
      `TB_EQ(mask_ch[e], 4'(e), "mask channels")
      `TB_EQ(mask_pid[e], 17'(e * 1000), "mask pid")
    end
    // real-time mask writes
    rt_we = 1; rt_entry = 8'd4; rt_data = 32'h8900_0000; rt_pid = 17'd77777; #1; @(negedge clk); rt_we = 0;
    `TB_EQ({mask_valid[4], mask_ch[4], mask_pid[4]}, {1'b1, 4'h9, 17'd77777}, "real-time mask entry")
    rt_we = 1; rt_entry = 8'd20; rt_data = 32'h0; rt_pid = 17'd1; #1; @(negedge clk); rt_we = 0;
    `TB_EQ({mask_valid[4], mask_ch[4], mask_pid[4]}, {1'b1, 4'h9, 17'd77777}, "out-of-range entry ignored")
    rt_we = 1; rt_entry = 8'd2; rt_data = 32'h8F00_0000; rt_pid = 17'd5;
    reg_we = 1; reg_addr = 20'd2; reg_wdata = {1'b1, 3'd0, 4'h3, 7'd0, 17'd6}; #1; @(negedge clk); rt_we = 0; reg_we = 0;
    `TB_EQ({mask_valid[2], mask_ch[2], mask_pid[2]}, {1'b1, 4'h3, 17'd6}, "command write wins")
    rt_we = 1; rt_entry = 8'd2; rt_data = 32'h0F00_0000; rt_pid = 17'd5; #1; @(negedge clk); rt_we = 0;
    `TB_EQ(mask_valid[2], 1'b0, "real-time invalidate")
    wr(20'h00100, 32'd13);
    `TB_EQ(trig_base, 5'd13, "trigger base")
    for (int i = 0; i < 256; i += 5) wr(20'h01000 + 20'(i), {5'd0, 11'(i + 1), 6'd0, 10'(i * 2)});
    for (int i = 0; i < 256; i += 5) begin
      map_idx = 8'(i); #1;
      `TB_EQ(map_start, 10'(i * 2), "map start")
      `TB_EQ(map_len, 11'(i + 1), "map length")
    end
    for (int n = 1; n <= 20; n++) wr(20'h10000 + 20'((n % 4) * 'h1000 + ((n * 7) % 1024)), 32'(n * 11));
    `TB_EQ(nwave, 20, "waveform loads passed on")
    `TB_DONE
  end
endmodule
