// Testbench of broadcast_parser: random instructions against a random
// partition mask; acceptance and channel set are compared with a model.
// Real-time mask writes (IQE_MASK) must raise mask_set and never be accepted.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_broadcast_parser;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 10000)
  localparam int E = 8;
  iqe_instr_t iqe, out;
  logic [E-1:0] mask_valid;
  logic [E-1:0][PID_W-1:0] mask_pid;
  logic [E-1:0][3:0] mask_ch;
  logic [3:0] out_ch;
  logic mask_set;
  broadcast_parser #(.ENTRIES(E), .N_CH(4)) dut (.clk, .rst_n, .iqe, .mask_valid, .mask_pid, .mask_ch, .out, .out_ch, .mask_set);
  int accepted = 0, mask_writes = 0;
  initial begin
    rst_n = 0; iqe = '0;
    for (int e = 0; e < E; e++) begin
      mask_valid[e] = (e != 5); mask_pid[e] = PID_W'(e * 3 + 100); mask_ch[e] = 4'(1 << (e % 4));
    end
    mask_pid[6] = mask_pid[1];                 // two entries of one partition
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      logic [3:0] ch;
      iqe.valid = ($urandom % 4 != 0);
      iqe.op = ($urandom % 8 == 0) ? IQE_MASK : (($urandom % 2 != 0) ? IQE_PLAY : IQE_WAIT);
      iqe.pid = ($urandom % 10 == 0) ? PID_ALL : PID_W'(100 + ($urandom % 26));
      iqe.operand = $urandom; iqe.param = $urandom;
      ch = 0;
      for (int e = 0; e < E; e++) if (mask_valid[e] && mask_pid[e] == iqe.pid) ch |= mask_ch[e];
      if (iqe.pid == PID_ALL) ch = 4'hF;
      @(negedge clk);
      `TB_EQ(out.valid, iqe.valid && iqe.op != IQE_MASK && ch != 0, "accept")
      `TB_EQ(mask_set, iqe.valid && iqe.op == IQE_MASK, "mask_set")
      if (mask_set) begin
        mask_writes++;
        `TB_EQ(out.param, iqe.param, "mask word")
        `TB_EQ(out.pid, iqe.pid, "mask pid")
      end
      if (out.valid) begin
        accepted++;
        `TB_EQ(out_ch, ch, "channel set")
        `TB_EQ(out.operand, iqe.operand, "operand")
        `TB_EQ(out.pid, iqe.pid, "pid")
      end
    end
    `TB_CHECK(accepted > 50, "enough accepted")
    `TB_CHECK(mask_writes > 20, "enough mask writes")
    `TB_DONE
  end
endmodule
