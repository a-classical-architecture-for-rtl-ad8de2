// Testbench of instr_queue.  Random Wait/Play streams are pushed; the bench
// keeps its own list of {channels, waveform, parameter, accumulated delay}
// and compares Queue_ID / Queue_delay through both read ports.  It checks
// that Queue_gate holds instructions while `hold` is high, that the gate FIFO
// and a small (DEPTH = 8) Queue_ID overflow with the sticky flag, and that
// `clear` empties the queue.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_instr_queue;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 100000)

  iqe_instr_t in; logic [3:0] in_ch; logic hold, clear;
  logic [7:0] rd_idx, dly_idx; logic [8:0] count;
  logic [3:0] id_ch; logic [7:0] id_wave; logic [31:0] id_param, delay; logic overflow;
  instr_queue dut (.*);
  // small queue for the Queue_ID overflow
  logic [2:0] s_rd; logic [3:0] s_count; logic [3:0] s_ch; logic [7:0] s_wave;
  logic [31:0] s_param, s_delay; logic s_ovf;
  instr_queue #(.DEPTH(8)) dut_small (.clk, .rst_n, .in, .in_ch, .hold, .clear, .rd_idx(s_rd),
    .dly_idx(s_rd), .count(s_count), .id_ch(s_ch), .id_wave(s_wave), .id_param(s_param),
    .delay(s_delay), .overflow(s_ovf));

  typedef struct { logic [3:0] ch; logic [7:0] wave; logic [31:0] param, dly; } ent_t;
  ent_t model[$];
  logic [31:0] pend;
  int n_hold = 0, n_ovf = 0;

  task automatic push(input iqe_op_e op, input logic [31:0] opd, input logic [31:0] par, input logic [3:0] ch);
    in = '{valid: 1, op: op, pid: 0, operand: opd, param: par}; in_ch = ch;
    @(negedge clk); in = '0;
  endtask
  task automatic push_rand();
    if ($urandom_range(0, 2) == 0) begin
      automatic logic [31:0] t = $urandom_range(0, 1000);
      pend += t; push(IQE_WAIT, t, 0, 0);
    end else begin
      automatic ent_t e = '{ch: 4'($urandom), wave: 8'($urandom), param: $urandom, dly: pend};
      model.push_back(e); pend = 0; push(IQE_PLAY, {24'd0, e.wave}, e.param, e.ch);
    end
  endtask
  task automatic compare();
    `TB_EQ(count, 9'(model.size()), "queue count")
    foreach (model[i]) begin
      rd_idx = 8'(i); dly_idx = 8'(i); #1;
      `TB_EQ({id_ch, id_wave, id_param}, {model[i].ch, model[i].wave, model[i].param}, "Queue_ID entry")
      `TB_EQ(delay, model[i].dly, "Queue_delay entry")
    end
    @(negedge clk);
  endtask

  initial begin
    in = '0; in_ch = 0; hold = 0; clear = 0; rd_idx = 0; dly_idx = 0; pend = 0; s_rd = 0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      automatic int n = $urandom_range(5, 60);
      for (int k = 0; k < n; k++) begin
        push_rand();
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      repeat (20) @(negedge clk);
      compare();
      // hold: new instructions wait in Queue_gate
      hold = 1; pend = 0;   // a trailing Wait is dropped by the clear below
      begin
        automatic int n_before = model.size();
        automatic int nh = $urandom_range(1, 12);
        for (int k = 0; k < nh; k++) push_rand();
        repeat (5) @(negedge clk);
        `TB_EQ(count, 9'(n_before), "held instructions stay in Queue_gate")
        n_hold++;
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      // entries issued n_before the clear are gone; the held ones drain next
      begin
        ent_t keep[$];
        automatic int n_before = 0;
        hold = 0;
        repeat (20) @(negedge clk);
        // after release, entries pushed while held enter a fresh queue
        `TB_CHECK(count <= 9'(model.size()), "cleared queue refilled only by held instructions")
        // rebuild the model from the held entries: they are the last ones pushed
        keep = {};
        for (int i = model.size() - int'(count); i < model.size(); i++) keep.push_back(model[i]);
        model = keep;
      end
      compare();
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; model = {}; pend = 0;
      @(negedge clk);
      `TB_EQ(count, 9'd0, "clear empties the queue")
    end
    `TB_EQ(overflow, 1'b0, "no overflow in normal use")
    // Queue_gate overflow: 20 instructions while held (16 places)
    hold = 1;
    for (int k = 0; k < 20; k++) push(IQE_PLAY, k, k, 4'h1);
    `TB_EQ(overflow, 1'b1, "Queue_gate overflow flagged")
    hold = 0; repeat (30) @(negedge clk);
    `TB_EQ(count, 9'd16, "16 instructions kept")
    `TB_EQ(s_count, 4'd8, "small Queue_ID full")
    `TB_EQ(s_ovf, 1'b1, "Queue_ID overflow flagged")
    for (int i = 0; i < 8; i++) begin
      s_rd = 3'(i); #1;
      `TB_EQ(s_wave, 8'(i), "small queue keeps the first entries")
    end
    `TB_DONE
  end
endmodule
