// Testbench of queue_sequencer.  A bench array stands in for the queue.
// For random queues and trigger trains it checks the start time of every
// entry (entry 0: Queue_delay[0]+1 cycles after the trigger, entry i:
// max(Queue_delay[i],1) after entry i-1), the channels of each start, the
// channel selection by trigger mask and trig_base, the wait for the engines
// before a round ends, the clear after the last repetition, and the count
// of triggers missed during a round.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_queue_sequencer;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 400000)

  trig_t trig; logic [4:0] trig_base; logic [8:0] q_count; logic [31:0] q_delay;
  logic [3:0] q_id_ch; logic [7:0] q_rd_idx, q_dly_idx; logic q_clear, eng_busy;
  logic start; logic [3:0] start_ch; logic active; logic [15:0] missed, rounds;
  queue_sequencer dut (.*);

  logic [31:0] dly [256]; logic [3:0] chs [256];
  assign q_delay = dly[q_dly_idx];
  assign q_id_ch = chs[q_rd_idx];

  longint cyc = 0, trig_at = 0;
  longint starts[$]; logic [3:0] start_chs[$]; int clears = 0;
  always @(posedge clk) begin
    cyc++;
    if (start) begin starts.push_back(cyc); start_chs.push_back(start_ch); end
    if (q_clear) clears++;
    if (trig.valid) trig_at = cyc;
  end

  task automatic fire(input logic [31:0] mask, input logic last, output longint at);
    trig = '{valid: 1, last: last, mask: mask}; @(negedge clk); at = trig_at; trig = '0;
  endtask

  int n_miss_exp = 0, n_rounds_exp = 0, n_filtered = 0;
  initial begin
    trig = '0; trig_base = 0; q_count = 0; eng_busy = 0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int n = $urandom_range(1, 12);
      automatic int reps = $urandom_range(1, 3);
      automatic logic [4:0] base = 5'($urandom);
      automatic logic [3:0] en = 4'($urandom_range(1, 15));
      automatic logic [31:0] mask = $urandom;
      automatic longint at;
      for (int c = 0; c < 4; c++) mask[5'(base + 5'(c))] = en[c];
      trig_base = base;
      for (int i = 0; i < n; i++) begin dly[i] = $urandom_range(0, 6); chs[i] = 4'($urandom); end
      q_count = 9'(n);
      // a trigger for other channels only is ignored
      begin
        automatic logic [31:0] other = '1;
        for (int c = 0; c < 4; c++) other[5'(base + 5'(c))] = 1'b0;
        fire(other, 1, at);
      end
      @(negedge clk);
      `TB_EQ(active, 1'b0, "trigger with no channel of this device ignored")
      n_filtered++;
      for (int r = 0; r < reps; r++) begin
        automatic longint prev;
        starts = {}; start_chs = {};
        fire(mask, r == reps - 1, at);
        // a second trigger during the round is missed
        if ($urandom_range(0, 3) == 0) begin fire(mask, 0, prev); n_miss_exp++; end
        eng_busy = 1;
        wait (starts.size() == n);
        repeat ($urandom_range(1, 8)) @(negedge clk);
        `TB_EQ(active, 1'b1, "round waits for busy engines")
        eng_busy = 0;
        repeat (3) @(negedge clk);
        n_rounds_exp++;
        `TB_EQ(rounds, 16'(n_rounds_exp), "round counted")
        prev = at;
        for (int i = 0; i < n; i++) begin
          automatic longint gap = (i == 0) ? longint'(dly[0]) + 1 : ((dly[i] == 0) ? 1 : longint'(dly[i]));
          `TB_EQ(starts[i] - prev, gap, "entry start time")
          `TB_EQ(start_chs[i], chs[i] & en, "entry channels")
          prev = starts[i];
        end
      end
      `TB_EQ(clears, t + 1, "queue cleared after the last repetition")
      `TB_EQ(active, 1'b0, "idle after the last repetition")
    end
    `TB_EQ(missed, 16'(n_miss_exp), "missed triggers counted")
    $display("tb_queue_sequencer: rounds=%0d missed=%0d filtered=%0d", rounds, missed, n_filtered);
    `TB_DONE
  end
endmodule
