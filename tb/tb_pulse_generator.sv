// Testbench of pulse_generator.  Random waveforms are loaded into every
// channel's memory, then random {start, length} ranges are played on random
// channel sets.  A bench model predicts each channel's DAC stream (first
// sample one cycle after start, restart switches waveform) and every cycle
// of dac_data / dac_valid is compared with it.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_pulse_generator;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 200000)

  logic wave_we; logic [1:0] wave_ch; logic [9:0] wave_addr; logic [15:0] wave_data;
  logic start; logic [3:0] start_ch; logic [9:0] map_start; logic [10:0] map_len; logic busy;
  logic [3:0][15:0] dac_data; logic [3:0] dac_valid;
  pulse_generator dut (.*);

  logic [15:0] mem [4][1024];
  // bench model: per channel pointer and samples left
  int ptr [4], left [4];
  logic [3:0][15:0] exp_data; logic [3:0] exp_valid;
  int samples = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) begin
      `TB_EQ(dac_valid[c], exp_valid[c], "dac_valid")
      `TB_EQ(dac_data[c], exp_data[c], "dac_data")
      if (dac_valid[c]) samples++;
    end
    for (int c = 0; c < 4; c++) begin
      exp_valid[c] = left[c] > 0;
      exp_data[c]  = (left[c] > 0) ? mem[c][ptr[c] % 1024] : 16'd0;
      if (start && start_ch[c]) begin ptr[c] = int'(map_start); left[c] = int'(map_len); end
      else if (left[c] > 0) begin ptr[c]++; left[c]--; end
    end
  end

  initial begin
    wave_we = 0; wave_ch = 0; wave_addr = 0; wave_data = 0; start = 0; start_ch = 0;
    map_start = 0; map_len = 0; exp_data = 0; exp_valid = 0;
    for (int c = 0; c < 4; c++) begin ptr[c] = 0; left[c] = 0; end
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < 1024; a++) begin
        mem[c][a] = 16'($urandom);
        wave_we = 1; wave_ch = 2'(c); wave_addr = 10'(a); wave_data = mem[c][a];
        @(negedge clk);
      end
    wave_we = 0;
    for (int n = 0; n < 300; n++) begin
      start = 1; start_ch = 4'($urandom_range(1, 15));
      map_start = 10'($urandom); map_len = 11'($urandom_range(1, 40));
      @(negedge clk); start = 0;
      repeat ($urandom_range(0, 45)) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    `TB_EQ(busy, 1'b0, "idle at the end")
    `TB_CHECK(samples > 10000, "many samples compared")
    `TB_DONE
  end
endmodule
