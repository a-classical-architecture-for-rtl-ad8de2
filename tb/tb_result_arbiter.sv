// Testbench of result_arbiter: three sources with random traffic; every
// result must come out exactly once, and with all sources busy the grants
// must rotate.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_result_arbiter;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 5000)
  localparam int N = 3;
  logic [N-1:0] in_valid, in_ready;
  logic [N-1:0][FMR_AW-1:0] in_addr;
  logic [N-1:0][31:0] in_data;
  logic out_valid;
  logic [FMR_AW-1:0] out_addr;
  logic [31:0] out_data;
  result_arbiter #(.N(N)) dut (.*);

  int sent[N], got = 0, seq[N];
  int expect_sum = 0, got_sum = 0;
  logic [N-1:0] grant_hist [$];
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      got++; got_sum += int'(out_data[15:0]);
      `TB_EQ(out_addr, FMR_AW'(out_data[31:16]), "address travels with its data")
    end
    if (in_valid != 0) grant_hist.push_back(in_ready);
  end

  initial begin
    in_valid = 0; in_addr = 0; in_data = 0; rst_n = 0;
    for (int s = 0; s < N; s++) begin sent[s] = 0; seq[s] = 0; end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    // phase 1: all busy for 30 cycles, check rotation
    for (int s = 0; s < N; s++) begin
      in_valid[s] = 1; in_data[s] = {16'(s * 100), 16'(s + 1)}; in_addr[s] = FMR_AW'(s * 100);
    end
    for (int t = 0; t < 30; t++) begin
      @(posedge clk); #1;
      @(negedge clk);
      for (int s = 0; s < N; s++) if (grant_hist[$][s]) begin expect_sum += s + 1; sent[s]++; end
    end
    in_valid = 0;
    for (int k = 1; k < grant_hist.size(); k++)
      `TB_CHECK(grant_hist[k] != grant_hist[k-1], "grant rotates under full load")
    for (int s = 0; s < N; s++) `TB_EQ(sent[s], 10, "fair share")
    // phase 2: random traffic
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int s = 0; s < N; s++) begin
        if (in_valid[s] && grant_hist[$][s]) in_valid[s] = 0;
        if (!in_valid[s] && ($urandom % 3 == 0)) begin
          automatic int v = int'($urandom % 1000);
          in_valid[s] = 1; in_data[s] = {16'(v), 16'(v)}; in_addr[s] = FMR_AW'(v); expect_sum += v;
        end
      end
    end
    // drain
    while (in_valid != 0) begin
      @(negedge clk);
      for (int s = 0; s < N; s++) if (in_valid[s] && grant_hist[$][s]) in_valid[s] = 0;
    end
    repeat (3) @(negedge clk);
    `TB_EQ(got_sum, expect_sum, "every result delivered once")
    `TB_DONE
  end
endmodule
