// Testbench of digitizer_unit: configures the unit through the command stream
// (partition mask, trigger base, demodulation tables, weights, thresholds,
// result bases), feeds each ADC channel a constant level, broadcasts
// measurement Plays and sends a three-pulse trigger train.  Checks the
// result words (address res_base + shot, count, discriminated state) of
// every channel and repetition, that a Play below 128 and a Play of another
// partition give no result, and that the queue is empty after the last
// repetition.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_digitizer_unit;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 100000)

  logic [7:0] slot_id; logic cmd_valid; logic [31:0] cmd_data;
  iqe_instr_t iqe; trig_t trig; logic [3:0][15:0] adc_data;
  logic res_valid, res_ready, overflow, res_overflow, cmd_err;
  logic [FMR_AW-1:0] res_addr; logic [31:0] res_data; logic [15:0] rounds, missed;
  digitizer_unit dut (.*);
  `include "tb/tb_cmd.svh"

  typedef struct { logic [FMR_AW-1:0] a; logic [31:0] d; } res_t;
  res_t got[$];
  always @(posedge clk) if (rst_n && res_valid && res_ready) got.push_back('{res_addr, res_data});

  task automatic bcast(input iqe_op_e op, input logic [16:0] pid, input logic [31:0] opd, input logic [31:0] par);
    iqe = '{valid: 1, op: op, pid: pid, operand: opd, param: par}; @(negedge clk); iqe = '0;
  endtask
  task automatic pulse(input logic last);
    trig = '{valid: 1, last: last, mask: 32'h0000_0F00}; @(negedge clk); trig = '0;
  endtask

  initial begin
    slot_id = 8'd9; cmd_valid = 0; cmd_data = 0; iqe = '0; trig = '0; res_ready = 1;
    adc_data = {16'hFFF9, 16'd50, 16'hFF9C, 16'd100};     // ch3 -7, ch2 50, ch1 -100, ch0 100
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    cmd_write(8'd9, 20'h00000, {1'b1, 3'd0, 4'b0011, 7'd0, 17'h14005});
    cmd_write(8'd9, 20'h00001, {1'b1, 3'd0, 4'b0100, 7'd0, 17'h14006});
    cmd_write(8'd9, 20'h00100, 32'd8);                     // channel c uses mask bit 8+c
    for (int c = 0; c < 4; c++) begin
      cmd_burst(8'd9, 20'h02000 + 20'(c * 256), 64, {16'd0, 16'd1000}, 0);  // cos 1000, sin 0
      cmd_write(8'd9, 20'h00200 + 20'(c), {16'd0, 16'h7FFF});              // wI = 0.5, wQ = 0
      cmd_write(8'd9, 20'h00210 + 20'(c), 32'd0);                          // threshold 0
      cmd_write(8'd9, 20'h00220 + 20'(c), 32'(100 * (c + 1)));             // result base
    end
    repeat (5) @(negedge clk);
    bcast(IQE_WAIT, PID_ALL, 2, 0);
    bcast(IQE_PLAY, 17'h14005, 200, {16'd20, 16'd5});     // measure ch0, ch1
    bcast(IQE_PLAY, 17'h14006, 130, {16'd8, 16'd0});      // measure ch2
    bcast(IQE_PLAY, 17'h14005, 5, {16'd8, 16'd0});        // not a measurement
    bcast(IQE_PLAY, 17'h14007, 200, {16'd8, 16'd0});      // other partition
    repeat (20) @(negedge clk);
    `TB_EQ(got.size(), 0, "nothing measured before the trigger")
    for (int r = 0; r < 3; r++) begin
      pulse(r == 2);
      repeat (100) @(negedge clk);
      `TB_EQ(rounds, 16'(r + 1), "round counted")
    end
    pulse(1); repeat (100) @(negedge clk);
    `TB_EQ(got.size(), 9, "three results per round, three rounds")
    for (int i = 0; i < got.size(); i++) begin
      automatic int r = i / 3;
      automatic int c;
      c = (got[i].a >= 300) ? 2 : (got[i].a >= 200) ? 1 : 0;
      `TB_EQ(got[i].a, FMR_AW'(100 * (c + 1) + r), "result address")
      `TB_EQ(got[i].d, {16'(r + 1), 15'd0, (c != 1)}, "result word")
    end
    `TB_EQ({overflow, res_overflow, cmd_err}, 3'b000, "no error flags")
    `TB_EQ(missed, 16'd0, "no missed trigger")
    `TB_DONE
  end
endmodule
