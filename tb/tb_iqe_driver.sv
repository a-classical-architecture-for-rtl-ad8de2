// Testbench of iqe_driver: loads the REG file (partition bases, Play
// parameters, gate maps, sequence templates) through the command stream and
// runs a short quantum program as MMIO stores, like the compiled Bell-state
// example: gates on SQ and TQ, a Play, a Wait, an fmr load and a repeated
// trigger.  Checks every IQE instruction, the stall of the gate expansion,
// the trigger train (count, interval, mask, last) and the fmr load data.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_iqe_driver;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 100000)

  logic [7:0] slot_id; logic cmd_valid; logic [31:0] cmd_data;
  logic mmio_valid, mmio_we, mmio_ready, mmio_rvalid; logic [1:0] mmio_size;
  logic [31:0] mmio_addr, mmio_wdata, mmio_rdata;
  logic [FMR_AW-1:0] ram_raddr; logic [31:0] ram_rdata;
  iqe_instr_t iqe; trig_t trig; logic trig_busy; logic [15:0] err_count; logic cmd_err;
  iqe_driver dut (.*);
  `include "tb/tb_cmd.svh"

  always_ff @(posedge clk) ram_rdata <= 32'hA000_0000 | 32'(ram_raddr);

  iqe_instr_t got[$]; longint trig_t0[$]; logic trig_last[$]; logic [31:0] trig_m[$];
  longint cyc = 0; int stalls = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (iqe.valid) got.push_back(iqe);
    if (trig.valid) begin trig_t0.push_back(cyc); trig_last.push_back(trig.last); trig_m.push_back(trig.mask); end
    if (mmio_valid && !mmio_ready) stalls++;
  end

  task automatic st(input logic [31:0] a, input logic [31:0] d);
    mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d; #1;
    while (!mmio_ready) begin @(negedge clk); #1; end
    @(negedge clk); mmio_valid = 0;
  endtask

  initial begin
    slot_id = 8'd0; cmd_valid = 0; cmd_data = 0;
    mmio_valid = 0; mmio_we = 0; mmio_size = 0; mmio_addr = 0; mmio_wdata = 0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    cmd_write(8'd0, 20'h00004, 32'h0000_5A5A);                 // Play parameters
    // SQ gate 3 (e.g. H): Play 140 then Wait 4; TQ gate 1 (CNOT): 3 templates
    cmd_write(8'd0, 20'h01003, {11'd0, 5'd2, 16'd0});
    cmd_write(8'd0, 20'h01101, {11'd0, 5'd3, 16'd2});
    cmd_burst(8'd0, 20'h10000, 10, 0, 0);                      // clear entries 0..4
    cmd_write(8'd0, 20'h10000, {2'(IQE_PLAY), 30'd140}); cmd_write(8'd0, 20'h10001, 32'h11);
    cmd_write(8'd0, 20'h10002, {2'(IQE_WAIT), 30'd4});
    cmd_write(8'd0, 20'h10004, {2'(IQE_PLAY), 30'd150}); cmd_write(8'd0, 20'h10005, 32'h22);
    cmd_write(8'd0, 20'h10006, {2'(IQE_NOP), 30'd0});
    cmd_write(8'd0, 20'h10008, {2'(IQE_PLAY), 30'd151}); cmd_write(8'd0, 20'h10009, 32'h33);
    cmd_word(32'h7000_0000);                                   // bad opcode
    repeat (3) @(negedge clk);
    `TB_EQ(cmd_err, 1'b1, "bad command flagged")

    st(ADDR_SQ + 5, 3);                      // H on qubit 5
    st(ADDR_TQ + 9, 1);                      // CNOT on pair 9
    st(ADDR_PLAY + 2, 200);                  // raw Play (measurement) on channel partition 2
    st(ADDR_WAIT, 1000);
    st(ADDR_TRIGGER + 8, 32'h0000_00FF);
    st(ADDR_TRIGGER + 4, 3);
    st(ADDR_TRIGGER, 7);
    st(ADDR_TRIGGER, 5);                     // held until the first train is done
    // fmr load
    mmio_valid = 1; mmio_we = 0; mmio_addr = ADDR_FMR + 4 * 37; #1; @(negedge clk); mmio_valid = 0;
    `TB_EQ(mmio_rvalid, 1'b1, "fmr load answered")
    `TB_EQ(mmio_rdata, 32'hA000_0025, "fmr load reads result word 37")
    repeat (40) @(negedge clk);

    `TB_EQ(got.size(), 6, "six IQE instructions")
    if (got.size() == 6) begin
      `TB_EQ(got[0], iqe_instr_t'{valid: 1, op: IQE_PLAY, pid: 17'h00005, operand: 140, param: 32'h11}, "SQ template 1")
      `TB_EQ(got[1], iqe_instr_t'{valid: 1, op: IQE_WAIT, pid: 17'h00005, operand: 4, param: 0}, "SQ template 2")
      `TB_EQ(got[2], iqe_instr_t'{valid: 1, op: IQE_PLAY, pid: 17'h04009, operand: 150, param: 32'h22}, "TQ template 1")
      `TB_EQ(got[3], iqe_instr_t'{valid: 1, op: IQE_PLAY, pid: 17'h04009, operand: 151, param: 32'h33}, "TQ template 3 (NOP skipped)")
      `TB_EQ(got[4], iqe_instr_t'{valid: 1, op: IQE_PLAY, pid: 17'h0C002, operand: 200, param: 32'h5A5A}, "Play")
      `TB_EQ(got[5], iqe_instr_t'{valid: 1, op: IQE_WAIT, pid: PID_ALL, operand: 1000, param: 0}, "Wait")
    end
    `TB_CHECK(stalls >= 3, "gate expansion stalled the bus")
    `TB_EQ(trig_t0.size(), 6, "3 + 3 trigger pulses")
    if (trig_t0.size() == 6) begin
      `TB_EQ(trig_t0[1] - trig_t0[0], longint'(7), "interval 7")
      `TB_EQ(trig_t0[2] - trig_t0[1], longint'(7), "interval 7")
      `TB_EQ(trig_t0[4] - trig_t0[3], longint'(5), "interval 5")
      `TB_EQ({trig_last[0], trig_last[1], trig_last[2], trig_last[5]}, 4'b0011, "last flag on the final pulse")
      `TB_EQ(trig_m[0], 32'h0000_00FF, "trigger mask")
    end
    `TB_EQ(err_count, 16'd0, "no bad MMIO access")
    `TB_DONE
  end
endmodule
