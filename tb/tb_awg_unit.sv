// Testbench of awg_unit: configures the unit through the command stream
// (partition mask, trigger base, Mapping, waveform memories), broadcasts IQE
// instructions, and sends trigger trains.  Checks: instructions of other
// partitions are filtered; nothing plays before the trigger; every repetition
// replays the queue with the right samples and timing on the right channels;
// the queue is emptied after the last repetition; instructions that arrive
// during a round are held for the next one; a trigger during a round is
// counted as missed; Queue_ID overflow and a bad command are flagged.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_awg_unit;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 100000)

  logic [7:0] slot_id; logic cmd_valid; logic [31:0] cmd_data;
  iqe_instr_t iqe; trig_t trig;
  logic [3:0][15:0] dac_data; logic [3:0] dac_valid;
  logic overflow, cmd_err; logic [15:0] rounds, missed;
  awg_unit dut (.*);
  `include "tb/tb_cmd.svh"

  // waveform sample k of channel c is wave_val(c, k)
  function automatic logic [15:0] wave_val(int c, int k); return 16'(c * 4096 + k * 3 + 1); endfunction

  longint cyc = 0, trig_at = 0, t0 = 0;
  longint first [4]; int nsamp [4]; int bad_samp = 0;
  int exp_start [4];
  always @(posedge clk) begin
    cyc++;
    if (trig.valid) trig_at = cyc;
    for (int c = 0; c < 4; c++) if (rst_n && dac_valid[c]) begin
      if (nsamp[c] == 0) first[c] = cyc;
      if (dac_data[c] !== wave_val(c, exp_start[c] + nsamp[c])) begin bad_samp++;
        $display("t=%0t bad sample ch%0d n%0d got %0h exp %0h", $time, c, nsamp[c], dac_data[c], wave_val(c, exp_start[c] + nsamp[c])); end
      nsamp[c]++;
    end
  end
  task automatic clr_mon(); for (int c = 0; c < 4; c++) begin nsamp[c] = 0; first[c] = -1; end endtask

  task automatic bcast(input iqe_op_e op, input logic [16:0] pid, input logic [31:0] opd);
    iqe = '{valid: 1, op: op, pid: pid, operand: opd, param: 32'h1234}; @(negedge clk); iqe = '0;
  endtask
  task automatic pulse(input logic last);
    trig = '{valid: 1, last: last, mask: 32'h0000_0070}; @(negedge clk); trig = '0; t0 = trig_at;
  endtask

  initial begin
    slot_id = 8'd3; cmd_valid = 0; cmd_data = 0; iqe = '0; trig = '0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    // a mask entry for another slot must not land here
    cmd_write(8'd5, 20'h00002, {1'b1, 3'd0, 4'hF, 7'd0, 17'h0C999});
    cmd_write(8'd3, 20'h00000, {1'b1, 3'd0, 4'b0011, 7'd0, 17'h0C010});
    cmd_write(8'hFF, 20'h00001, {1'b1, 3'd0, 4'b0100, 7'd0, 17'h0C020});
    cmd_write(8'd3, 20'h00100, 32'd4);                      // channel c uses mask bit 4+c
    cmd_write(8'd3, 20'h01007, {5'd0, 11'd6, 6'd0, 10'd10}); // wave 7: samples 10..15
    cmd_write(8'd3, 20'h01009, {5'd0, 11'd4, 6'd0, 10'd200});// wave 9: samples 200..203
    for (int c = 0; c < 4; c++) cmd_burst(8'd3, 20'h10000 + 20'(c * 'h1000), 256, 32'(wave_val(c, 0)), 3);
    repeat (5) @(negedge clk);
    `TB_EQ(cmd_err, 1'b0, "no command error")

    bcast(IQE_WAIT, PID_ALL, 3);
    bcast(IQE_PLAY, 17'h0C010, 7);
    bcast(IQE_WAIT, PID_ALL, 2);
    bcast(IQE_PLAY, 17'h0C020, 9);
    bcast(IQE_PLAY, 17'h0C999, 9);              // filtered: not in this unit's mask
    repeat (30) @(negedge clk);
    clr_mon();
    `TB_EQ(dac_valid, 4'h0, "nothing plays before the trigger")
    for (int r = 0; r < 2; r++) begin
      clr_mon(); exp_start = '{10, 10, 200, 0};
      pulse(r == 1);
      begin : keep_t0
        automatic longint tr = t0;
      if (r == 0) begin
        bcast(IQE_PLAY, 17'h0C010, 9);          // arrives during the round: held
        repeat (2) @(negedge clk); pulse(0);    // missed
      end
      t0 = tr;
      end
      repeat (40) @(negedge clk);
      `TB_EQ(nsamp[0], 6, "ch0 plays wave 7") `TB_EQ(nsamp[1], 6, "ch1 plays wave 7")
      `TB_EQ(nsamp[2], 4, "ch2 plays wave 9") `TB_EQ(nsamp[3], 0, "ch3 silent (filtered Play)")
      `TB_EQ(first[0] - t0, longint'(3 + 3), "first sample: delay + 3 cycles")
      `TB_EQ(first[2] - first[0], longint'(2), "second entry: Queue_delay later")
      `TB_EQ(rounds, 16'(r + 1), "round counted")
    end
    `TB_EQ(missed, 16'd1, "trigger during a round counted as missed")
    // the queue was cleared; the held Play (wave 9 on ch0/1) is the only entry now
    clr_mon(); exp_start = '{200, 200, 0, 0};
    pulse(1); repeat (40) @(negedge clk);
    `TB_EQ(nsamp[0], 4, "held instruction played in the next round")
    `TB_EQ(nsamp[2], 0, "cleared entries not replayed")
    `TB_EQ(first[0] - t0, longint'(3), "entry with no Wait: 3 cycles")
    `TB_EQ(bad_samp, 0, "all DAC samples correct")
    `TB_EQ(overflow, 1'b0, "no overflow yet")
    for (int k = 0; k < 300; k++) bcast(IQE_PLAY, 17'h0C010, 7);
    repeat (20) @(negedge clk);
    `TB_EQ(overflow, 1'b1, "Queue_ID overflow flagged")
    cmd_word(32'hF000_0000);
    @(negedge clk);
    `TB_EQ(cmd_err, 1'b1, "bad opcode flagged")
    `TB_DONE
  end
endmodule
