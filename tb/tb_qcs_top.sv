// End-to-end testbench of qcs_top at its default size (8 AWGs, 2 digitizers,
// fan-out 10).  The devices are configured through the command stream, then
// a CPU model runs a short Bell-state-like program as MMIO stores:
//   Wait 5; H on qubit 0 (SQ); CNOT on pair 0 (TQ); measure qubit 0 (APP);
//   trigger x3 every 80 cycles; H on qubit 1 while the rounds run;
//   trigger x2, 40 cycles apart (the first pulse lands in a
//   running round and is missed); fmr loads of the results; then 300 raw
//   Plays to one AWG to overflow its queue.  Before the overflow, an SQ
//   gate whose template is a real-time mask write puts AWG 2 into the
//   partition of qubit 9; an H on qubit 9 is dropped before it and played
//   after it.
// Each mechanism is counted and must occur: gate-expansion stall, trigger
// repetition, partition filtering, Queue_gate hold, queue overflow, trigger
// store held while the generator is busy, trigger missed during a round,
// results written to system RAM and read back by fmr.  DAC samples are
// compared with the loaded waveforms and the trigger-to-sample latency and
// the alignment of two AWGs are checked.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_qcs_top;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 100000)

  localparam int N_AWG = 8, N_DIG = 2, N_DEV = 10;
  logic mmio_valid, mmio_we, mmio_ready, mmio_rvalid; logic [1:0] mmio_size;
  logic [31:0] mmio_addr, mmio_wdata, mmio_rdata;
  logic imem_en, imem_we; logic [13:0] imem_addr; logic [31:0] imem_wdata, imem_rdata;
  logic cmd_valid; logic [31:0] cmd_data;
  logic [N_AWG-1:0][3:0][15:0] dac_data; logic [N_AWG-1:0][3:0] dac_valid;
  logic [N_DIG-1:0][3:0][15:0] adc_data;
  logic [N_DEV-1:0][15:0] dev_rounds, dev_missed; logic [N_DEV-1:0] dev_overflow;
  logic [N_DIG-1:0] dig_res_overflow; logic [N_DEV:0] cmd_err; logic trig_busy;
  logic [15:0] drv_err_count;
  qcs_top dut (.*);
  `include "tb/tb_cmd.svh"

  function automatic logic [15:0] wv(int slot, int ch, int k); return 16'(slot * 4096 + ch * 256 + k); endfunction

  // ---- monitors ----
  longint cyc = 0, t_acc_trig = -1, first_s [N_AWG][4];
  int nsamp [N_AWG][4]; logic [15:0] exp_s [N_AWG][4][$]; int bad = 0;
  int n_stall = 0, n_trig_stall = 0, n_trig_pulse = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (mmio_valid && !mmio_ready) begin
      if (mmio_addr == ADDR_TRIGGER) n_trig_stall++; else n_stall++;
    end
    if (mmio_valid && mmio_ready && mmio_we && mmio_addr == ADDR_TRIGGER && t_acc_trig < 0) t_acc_trig = cyc;
    for (int a = 0; a < N_AWG; a++) for (int c = 0; c < 4; c++) if (dac_valid[a][c]) begin
      if (nsamp[a][c] == 0) first_s[a][c] = cyc;
      nsamp[a][c]++;
      if (exp_s[a][c].size() == 0) begin bad++; $display("unexpected sample awg%0d ch%0d", a, c); end
      else if (dac_data[a][c] !== exp_s[a][c].pop_front()) begin bad++; $display("bad sample awg%0d ch%0d", a, c); end
    end
  end

  task automatic st(input logic [31:0] a, input logic [31:0] d);
    mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d; #1;
    while (!mmio_ready) begin @(negedge clk); #1; end
    @(negedge clk); mmio_valid = 0;
  endtask
  task automatic ld(input logic [31:0] a, output logic [31:0] d);
    mmio_valid = 1; mmio_we = 0; mmio_addr = a; #1;
    while (!mmio_ready) begin @(negedge clk); #1; end
    @(negedge clk); mmio_valid = 0;
    d = mmio_rdata;
    `TB_EQ(mmio_rvalid, 1'b1, "load answered one cycle after acceptance")
  endtask
  task automatic expect_wave(int a, int c, int start, int len);
    for (int k = 0; k < len; k++) exp_s[a][c].push_back(wv(a + 1, c, start + k));
  endtask

  initial begin
    mmio_valid = 0; mmio_we = 0; mmio_size = 0; mmio_addr = 0; mmio_wdata = 0;
    imem_en = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0; cmd_valid = 0; cmd_data = 0;
    for (int a = 0; a < N_AWG; a++) for (int c = 0; c < 4; c++) begin nsamp[a][c] = 0; first_s[a][c] = -1; end
    adc_data = '0;
    adc_data[0][0] = 16'd100; adc_data[0][1] = 16'hFF9C;   // qubit 0 reads 1 on ch0, 0 on ch1
    rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;

    // ---- program memory: a few words through the CPU port ----
    for (int i = 0; i < 8; i++) begin
      imem_en = 1; imem_we = 1; imem_addr = 14'(i * 1000); imem_wdata = 32'(i * 7 + 1); @(negedge clk);
    end
    imem_we = 0;
    for (int i = 0; i < 8; i++) begin
      imem_addr = 14'(i * 1000); @(negedge clk); #1;
      `TB_EQ(imem_rdata, 32'(i * 7 + 1), "instruction memory")
    end
    imem_en = 0;

    // ---- IQE driver REG file (slot 0) ----
    cmd_write(8'd0, 20'h01001, {11'd0, 5'd1, 16'd0});          // SQ gate 1 (H): entry 0
    cmd_write(8'd0, 20'h01102, {11'd0, 5'd3, 16'd2});          // TQ gate 2 (CNOT): entries 2..4
    cmd_write(8'd0, 20'h01200, {11'd0, 5'd1, 16'd8});          // APP gate 0 (measure): entry 8
    cmd_write(8'd0, 20'h10000, {2'(IQE_PLAY), 30'd10}); cmd_write(8'd0, 20'h10001, 0);
    cmd_write(8'd0, 20'h10004, {2'(IQE_PLAY), 30'd11}); cmd_write(8'd0, 20'h10005, 0);
    cmd_write(8'd0, 20'h10006, {2'(IQE_WAIT), 30'd6});  cmd_write(8'd0, 20'h10007, 0);
    cmd_write(8'd0, 20'h10008, {2'(IQE_PLAY), 30'd12}); cmd_write(8'd0, 20'h10009, 0);
    cmd_write(8'd0, 20'h10010, {2'(IQE_PLAY), 30'd200}); cmd_write(8'd0, 20'h10011, {16'd16, 16'd4});
    cmd_write(8'd0, 20'h01003, {11'd0, 5'd1, 16'd12});         // SQ gate 3: entry 12, a mask write
    cmd_write(8'd0, 20'h10018, {2'(IQE_MASK), 30'h0030_0000}); // to slot 3, entry 0
    cmd_write(8'd0, 20'h10019, {1'b1, 3'd0, 4'b0001, 24'd0});  //   valid, channel 0
    // ---- AWG 0 (slot 1), AWG 1 (slot 2), AWG 7 (slot 8) ----
    cmd_write(8'd1, 20'h00000, {1'b1, 3'd0, 4'b0001, 7'd0, 17'h00000});   // q0 single-qubit
    cmd_write(8'd1, 20'h00001, {1'b1, 3'd0, 4'b0010, 7'd0, 17'h04000});   // pair 0
    cmd_write(8'd2, 20'h00000, {1'b1, 3'd0, 4'b0001, 7'd0, 17'h00001});   // q1 single-qubit
    cmd_write(8'd2, 20'h00001, {1'b1, 3'd0, 4'b0010, 7'd0, 17'h04000});   // pair 0
    cmd_write(8'd2, 20'h00100, 32'd4);
    cmd_write(8'd8, 20'h00000, {1'b1, 3'd0, 4'b0001, 7'd0, 17'h0C005});   // raw Play channel 5
    cmd_write(8'd8, 20'h00100, 32'd28);
    for (int s = 1; s <= 8; s++) if (s == 1 || s == 2 || s == 3 || s == 8) begin
      cmd_write(8'(s), 20'h0100A, {5'd0, 11'd4, 6'd0, 10'd0});
      cmd_write(8'(s), 20'h0100B, {5'd0, 11'd4, 6'd0, 10'd16});
      cmd_write(8'(s), 20'h0100C, {5'd0, 11'd4, 6'd0, 10'd32});
      cmd_write(8'(s), 20'h01032, {5'd0, 11'd2, 6'd0, 10'd0});
      for (int c = 0; c < 2; c++) cmd_burst(8'(s), 20'h10000 + 20'(c * 'h1000), 40, 32'(wv(s, c, 0)), 1);
    end
    // ---- digitizer 0 (slot 9) ----
    cmd_write(8'd9, 20'h00000, {1'b1, 3'd0, 4'b0011, 7'd0, 17'h14000});   // measure q0
    cmd_write(8'd9, 20'h00100, 32'd8);
    for (int c = 0; c < 2; c++) begin
      cmd_burst(8'd9, 20'h02000 + 20'(c * 256), 64, {16'd0, 16'd1000}, 0);
      cmd_write(8'd9, 20'h00200 + 20'(c), {16'd0, 16'h7FFF});
      cmd_write(8'd9, 20'h00210 + 20'(c), 0);
      cmd_write(8'd9, 20'h00220 + 20'(c), 32'(100 * c));
    end
    repeat (5) @(negedge clk);
    `TB_EQ(cmd_err, '0, "no command errors")

    // ---- expected DAC streams ----
    for (int r = 0; r < 3; r++) begin
      expect_wave(0, 0, 0, 4); expect_wave(0, 1, 16, 4); expect_wave(0, 1, 32, 4);
      expect_wave(1, 1, 16, 4); expect_wave(1, 1, 32, 4);
    end
    expect_wave(1, 0, 0, 4);                                  // H on q1, held to the 4th round

    // ---- the program ----
    st(ADDR_WAIT, 5);
    st(ADDR_SQ + 0, 1);                                       // H q0
    st(ADDR_TQ + 0, 2);                                       // CNOT pair 0
    st(ADDR_APP + 0, 0);                                      // measure q0
    st(ADDR_TRIGGER + 8, 32'h0000_0FFF);
    st(ADDR_TRIGGER + 4, 3);
    st(ADDR_TRIGGER, 80);
    repeat (30) @(negedge clk);
    st(ADDR_SQ + 1, 1);                                       // H q1 during the rounds: held
    st(ADDR_TRIGGER + 4, 2);
    st(ADDR_TRIGGER, 40);                                     // waits for the first train
    repeat (300) @(negedge clk);

    // ---- results ----
    begin
      logic [31:0] d;
      for (int r = 0; r < 3; r++) begin
        ld(ADDR_FMR + 32'(4 * r), d);
        `TB_EQ(d, {16'(r + 1), 15'd0, 1'b1}, "fmr: ch0 shot reads state 1")
        ld(ADDR_FMR + 32'(4 * (100 + r)), d);
        `TB_EQ(d, {16'(r + 1), 15'd0, 1'b0}, "fmr: ch1 shot reads state 0")
      end
    end
    `TB_EQ(nsamp[0][0], 12, "AWG0 ch0: H three times")
    `TB_EQ(nsamp[0][1], 24, "AWG0 ch1: CNOT three times")
    `TB_EQ(nsamp[1][1], 24, "AWG1 ch1: CNOT three times")
    `TB_EQ(nsamp[1][0], 4, "AWG1 ch0: held H once")
    `TB_EQ(first_s[0][0] - t_acc_trig, longint'(2 + 2 + 3 + 5), "trigger store to first DAC sample")
    `TB_EQ(first_s[1][1], first_s[0][0], "AWG0 and AWG1 start in the same cycle")
    `TB_EQ(dev_rounds[0], 16'd3, "AWG0 rounds (trigger repeated)")
    `TB_EQ(dev_rounds[1], 16'd4, "AWG1 rounds")
    `TB_EQ(dev_rounds[8], 16'd3, "digitizer 0 rounds")
    `TB_EQ(dev_missed[1], 16'd1, "AWG1 missed the pulse that came during round 3")
    begin
      automatic int idle = 0;
      for (int a = 2; a < N_AWG; a++) begin
        for (int c = 0; c < 4; c++) if (nsamp[a][c] != 0) idle = -100;
        if (dev_rounds[a] == 0) idle++;
      end
      if (dev_rounds[9] == 0) idle++;
      `TB_EQ(idle, 7, "devices of other partitions stay idle (filtering)")
    end

    // ---- real-time partition-mask write to AWG 2 ----
    st(ADDR_SQ + 9, 1);                                       // H q9: no device has q9 yet
    st(ADDR_SQ + 9, 3);                                       // AWG 2 ch0 joins partition q9
    st(ADDR_SQ + 9, 1);                                       // H q9: now accepted by AWG 2
    expect_wave(2, 0, 0, 4);
    st(ADDR_TRIGGER + 8, 32'h0000_0001);
    st(ADDR_TRIGGER + 4, 1);
    st(ADDR_TRIGGER, 10);
    repeat (40) @(negedge clk);
    `TB_EQ(nsamp[2][0], 4, "AWG2 ch0: H on q9 once, after the real-time mask write")
    `TB_EQ(dev_rounds[2], 16'd1, "AWG2 round")

    // ---- queue overflow on AWG 7 ----
    for (int k = 0; k < 300; k++) st(ADDR_PLAY + 5, 50);
    repeat (20) @(negedge clk);
    `TB_EQ(dev_overflow, 10'h080, "only AWG7's queue overflowed")
    `TB_EQ(bad, 0, "all DAC samples as expected")
    `TB_EQ(drv_err_count, 16'd0, "no bad MMIO access")
    `TB_EQ(dig_res_overflow, 2'b00, "no result lost")
    for (int a = 0; a < N_AWG; a++) for (int c = 0; c < 4; c++)
      `TB_EQ(exp_s[a][c].size(), 0, "every expected sample played")
    $display("tb_qcs_top mechanisms: gate_stall=%0d trigger_repeat=%0d filtered_devices=%0d held=%0d overflow=%0d trigger_busy_stall=%0d missed=%0d fmr_results=%0d realtime_mask_plays=%0d",
             n_stall, dev_rounds[0], 7, nsamp[1][0] / 4, dev_overflow[7], n_trig_stall, dev_missed[1], 6, nsamp[2][0] / 4);
    `TB_CHECK(n_stall >= 4, "gate expansion stalled the bus")
    `TB_CHECK(n_trig_stall > 0, "trigger store held while the generator was busy")
    `TB_DONE
  end
endmodule
