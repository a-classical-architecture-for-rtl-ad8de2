// Workload testbench: repeated syndrome-extraction rounds issued as
// parallel-gate instructions, on qcs_top at its default size.
//
// A small patch of 6 data qubits (AWG 0..5) and 2 ancillas (AWG 6, 7; read
// out by digitizer 0 channels 0 and 1) is driven the way a surface-code round
// is: H on the ancillas, four layers of two-qubit gates between each ancilla
// and its data qubits, H again, measurement of the ancillas and their reset,
// with a Wait between layers.  Each layer is ONE store: the address names a
// partition, and every device whose mask holds that partition acts on it.
// The round is 15 stores.  It is queued once and played R times by one
// repeated trigger, one round per 250 cycles (1 us at a 250 MHz clock).
//
// Checked: the 15 stores are issued well inside one round's 250 cycles; every
// DAC sample of every channel in every round; both ancillas start in the same
// cycle; every device plays R rounds and misses no trigger; no queue
// overflows; and the R measurement results of each ancilla come back
// through fmr with the right state and shot count.
// The round of 15 parallel-gate instructions and its 1 us budget come from
// the architecture's estimate for surface-code syndrome extraction; the
// qubit layout, the gate templates and the 250 MHz clock are this test's own.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_syndrome_round;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 100000)

  localparam int N_AWG = 8, N_DIG = 2, N_DEV = 10;
  localparam int R = 3;                 // rounds
  localparam int ROUND = 250;           // cycles per round
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
  longint cyc = 0, first_s [N_AWG][4], t_first_store = -1, t_last_store = -1;
  int nsamp [N_AWG][4]; logic [15:0] exp_s [N_AWG][4][$]; int bad = 0, n_stores = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (mmio_valid && !mmio_ready) n_stall++;
    if (mmio_valid && mmio_ready && mmio_we && mmio_addr != ADDR_TRIGGER && mmio_addr != ADDR_TRIGGER + 4 &&
        mmio_addr != ADDR_TRIGGER + 8) begin
      if (t_first_store < 0) t_first_store = cyc;
      t_last_store = cyc;
      n_stores++;
    end
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
  endtask
  task automatic expect_wave(int a, int c, int start, int len);
    for (int k = 0; k < len; k++) exp_s[a][c].push_back(wv(a + 1, c, start + k));
  endtask
  // mask entry word: valid, channel set, partition identifier
  function automatic logic [31:0] ment(logic [3:0] ch, logic [16:0] pid);
    return {1'b1, 3'd0, ch, 7'd0, pid};
  endfunction

  localparam logic [16:0] P_ANC = 17'd100;            // SQ offset 100: the ancillas
  // two-qubit layer l pairs ancilla 0 with data qubit l and ancilla 1 with data qubit l+2
  function automatic int n_layers(int dq);
    automatic int n = 0;
    for (int l = 0; l < 4; l++) if (l == dq || l + 2 == dq) n++;
    return n;
  endfunction

  initial begin
    mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0; mmio_size = 2'd0;
    imem_en = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0; cmd_valid = 0; cmd_data = 0;
    for (int a = 0; a < N_AWG; a++) for (int c = 0; c < 4; c++) begin nsamp[a][c] = 0; first_s[a][c] = -1; end
    adc_data = '0;
    adc_data[0][0] = 16'd100; adc_data[0][1] = 16'hFF9C;   // ancilla 0 reads 1, ancilla 1 reads 0
    rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;

    // ---- IQE driver: gate templates ----
    cmd_write(8'd0, 20'h01001, {11'd0, 5'd1, 16'd0});          // SQ gate 1: H
    cmd_write(8'd0, 20'h01102, {11'd0, 5'd1, 16'd2});          // TQ gate 2: two-qubit gate
    cmd_write(8'd0, 20'h01200, {11'd0, 5'd1, 16'd4});          // APP op 0: measure
    cmd_write(8'd0, 20'h01201, {11'd0, 5'd1, 16'd6});          // APP op 1: reset
    cmd_write(8'd0, 20'h10000, {2'(IQE_PLAY), 30'd10});  cmd_write(8'd0, 20'h10001, 0);
    cmd_write(8'd0, 20'h10004, {2'(IQE_PLAY), 30'd11});  cmd_write(8'd0, 20'h10005, 0);
    cmd_write(8'd0, 20'h10008, {2'(IQE_PLAY), 30'd200}); cmd_write(8'd0, 20'h10009, {16'd16, 16'd4});
    cmd_write(8'd0, 20'h1000C, {2'(IQE_PLAY), 30'd12});  cmd_write(8'd0, 20'h1000D, 0);

    // ---- AWGs: masks, Mapping, waveforms ----
    for (int a = 0; a < N_AWG; a++) begin
      automatic logic [7:0] s = 8'(a + 1);
      if (a < 6) begin
        automatic int e = 0;
        for (int l = 0; l < 4; l++) if (l == a || l + 2 == a) begin
          cmd_write(s, 20'(e), ment(4'b0010, 17'h04000 + 17'(l))); e++;
        end
      end else begin
        cmd_write(s, 20'h0, ment(4'b0001, P_ANC));
        for (int l = 0; l < 4; l++) cmd_write(s, 20'(1 + l), ment(4'b0010, 17'h04000 + 17'(l)));
        cmd_write(s, 20'h5, ment(4'b0100, 17'h14000));
        cmd_write(s, 20'h6, ment(4'b1000, 17'h14001));
      end
      cmd_write(s, 20'h0100A, {5'd0, 11'd4, 6'd0, 10'd0});
      cmd_write(s, 20'h0100B, {5'd0, 11'd4, 6'd0, 10'd16});
      cmd_write(s, 20'h0100C, {5'd0, 11'd4, 6'd0, 10'd32});
      cmd_write(s, 20'h010C8, {5'd0, 11'd4, 6'd0, 10'd8});
      for (int c = 0; c < 4; c++) cmd_burst(s, 20'h10000 + 20'(c * 'h1000), 40, 32'(wv(a + 1, c, 0)), 1);
    end
    // ---- digitizer 0: the two ancillas' readout ----
    cmd_write(8'd9, 20'h00000, ment(4'b0011, 17'h14000));
    for (int c = 0; c < 2; c++) begin
      cmd_burst(8'd9, 20'h02000 + 20'(c * 256), 64, {16'd0, 16'd1000}, 0);
      cmd_write(8'd9, 20'h00200 + 20'(c), {16'd0, 16'h7FFF});
      cmd_write(8'd9, 20'h00210 + 20'(c), 0);
      cmd_write(8'd9, 20'h00220 + 20'(c), 32'(100 * c));
    end
    repeat (5) @(negedge clk);
    `TB_EQ(cmd_err, '0, "no command errors")

    // ---- expected DAC streams ----
    for (int r = 0; r < R; r++) begin
      for (int a = 0; a < 6; a++) for (int n = 0; n < n_layers(a); n++) expect_wave(a, 1, 16, 4);
      for (int a = 6; a < 8; a++) begin
        expect_wave(a, 0, 0, 4); expect_wave(a, 0, 0, 4);
        for (int n = 0; n < 4; n++) expect_wave(a, 1, 16, 4);
        expect_wave(a, 2, 8, 4);
        expect_wave(a, 3, 32, 4);
      end
    end

    // ---- one round: 15 parallel-gate level stores ----
    st(ADDR_SQ + 32'(P_ANC), 1);                                   // H on the ancillas
    st(ADDR_WAIT, 8);
    for (int l = 0; l < 4; l++) begin
      st(ADDR_TQ + 32'(l), 2);                                // two-qubit layer l
      st(ADDR_WAIT, 8);
    end
    st(ADDR_SQ + 32'(P_ANC), 1);                                   // H on the ancillas
    st(ADDR_WAIT, 8);
    st(ADDR_APP + 0, 0);                                      // measure the ancillas
    st(ADDR_WAIT, 40);
    st(ADDR_APP + 1, 1);                                      // reset the ancillas
    `TB_EQ(n_stores, 15, "one round is 15 stores")
    `TB_CHECK(t_last_store - t_first_store < longint'(ROUND), "a round's stores issue within one round time")
    // ---- R rounds, one per ROUND cycles ----
    st(ADDR_TRIGGER + 8, 32'h0000_000F);
    st(ADDR_TRIGGER + 4, R);
    st(ADDR_TRIGGER, ROUND);
    repeat (R * ROUND + 100) @(negedge clk);

    // ---- results ----
    for (int r = 0; r < R; r++) begin
      automatic logic [31:0] d;
      ld(ADDR_FMR + 32'(4 * r), d);
      `TB_EQ(d, {16'(r + 1), 15'd0, 1'b1}, "ancilla 0 result")
      ld(ADDR_FMR + 32'(4 * (100 + r)), d);
      `TB_EQ(d, {16'(r + 1), 15'd0, 1'b0}, "ancilla 1 result")
    end
    for (int a = 0; a < N_AWG; a++) begin
      `TB_EQ(dev_rounds[a], 16'(R), "AWG rounds")
      for (int c = 0; c < 4; c++) `TB_EQ(exp_s[a][c].size(), 0, "every expected sample played")
    end
    `TB_EQ(dev_rounds[8], 16'(R), "digitizer rounds")
    `TB_EQ(dev_missed, '0, "no trigger missed: each round fits its time")
    `TB_EQ(dev_overflow, '0, "no queue overflow")
    `TB_EQ(dig_res_overflow, '0, "no result lost")
    `TB_EQ(first_s[6][0], first_s[7][0], "both ancillas start in the same cycle")
    `TB_EQ(nsamp[2][1], 2 * 4 * R, "data qubit 2 takes part in two layers")
    `TB_EQ(bad, 0, "all DAC samples as expected")
    `TB_EQ(drv_err_count, 16'd0, "no bad MMIO access")
    $display("tb_syndrome_round: %0d stores issued in %0d cycles (budget %0d), gate_stall=%0d, rounds=%0d",
             n_stores, t_last_store - t_first_store + 1, ROUND, n_stall, dev_rounds[6]);
    `TB_CHECK(n_stall >= 6, "gate expansion stalled the bus")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
