// Testbench of exec_pipeline.  The REG file and the result memory are
// modelled in the bench (plain arrays).  Random MMIO traffic of every kind
// is sent; each IQE instruction that comes out is compared with a queue of
// expected instructions, stalls of a gate expansion are counted against the
// sequence length, fmr loads are checked against the memory model, and a
// trigger store is held back while trig_busy is high.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_exec_pipeline;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 200000)

  logic mmio_valid, mmio_we, mmio_ready, mmio_rvalid; logic [1:0] mmio_size;
  logic [31:0] mmio_addr, mmio_wdata, mmio_rdata;
  logic [3:0][PID_W-1:0] part_base; logic [31:0] play_param;
  logic [1:0] gm_region; logic [7:0] gm_index; logic [9:0] gm_start, seq_addr; logic [4:0] gm_len;
  seq_entry_t seq_entry;
  logic trig_busy, trig_issue; logic [31:0] trig_count, trig_interval, trig_mask;
  logic [FMR_AW-1:0] ram_raddr; logic [31:0] ram_rdata;
  iqe_instr_t iqe; logic [15:0] err_count;
  exec_pipeline dut (.*);

  // bench models of the REG file and result memory
  logic [15:0] gm [3][256];
  seq_entry_t  seqm [1024];
  logic [31:0] ram [FMR_WORDS];
  assign gm_start  = gm[gm_region][gm_index][9:0];
  assign gm_len    = gm[gm_region][gm_index][15:11];
  assign seq_entry = seqm[seq_addr];
  always_ff @(posedge clk) ram_rdata <= ram[ram_raddr];

  iqe_instr_t exp_q[$];
  int stalls = 0, n_iqe = 0, n_gate = 0, n_trig_stall = 0, n_reads = 0;
  always @(posedge clk) if (rst_n) begin
    if (mmio_valid && !mmio_ready) stalls++;
    if (iqe.valid) begin
      n_iqe++;
      if (exp_q.size() == 0) begin checks++; failures++; $display("FAIL: unexpected IQE instruction"); end
      else begin
        automatic iqe_instr_t e = exp_q.pop_front();
        `TB_EQ(iqe, e, "IQE instruction")
      end
    end
  end

  // one request; returns the number of cycles it was stalled
  task automatic req(input logic we, input logic [31:0] a, input logic [31:0] d, output int waited);
    mmio_valid = 1; mmio_we = we; mmio_addr = a; mmio_wdata = d; waited = 0;
    #1; while (!mmio_ready) begin @(negedge clk); waited++; #1; end
    @(negedge clk); mmio_valid = 0;
  endtask

  int w, exp_stall;
  initial begin
    mmio_valid = 0; mmio_we = 0; mmio_size = 0; mmio_addr = 0; mmio_wdata = 0; trig_busy = 0;
    part_base = {17'h14000, 17'h0C000, 17'h04000, 17'h00000}; play_param = 32'h00AB_0001;
    for (int r = 0; r < 3; r++) for (int g = 0; g < 256; g++)
      gm[r][g] = {5'($urandom_range(0, 6)), 1'b0, 10'($urandom_range(0, 1000))};
    for (int i = 0; i < 1024; i++) seqm[i] = '{op: iqe_op_e'($urandom_range(0, 2)), operand: 30'($urandom), param: $urandom};
    for (int i = 0; i < FMR_WORDS; i++) ram[i] = $urandom;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;

    for (int n = 0; n < 600; n++) begin
      automatic int kind = $urandom_range(0, 5);
      case (kind)
        0: begin // Wait
          automatic logic [31:0] t = $urandom;
          exp_q.push_back('{valid: 1, op: IQE_WAIT, pid: PID_ALL, operand: t, param: 0});
          req(1, ADDR_WAIT, t, w);
          `TB_EQ(w, 0, "wait store not stalled")
        end
        1: begin // Play
          automatic logic [31:0] k = $urandom_range(0, PLAY_BYTES - 1); automatic logic [7:0] b = 8'($urandom);
          exp_q.push_back('{valid: 1, op: IQE_PLAY, pid: 17'(17'h0C000 + k), operand: {24'd0, b}, param: play_param});
          req(1, ADDR_PLAY + k, {24'd0, b}, w);
        end
        2, 3: begin // gate in SQ, TQ or APP
          automatic int r = $urandom_range(0, 2);
          automatic logic [31:0] base = (r == 0) ? ADDR_SQ : (r == 1) ? ADDR_TQ : ADDR_APP;
          automatic logic [31:0] sz   = (r == 0) ? SQ_BYTES : (r == 1) ? TQ_BYTES : APP_BYTES;
          automatic logic [16:0] pb   = (r == 0) ? 17'h0 : (r == 1) ? 17'h04000 : 17'h14000;
          automatic logic [31:0] k = $urandom_range(0, sz - 1); automatic logic [7:0] g = 8'($urandom);
          automatic int len = int'(gm[r][g][15:11]); automatic int st = int'(gm[r][g][9:0]);
          for (int j = 0; j < len; j++)
            if (seqm[st + j].op != IQE_NOP)
              exp_q.push_back('{valid: 1, op: seqm[st + j].op, pid: 17'(pb + k),
                                operand: {2'b00, seqm[st + j].operand}, param: seqm[st + j].param});
          n_gate++;
          exp_stall = stalls + len;
          req(1, base + k, {24'd0, g}, w);
          // the stall shows on the next request: hold a request and count
          req(1, 32'h4FFF_0000, 0, w);     // unmapped store, counted as error
          `TB_EQ(w, len, "gate stall equals sequence length")
        end
        4: begin // fmr load
          automatic int j = $urandom_range(0, FMR_WORDS - 1);
          mmio_valid = 1; mmio_we = 0; mmio_addr = ADDR_FMR + 32'(4 * j); #1;
          @(negedge clk); mmio_valid = 0;
          `TB_EQ(mmio_rvalid, 1'b1, "fmr rvalid one cycle after accept")
          `TB_EQ(mmio_rdata, ram[j], "fmr data")
          n_reads++;
        end
        5: begin // trigger registers, issue while busy
          automatic logic [31:0] m = $urandom, c = $urandom_range(1, 20), iv = $urandom_range(1, 9);
          automatic int hold = $urandom_range(0, 4);
          req(1, ADDR_TRIGGER + 8, m, w); req(1, ADDR_TRIGGER + 4, c, w);
          trig_busy = (hold != 0);
          fork
            begin repeat (hold) @(negedge clk); trig_busy = 0; end
            req(1, ADDR_TRIGGER, iv, w);
          join
          `TB_EQ(w, hold, "trigger store waits for busy")
          if (hold != 0) n_trig_stall++;
          `TB_EQ({trig_mask, trig_count, trig_interval}, {m, c, iv}, "trigger registers")
        end
      endcase
    end
    repeat (10) @(negedge clk);
    `TB_EQ(exp_q.size(), 0, "all expected instructions issued")
    `TB_CHECK(n_gate > 50 && n_trig_stall > 10 && n_reads > 50, "every kind of request exercised")
    $display("tb_exec_pipeline: iqe=%0d gates=%0d reads=%0d trigger-stalls=%0d errors=%0d",
             n_iqe, n_gate, n_reads, n_trig_stall, err_count);
    `TB_DONE
  end
  // trig_issue must pulse exactly once per ADDR_TRIGGER store
  int issues = 0;
  always @(posedge clk) if (trig_issue) issues++;
endmodule
