// Testbench of data_process, with four real ring_buffer instances fed by
// random ADC samples.  For every measurement it computes in software
// I = sum x*cos, Q = sum x*sin over the window, state = ((wI*I + wQ*Q)>>>16)
// > thr, and the result address res_base + n, and compares each result word
// leaving the port (ready is toggled at random).  Plays below 128 must give
// no result; a result blocked behind a full slot must set res_overflow.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_data_process;
  import qarch_pkg::*;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 400000)

  logic start; logic [3:0] start_ch; logic [7:0] id_wave; logic [31:0] id_param; logic busy;
  logic [3:0][31:0] rb_wr_ptr; logic [3:0][9:0] rb_raddr; logic [3:0][15:0] rb_rdata;
  logic [3:0][5:0] lut_idx; logic [3:0][15:0] lut_cos, lut_sin, w_i, w_q;
  logic [3:0][31:0] thr; logic [3:0][FMR_AW-1:0] res_base; logic [3:0] res_base_wr;
  logic res_valid, res_ready, res_overflow; logic [FMR_AW-1:0] res_addr; logic [31:0] res_data;
  data_process dut (.*);

  logic [3:0][15:0] adc;
  for (genvar c = 0; c < 4; c++) begin : g_rb
    ring_buffer rb (.clk, .rst_n, .adc_data(adc[c]), .wr_ptr(rb_wr_ptr[c]),
                    .raddr(rb_raddr[c]), .rdata(rb_rdata[c]));
  end
  logic [15:0] hist [4][65536];
  logic [15:0] cosm [4][64], sinm [4][64];
  always_comb for (int c = 0; c < 4; c++) begin
    lut_cos[c] = cosm[c][lut_idx[c]]; lut_sin[c] = sinm[c][lut_idx[c]];
  end
  always @(posedge clk) for (int c = 0; c < 4; c++) begin
    hist[c][rb_wr_ptr[c][15:0]] = adc[c];
  end
  always @(negedge clk) for (int c = 0; c < 4; c++) adc[c] = 16'($urandom);

  // expected results per channel
  typedef struct { longint w; int off, len; } meas_t;
  meas_t pend_m [4][$];
  int shots [4], counts [4], n_res = 0, n_state1 = 0;
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    automatic int c = -1;
    for (int k = 0; k < 4; k++) if (c < 0 && pend_m[k].size() != 0 && res_addr == FMR_AW'(res_base[k] + shots[k])
                                     && res_data[31:16] == 16'(counts[k] + 1)) c = k;
    if (c < 0) begin checks++; failures++; $display("FAIL: unexpected result %0h @%0h", res_data, res_addr); end
    else begin
      automatic meas_t m = pend_m[c].pop_front();
      automatic longint si = 0, sq = 0, proj;
      for (int j = 0; j < m.len; j++) begin
        automatic longint x = longint'($signed(hist[c][16'(longint'(m.w) + longint'(m.off) + longint'(j))]));
        si += x * longint'($signed(cosm[c][j % 64]));
        sq += x * longint'($signed(sinm[c][j % 64]));
      end
      proj = (si * longint'($signed(w_i[c])) + sq * longint'($signed(w_q[c]))) >>> 16;
      `TB_EQ(res_data, {16'(counts[c] + 1), 15'd0, proj > longint'($signed(thr[c]))}, "result word")
      shots[c]++; counts[c]++; n_res++;
      if (res_data[0]) n_state1++;
    end
  end

  task automatic measure(input logic [3:0] ch, input logic [7:0] wave, input int off, input int len);
    start = 1; start_ch = ch; id_wave = wave; id_param = {16'(len), 16'(off)};
    #1;
    if (wave >= 128) for (int c = 0; c < 4; c++) if (ch[c] && len != 0)
      pend_m[c].push_back('{w: longint'(rb_wr_ptr[c]), off: off, len: len});
    @(negedge clk); start = 0;
  endtask

  initial begin
    start = 0; start_ch = 0; id_wave = 0; id_param = 0; res_ready = 1; res_base_wr = 0;
    for (int c = 0; c < 4; c++) begin
      for (int k = 0; k < 64; k++) begin cosm[c][k] = 16'($urandom); sinm[c][k] = 16'($urandom); end
      w_i[c] = 16'($urandom); w_q[c] = 16'($urandom); thr[c] = $urandom_range(0, 1 << 20) - (1 << 19);
      res_base[c] = FMR_AW'(c * 1000 + 17); shots[c] = 0; counts[c] = 0;
    end
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    res_base_wr = 4'hF; @(negedge clk); res_base_wr = 0;
    fork
      forever begin @(negedge clk); res_ready = ($urandom_range(0, 3) != 0); end
    join_none
    for (int n = 0; n < 200; n++) begin
      automatic logic [3:0] ch = 4'($urandom_range(1, 15));
      automatic logic [7:0] wave = ($urandom_range(0, 4) == 0) ? 8'($urandom_range(0, 127)) : 8'($urandom_range(128, 255));
      automatic int len = $urandom_range(1, 150), off = $urandom_range(0, 200);
      measure(ch, wave, off, len);
      wait (!busy); repeat ($urandom_range(4, 10)) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    for (int c = 0; c < 4; c++) `TB_EQ(pend_m[c].size(), 0, "every measurement gave a result")
    `TB_EQ(res_overflow, 1'b0, "no overflow while results drain")
    `TB_CHECK(n_state1 > 20 && n_res - n_state1 > 20, "both discriminated states seen")
    // overflow: ready low, two measurements on one channel
    disable fork; res_ready = 0;
    measure(4'h1, 8'd200, 0, 5); repeat (20) @(negedge clk);
    measure(4'h1, 8'd200, 0, 5); repeat (20) @(negedge clk);
    `TB_EQ(res_overflow, 1'b1, "result lost behind a full slot sets overflow")
    $display("tb_data_process: results=%0d state1=%0d", n_res, n_state1);
    `TB_DONE
  end
endmodule
