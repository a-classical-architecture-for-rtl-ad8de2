// Testbench of cmd_parser: single writes, bursts, writes for other slots,
// broadcast slot and an unknown opcode.  Expected writes are recorded in a
// list and compared in order with what the parser produces.
`timescale 1ns/1ps
`include "tb/tb_macros.svh"
module tb_cmd_parser;
  int checks = 0, failures = 0;
  logic clk, rst_n;
  `TB_CLOCK(clk)
  `TB_WATCHDOG(clk, 2000)
  logic        cmd_valid;
  logic [31:0] cmd_data;
  logic        reg_we, err;
  logic [19:0] reg_addr;
  logic [31:0] reg_wdata;
  cmd_parser dut (.clk, .rst_n, .slot_id(8'd5), .cmd_valid, .cmd_data, .reg_we, .reg_addr, .reg_wdata, .err);

  logic [51:0] exp_q[$];
  int nwrites = 0;
  always @(posedge clk) if (reg_we) begin
    nwrites++;
    if (exp_q.size() == 0) `TB_CHECK(0, "unexpected write")
    else begin
      logic [51:0] e;
      e = exp_q.pop_front();
      `TB_EQ({reg_addr, reg_wdata}, e, "write addr/data")
    end
  end

  task automatic word(input logic [31:0] w);
    cmd_valid = 1'b1; cmd_data = w; @(negedge clk); cmd_valid = 1'b0;
  endtask
  function automatic logic [31:0] hdr(input int op, input int slot, input int addr);
    return {4'(op), 8'(slot), 20'(addr)};
  endfunction

  initial begin
    cmd_valid = 0; cmd_data = 0; rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    word(hdr(1, 5, 'h123)); word(32'hdeadbeef); exp_q.push_back({20'h123, 32'hdeadbeef});
    word(hdr(1, 6, 'h124)); word(32'h11111111);                         // other slot
    word(hdr(1, 'hFF, 'h200)); word(32'h22222222); exp_q.push_back({20'h200, 32'h22222222});
    word(hdr(2, 5, 'h300)); word(32'd4);
    for (int i = 0; i < 4; i++) begin
      word(32'h1000 + i); exp_q.push_back({20'h300 + 20'(i), 32'h1000 + 32'(i)});
    end
    cmd_valid = 0; repeat (3) @(negedge clk);                           // gap
    word(hdr(2, 7, 'h400)); word(32'd2); word(32'h5); word(32'h6);      // burst to other slot
    `TB_EQ(err, 1'b0, "no error yet")
    word(hdr(9, 5, 'h0));                                                // unknown opcode
    word(hdr(1, 5, 'h55)); word(32'h77); exp_q.push_back({20'h55, 32'h77});
    repeat (4) @(posedge clk);
    `TB_EQ(err, 1'b1, "error flag after unknown opcode")
    `TB_EQ(nwrites, 7, "number of writes")
    `TB_EQ(exp_q.size(), 0, "all expected writes seen")
    `TB_DONE
  end
endmodule
