// Command-stream helpers shared by the unit testbenches.  Included inside a
// testbench module that declares clk, cmd_valid and cmd_data.  Words are
// driven after the falling edge, one per cycle.
task automatic cmd_word(input logic [31:0] w);
  cmd_valid = 1'b1; cmd_data = w; @(negedge clk); cmd_valid = 1'b0; cmd_data = '0;
endtask
// single register write: opcode 1
task automatic cmd_write(input logic [7:0] slot, input logic [19:0] addr, input logic [31:0] data);
  cmd_word({4'h1, slot, addr}); cmd_word(data);
endtask
// burst write of n words from a generator: word k = base_val + k * step
task automatic cmd_burst(input logic [7:0] slot, input logic [19:0] addr, input int n,
                         input logic [31:0] base_val, input logic [31:0] step);
  cmd_word({4'h2, slot, addr}); cmd_word(32'(n));
  for (int k = 0; k < n; k++) cmd_word(base_val + 32'(k) * step);
endtask
