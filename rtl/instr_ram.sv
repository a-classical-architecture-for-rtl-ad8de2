// instr_ram: the MCU's instruction RAM, the program memory of its CPU.
//
// A synchronous single-port RAM of WORDS 32-bit words: with en high, a write
// (we) stores wdata at addr, and a read returns mem[addr] on rdata one cycle
// later.  The paper only names this memory; size and port are this design's
// own.  The CPU that uses it is outside this RTL, so its port is brought out
// of the top level.
module instr_ram #(
  parameter int unsigned WORDS = 16384,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
