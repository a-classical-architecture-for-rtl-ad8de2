// system_ram: the measurement-result region of the MCU's system RAM (the
// region the fmr instruction loads from, 0x1400 32-bit words).
//
// Port B takes result writes from the digitizers (one per cycle); port A is
// the CPU-side read used by the instruction decoder for fmr, with a one-cycle
// synchronous read.  A read and a write of the same word in one cycle return
// the old value.  Contents are cleared by nothing; software writes a marker or
// compares the per-channel count in the result word.
// Its size follows the paper's MMIO layout; the port arrangement is this
// design's own.
module system_ram
  import qarch_pkg::*;
#(
  parameter int unsigned WORDS = FMR_WORDS
) (
  input  logic              clk,
  input  logic [FMR_AW-1:0] raddr,
  output logic [31:0]       rdata,
  input  logic              we,
  input  logic [FMR_AW-1:0] waddr,
  input  logic [31:0]       wdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < WORDS) mem[waddr] <= wdata;
    rdata <= (int'(raddr) < WORDS) ? mem[raddr] : 32'd0;
  end
endmodule
