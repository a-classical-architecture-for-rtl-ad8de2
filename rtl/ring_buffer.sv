// ring_buffer: the circular data buffer of one digitizer channel.
//
// The ADC delivers one sample per clock; the buffer writes it at
// wr_ptr mod DEPTH and advances wr_ptr, a free-running count of samples
// written (its low bits address the memory).  The data processor reads any
// of the last DEPTH samples through a synchronous read port (rdata one cycle
// after raddr), so a sampling window may begin before its samples have been
// processed and the processing may lag the ADC.  wr_ptr is reset to zero.
// The paper only names this buffer; its depth and ports are this design's own.
module ring_buffer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  adc_data,
  output logic [31:0]   wr_ptr,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    mem[wr_ptr[AW-1:0]] <= adc_data;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_ptr <= '0;
    else        wr_ptr <= wr_ptr + 32'd1;
  end
endmodule
