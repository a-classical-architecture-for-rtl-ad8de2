// result_arbiter: the return path of the star-like connection.  Measurement
// results from N digitizers converge here and are written into system RAM one
// per cycle.
//
// Round-robin: after a grant the priority moves to the next input, so no
// digitizer can starve another.  Each input holds in_valid with its result
// until in_ready; the chosen result appears on out_* one cycle later
// (registered) and is a one-cycle write.
// The paper shows results flowing from the digitizers to system RAM; the
// arbitration scheme is this design's own.
module result_arbiter
  import qarch_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 in_valid,
  input  logic [N-1:0][FMR_AW-1:0]     in_addr,
  input  logic [N-1:0][31:0]           in_data,
  output logic [N-1:0]                 in_ready,
  output logic                         out_valid,
  output logic [FMR_AW-1:0]            out_addr,
  output logic [31:0]                  out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] prio_q;
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(prio_q) + k) % N);
      if (!any && in_valid[idx]) begin
        any = 1'b1;
        sel = IW'(idx);
      end
    end
    in_ready = '0;
    if (any) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio_q <= '0; out_valid <= 1'b0; out_addr <= '0; out_data <= '0;
    end else begin
      out_valid <= any;
      if (any) begin
        out_addr <= in_addr[sel];
        out_data <= in_data[sel];
        prio_q   <= (int'(sel) == N-1) ? '0 : sel + IW'(1);
      end
    end
  end
endmodule
