// trigger_gen: the global trigger generator of the IQE driver.
//
// A trigger makes every device start playing what it has queued, all at the
// same cycle.  For calibration loops the generator repeats the trigger: on
// issue it emits `count` pulses, the first one cycle after issue and the
// following ones `interval` cycles apart.  Each pulse is a one-cycle
// trig.valid carrying the channel mask; the final pulse also carries
// trig.last, which tells the devices to empty their queues after that round.
// busy is high from issue until the last pulse has gone out; an issue while
// busy is ignored (the decoder holds the store back instead).
// count = 0 and interval = 0 are treated as 1.
// Repetition with a count and an interval is the paper's; the pulse timing and
// the last flag are this design's own.
module trigger_gen
  import qarch_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        issue,
  input  logic [31:0] count,
  input  logic [31:0] interval,
  input  logic [31:0] mask,
  output trig_t       trig,
  output logic        busy
);
  logic [31:0] left_q;     // pulses still to send
  logic [31:0] timer_q;    // cycles until the next pulse
  logic [31:0] ival_q;
  logic [31:0] mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left_q <= '0; timer_q <= '0; ival_q <= '0; mask_q <= '0; trig <= '0;
    end else begin
      trig <= '0;
      if (left_q == 32'd0) begin
        if (issue) begin
          trig    <= '{valid: 1'b1, last: (count <= 32'd1), mask: mask};
          left_q  <= (count <= 32'd1) ? 32'd0 : count - 32'd1;
          ival_q  <= (interval == 32'd0) ? 32'd1 : interval;
          timer_q <= ((interval == 32'd0) ? 32'd1 : interval) - 32'd1;
          mask_q  <= mask;
        end
      end else if (timer_q == 32'd0) begin
        trig    <= '{valid: 1'b1, last: (left_q == 32'd1), mask: mask_q};
        left_q  <= left_q - 32'd1;
        timer_q <= ival_q - 32'd1;
      end else begin
        timer_q <= timer_q - 32'd1;
      end
    end
  end

  assign busy = (left_q != 32'd0);
endmodule
