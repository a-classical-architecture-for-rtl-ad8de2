// queue_sequencer: the timing core shared by the pulse generator (AWG) and the
// data processor (digitizer).  It turns the queue into start events on the
// trigger.
//
// A trigger concerns this device when one of its channels is set in the
// trigger mask: channel c uses mask bit (trig_base + c) mod 32.  On such a
// trigger, with entries queued, entry 0 starts Queue_delay[0]+1 cycles later
// and entry i starts max(Queue_delay[i],1) cycles after entry i-1.  `start` is
// a one-cycle pulse with the entry index on q_rd_idx and the channels on
// start_ch (the entry's channels that the trigger enabled).  After the last
// entry the sequencer waits until the channel engines report idle (eng_busy
// low); if the trigger was the last repetition it then pulses q_clear to
// empty the queue.  `active` is high from the first trigger until that clear,
// and holds new instructions back in Queue_gate.  A trigger that comes while a
// round is still running is counted in `missed` and ignored, except that its
// last flag is kept.
// Play-on-trigger, repetition and emptying are the paper's; the exact cycle
// timing is this design's own.
module queue_sequencer
  import qarch_pkg::*;
#(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  trig_t           trig,
  input  logic [4:0]      trig_base,
  input  logic [AW:0]     q_count,
  input  logic [31:0]     q_delay,
  input  logic [N_CH-1:0] q_id_ch,
  output logic [AW-1:0]   q_rd_idx,
  output logic [AW-1:0]   q_dly_idx,
  output logic            q_clear,
  input  logic            eng_busy,
  output logic            start,
  output logic [N_CH-1:0] start_ch,
  output logic            active,
  output logic [15:0]     missed,
  output logic [15:0]     rounds
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e          state;
  logic [AW-1:0]   idx_q;
  logic [31:0]     timer_q;
  logic [N_CH-1:0] en_q;
  logic            last_q, armed_q;

  logic [N_CH-1:0] en_ch;
  always_comb begin
    for (int unsigned c = 0; c < N_CH; c++)
      en_ch[c] = trig.mask[5'(trig_base + 5'(c))];
  end
  wire hit = trig.valid && (en_ch != '0);

  assign q_rd_idx  = idx_q;
  assign q_dly_idx = (state == S_IDLE) ? '0 : idx_q + 1'b1;
  assign start     = (state == S_RUN) && (timer_q == 32'd0);
  assign start_ch  = q_id_ch & en_q;
  assign active    = (state != S_IDLE) || armed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx_q <= '0; timer_q <= '0; en_q <= '0; last_q <= 1'b0;
      armed_q <= 1'b0; q_clear <= 1'b0; missed <= '0; rounds <= '0;
    end else begin
      q_clear <= 1'b0;
      if (hit && state != S_IDLE) begin
        missed <= missed + 16'd1;
        if (trig.last) last_q <= 1'b1;
      end
      unique case (state)
        S_IDLE: if (hit) begin
          if (q_count != '0) begin
            idx_q   <= '0;
            timer_q <= q_delay;
            en_q    <= en_ch;
            last_q  <= trig.last;
            armed_q <= 1'b1;
            state   <= S_RUN;
          end else if (trig.last) begin
            armed_q <= 1'b0;
            q_clear <= 1'b1;
          end
        end
        S_RUN: begin
          if (timer_q == 32'd0) begin
            if ((AW+1)'(idx_q) + 1'b1 < q_count) begin
              idx_q   <= idx_q + 1'b1;
              timer_q <= (q_delay == 32'd0) ? 32'd0 : q_delay - 32'd1;
            end else begin
              state <= S_DRAIN;
            end
          end else begin
            timer_q <= timer_q - 32'd1;
          end
        end
        S_DRAIN: if (!eng_busy) begin
          rounds <= rounds + 16'd1;
          state  <= S_IDLE;
          if (last_q) begin
            q_clear <= 1'b1;
            armed_q <= 1'b0;
            last_q  <= 1'b0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
