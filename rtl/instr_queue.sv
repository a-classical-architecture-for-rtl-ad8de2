// instr_queue: the local instruction queue of an AWG or digitizer.
//
// Instructions are not played when they arrive; they are stored and played on
// the next trigger.  The queue has three parts, as in the unit's block
// diagram:
//   Queue_gate   a FIFO of accepted instructions.  It drains one per cycle,
//                except while `hold` is high (the player is between the
//                first trigger and the end of the last repetition), so that
//                instructions for the next round are not mixed into, or
//                cleared with, the round being played.
//   Queue_delay  Wait times add up in a pending delay; each Play stores it
//   Queue_ID     in Queue_delay and its {channels, waveform, parameters} in
//                Queue_ID at the same index, and the pending delay restarts.
// The player reads Queue_ID[rd_idx] and Queue_delay[dly_idx] combinationally
// (two read ports, so it can load the next delay while starting an entry;
// Queue_delay[i] = cycles from start i-1 to start i) and replays the same
// entries on every repetition; `clear` empties Queue_ID/Queue_delay and the
// pending delay.  A Play that finds Queue_ID full, or an instruction that
// finds Queue_gate full, is dropped and sets the sticky `overflow`.
// A Wait after the last Play of a round has no effect.
// The local queue and its three named parts are the paper's; how Wait and
// Play are split between them is this design's reading of the diagram.
module instr_queue
  import qarch_pkg::*;
#(
  parameter int unsigned DEPTH      = 256,
  parameter int unsigned GATE_DEPTH = 16,
  parameter int unsigned N_CH       = 4,
  parameter int unsigned AW         = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  iqe_instr_t      in,
  input  logic [N_CH-1:0] in_ch,
  input  logic            hold,
  input  logic            clear,
  input  logic [AW-1:0]   rd_idx,
  input  logic [AW-1:0]   dly_idx,
  output logic [AW:0]     count,
  output logic [N_CH-1:0] id_ch,
  output logic [7:0]      id_wave,
  output logic [31:0]     id_param,
  output logic [31:0]     delay,
  output logic            overflow
);
  localparam int unsigned GW = $clog2(GATE_DEPTH);
  localparam int unsigned IDW = N_CH + 8 + 32;
  typedef struct packed {
    iqe_op_e         op;
    logic [N_CH-1:0] ch;
    logic [31:0]     operand;
    logic [31:0]     param;
  } gate_t;

  // ---- Queue_gate ----
  gate_t         gate_mem [GATE_DEPTH];
  logic [GW:0]   g_wr, g_rd;
  wire  [GW:0]   g_used  = g_wr - g_rd;
  wire           g_full  = (g_used == (GW+1)'(GATE_DEPTH));
  wire           g_empty = (g_used == '0);
  wire           pop     = !g_empty && !hold && !clear;
  gate_t         head;
  assign head = gate_mem[g_rd[GW-1:0]];

  // ---- Queue_ID / Queue_delay ----
  logic [IDW-1:0] id_mem    [DEPTH];
  logic [31:0]    delay_mem [DEPTH];
  logic [31:0]    pending;

  always_ff @(posedge clk) begin
    if (in.valid && !g_full)
      gate_mem[g_wr[GW-1:0]] <= '{op: in.op, ch: in_ch, operand: in.operand, param: in.param};
    if (pop && head.op == IQE_PLAY && count < (AW+1)'(DEPTH)) begin
      id_mem[count[AW-1:0]]    <= {head.ch, head.operand[7:0], head.param};
      delay_mem[count[AW-1:0]] <= pending;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_wr <= '0; g_rd <= '0; count <= '0; pending <= '0; overflow <= 1'b0;
    end else begin
      if (in.valid) begin
        if (!g_full) g_wr <= g_wr + 1'b1;
        else         overflow <= 1'b1;
      end
      if (clear) begin
        count   <= '0;
        pending <= '0;
      end else if (pop) begin
        g_rd <= g_rd + 1'b1;
        if (head.op == IQE_WAIT) begin
          pending <= pending + head.operand;
        end else if (head.op == IQE_PLAY) begin
          if (count < (AW+1)'(DEPTH)) begin
            count   <= count + 1'b1;
            pending <= '0;
          end else begin
            overflow <= 1'b1;
          end
        end
      end
    end
  end

  assign {id_ch, id_wave, id_param} = id_mem[rd_idx];
  assign delay = delay_mem[dly_idx];

  // the partition was checked by the broadcast parser
  logic unused;
  assign unused = ^in.pid;
endmodule
