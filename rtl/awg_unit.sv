// awg_unit: the digital part of one arbitrary waveform generator (the
// digital-analog unit of the control electronics).
//
//   command stream -> cmd_parser -> awg_regfile (partition mask, Mapping,
//                                                waveform memories)
//   star broadcast -> broadcast_parser -> instr_queue -> queue_sequencer
//   trigger        ----------------------------------> queue_sequencer
//                                      -> pulse_generator -> DAC ports
//   broadcast_parser (Mask for slot_id) -> awg_regfile mask entry
// An IQE instruction whose partition is in the mask enters the queue two
// cycles after it arrives; nothing is played until a trigger for one of this
// unit's channels arrives.  Then the queued Plays are replayed on every
// repetition of the trigger, and the queue is emptied after the last one.
// First sample at the DAC port: Queue_delay[0] + 3 cycles after the trigger
// arrives here.  Sticky status: queue overflow, command error; counters of
// rounds played and triggers missed.
// The set of blocks and their connections follow the paper's diagram of the
// digital-analog unit; the details are this design's own.
module awg_unit
  import qarch_pkg::*;
#(
  parameter int unsigned N_CH     = 4,
  parameter int unsigned ENTRIES  = 16,
  parameter int unsigned QDEPTH   = 256,
  parameter int unsigned WAVE_AW  = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [7:0]               slot_id,
  input  logic                     cmd_valid,
  input  logic [31:0]              cmd_data,
  input  iqe_instr_t               iqe,
  input  trig_t                    trig,
  output logic [N_CH-1:0][15:0]    dac_data,
  output logic [N_CH-1:0]          dac_valid,
  output logic                     overflow,
  output logic                     cmd_err,
  output logic [15:0]              rounds,
  output logic [15:0]              missed
);
  localparam int unsigned QAW = $clog2(QDEPTH);

  logic        reg_we;
  logic [19:0] reg_addr;
  logic [31:0] reg_wdata;
  cmd_parser u_cmd (.clk, .rst_n, .slot_id, .cmd_valid, .cmd_data,
                    .reg_we, .reg_addr, .reg_wdata, .err(cmd_err));

  iqe_instr_t      acc;
  logic [N_CH-1:0] acc_ch;
  logic            mask_set, rt_we;
  assign rt_we = mask_set && acc.operand[27:20] == slot_id;

  logic [ENTRIES-1:0]            mask_valid;
  logic [ENTRIES-1:0][PID_W-1:0] mask_pid;
  logic [ENTRIES-1:0][N_CH-1:0]  mask_ch;
  logic [4:0]                    trig_base;
  logic [7:0]                    map_idx;
  logic [WAVE_AW-1:0]            map_start;
  logic [WAVE_AW:0]              map_len;
  logic                          wave_we;
  logic [1:0]                    wave_ch;
  logic [WAVE_AW-1:0]            wave_addr;
  logic [15:0]                   wave_data;
  awg_regfile #(.ENTRIES(ENTRIES), .N_CH(N_CH), .WAVE_AW(WAVE_AW)) u_reg (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata,
    .rt_we, .rt_entry(acc.operand[7:0]), .rt_data(acc.param), .rt_pid(acc.pid), .mask_valid, .mask_pid, .mask_ch,
    .trig_base, .map_idx, .map_start, .map_len, .wave_we, .wave_ch, .wave_addr, .wave_data);

  broadcast_parser #(.ENTRIES(ENTRIES), .N_CH(N_CH)) u_bp (
    .clk, .rst_n, .iqe, .mask_valid, .mask_pid, .mask_ch, .out(acc), .out_ch(acc_ch),
    .mask_set);

  logic            hold, q_clear;
  logic [QAW-1:0]  rd_idx, dly_idx;
  logic [QAW:0]    q_count;
  logic [N_CH-1:0] id_ch;
  logic [31:0]     id_param, q_delay;
  instr_queue #(.DEPTH(QDEPTH), .N_CH(N_CH)) u_q (
    .clk, .rst_n, .in(acc), .in_ch(acc_ch), .hold, .clear(q_clear), .rd_idx, .dly_idx,
    .count(q_count), .id_ch, .id_wave(map_idx), .id_param, .delay(q_delay), .overflow);

  logic            start, pg_busy;
  logic [N_CH-1:0] start_ch;
  queue_sequencer #(.N_CH(N_CH), .DEPTH(QDEPTH)) u_seq (
    .clk, .rst_n, .trig, .trig_base, .q_count, .q_delay, .q_id_ch(id_ch),
    .q_rd_idx(rd_idx), .q_dly_idx(dly_idx), .q_clear, .eng_busy(pg_busy),
    .start, .start_ch, .active(hold), .missed, .rounds);

  pulse_generator #(.N_CH(N_CH), .WAVE_AW(WAVE_AW), .SAMPLE_W(16)) u_pg (
    .clk, .rst_n, .wave_we, .wave_ch, .wave_addr, .wave_data, .start, .start_ch,
    .map_start, .map_len, .busy(pg_busy), .dac_data, .dac_valid);

  logic unused;
  assign unused = ^id_param;
endmodule
