// digitizer_unit: the digital part of one digitizer (the analog-digital unit
// of the control electronics).
//
//   command stream -> cmd_parser -> dig_regfile (partition mask, demodulation
//                                                tables, discriminators)
//   star broadcast -> broadcast_parser -> instr_queue -> queue_sequencer
//   trigger        ----------------------------------> queue_sequencer
//   ADC samples    -> ring_buffer (one per channel) -> data_process
//                                      -> results to the star return path
//   broadcast_parser (Mask for slot_id) -> dig_regfile mask entry
// A digitizer queues the measurement Plays of its partitions just as an AWG
// queues its pulses, so sampling windows are timed from the same trigger as
// the readout pulses.  Results leave through a valid/ready port towards the
// result memory.
// The blocks and their connections follow the paper's diagram of the
// analog-digital unit, except the queue, which the diagram does not show: it
// is this design's way of timing measurements against the trigger.
module digitizer_unit
  import qarch_pkg::*;
#(
  parameter int unsigned N_CH      = 4,
  parameter int unsigned ENTRIES   = 16,
  parameter int unsigned QDEPTH    = 256,
  parameter int unsigned RB_DEPTH  = 1024,
  parameter int unsigned DEMOD_LEN = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [7:0]               slot_id,
  input  logic                     cmd_valid,
  input  logic [31:0]              cmd_data,
  input  iqe_instr_t               iqe,
  input  trig_t                    trig,
  input  logic [N_CH-1:0][15:0]    adc_data,
  output logic                     res_valid,
  output logic [FMR_AW-1:0]        res_addr,
  output logic [31:0]              res_data,
  input  logic                     res_ready,
  output logic                     overflow,
  output logic                     res_overflow,
  output logic                     cmd_err,
  output logic [15:0]              rounds,
  output logic [15:0]              missed
);
  localparam int unsigned QAW   = $clog2(QDEPTH);
  localparam int unsigned RB_AW = $clog2(RB_DEPTH);
  localparam int unsigned LW    = $clog2(DEMOD_LEN);

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
  logic [N_CH-1:0][15:0]         w_i, w_q, lut_cos, lut_sin;
  logic [N_CH-1:0][31:0]         thr;
  logic [N_CH-1:0][FMR_AW-1:0]   res_base;
  logic [N_CH-1:0]               res_base_wr;
  logic [N_CH-1:0][LW-1:0]       lut_idx;
  dig_regfile #(.ENTRIES(ENTRIES), .N_CH(N_CH), .DEMOD_LEN(DEMOD_LEN)) u_reg (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata,
    .rt_we, .rt_entry(acc.operand[7:0]), .rt_data(acc.param), .rt_pid(acc.pid), .mask_valid, .mask_pid, .mask_ch,
    .trig_base, .w_i, .w_q, .thr, .res_base, .res_base_wr, .lut_idx, .lut_cos, .lut_sin);

  broadcast_parser #(.ENTRIES(ENTRIES), .N_CH(N_CH)) u_bp (
    .clk, .rst_n, .iqe, .mask_valid, .mask_pid, .mask_ch, .out(acc), .out_ch(acc_ch),
    .mask_set);

  logic            hold, q_clear;
  logic [QAW-1:0]  rd_idx, dly_idx;
  logic [QAW:0]    q_count;
  logic [N_CH-1:0] id_ch;
  logic [7:0]      id_wave;
  logic [31:0]     id_param, q_delay;
  instr_queue #(.DEPTH(QDEPTH), .N_CH(N_CH)) u_q (
    .clk, .rst_n, .in(acc), .in_ch(acc_ch), .hold, .clear(q_clear), .rd_idx, .dly_idx,
    .count(q_count), .id_ch, .id_wave, .id_param, .delay(q_delay), .overflow);

  logic            start, dp_busy;
  logic [N_CH-1:0] start_ch;
  queue_sequencer #(.N_CH(N_CH), .DEPTH(QDEPTH)) u_seq (
    .clk, .rst_n, .trig, .trig_base, .q_count, .q_delay, .q_id_ch(id_ch),
    .q_rd_idx(rd_idx), .q_dly_idx(dly_idx), .q_clear, .eng_busy(dp_busy),
    .start, .start_ch, .active(hold), .missed, .rounds);

  logic [N_CH-1:0][31:0]      rb_wr_ptr;
  logic [N_CH-1:0][RB_AW-1:0] rb_raddr;
  logic [N_CH-1:0][15:0]      rb_rdata;
  for (genvar c = 0; c < N_CH; c++) begin : g_rb
    ring_buffer #(.DEPTH(RB_DEPTH), .W(16)) u_rb (
      .clk, .rst_n, .adc_data(adc_data[c]), .wr_ptr(rb_wr_ptr[c]),
      .raddr(rb_raddr[c]), .rdata(rb_rdata[c]));
  end

  data_process #(.N_CH(N_CH), .RB_AW(RB_AW), .DEMOD_LEN(DEMOD_LEN)) u_dp (
    .clk, .rst_n, .start, .start_ch, .id_wave, .id_param, .busy(dp_busy),
    .rb_wr_ptr, .rb_raddr, .rb_rdata, .lut_idx, .lut_cos, .lut_sin, .w_i, .w_q, .thr,
    .res_base, .res_base_wr, .res_valid, .res_addr, .res_data, .res_ready, .res_overflow);
endmodule
