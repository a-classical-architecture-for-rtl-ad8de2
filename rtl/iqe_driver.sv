// iqe_driver: the instruction decoding and dispatching unit of the main
// control unit.  The CPU reaches it only through loads and stores to a
// reserved MMIO window; it answers with broadcast IQE instructions and
// triggers for the control electronics.
//
//   command stream -> cmd_parser -> iqe_driver_regfile (decode mappings)
//   MMIO           -> exec_pipeline -> IQE instruction (to the star broadcast)
//                                   -> trigger_gen -> trigger lines
//                                   <- result memory (fmr loads)
// Cost per instruction does not depend on how many qubits a partition holds:
// a gate store becomes the same few IQE instructions whatever the group size,
// and the broadcast reaches every device at once.
// See exec_pipeline for the MMIO map and timing.  Composition follows the
// paper's diagram of the driver; its feedback trigger generator is not part of
// this RTL.
module iqe_driver
  import qarch_pkg::*;
#(
  parameter int unsigned SEQ_DEPTH = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        slot_id,
  input  logic              cmd_valid,
  input  logic [31:0]       cmd_data,
  input  logic              mmio_valid,
  input  logic              mmio_we,
  input  logic [1:0]        mmio_size,
  input  logic [31:0]       mmio_addr,
  input  logic [31:0]       mmio_wdata,
  output logic              mmio_ready,
  output logic              mmio_rvalid,
  output logic [31:0]       mmio_rdata,
  output logic [FMR_AW-1:0] ram_raddr,
  input  logic [31:0]       ram_rdata,
  output iqe_instr_t        iqe,
  output trig_t             trig,
  output logic              trig_busy,
  output logic [15:0]       err_count,
  output logic              cmd_err
);
  localparam int unsigned SEQ_AW = $clog2(SEQ_DEPTH);

  logic        reg_we;
  logic [19:0] reg_addr;
  logic [31:0] reg_wdata;
  cmd_parser u_cmd (.clk, .rst_n, .slot_id, .cmd_valid, .cmd_data,
                    .reg_we, .reg_addr, .reg_wdata, .err(cmd_err));

  logic [3:0][PID_W-1:0] part_base;
  logic [31:0]           play_param;
  logic [1:0]            gm_region;
  logic [7:0]            gm_index;
  logic [SEQ_AW-1:0]     gm_start, seq_addr;
  logic [4:0]            gm_len;
  seq_entry_t            seq_entry;
  iqe_driver_regfile #(.SEQ_DEPTH(SEQ_DEPTH)) u_reg (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .part_base, .play_param,
    .gm_region, .gm_index, .gm_start, .gm_len, .seq_addr, .seq_entry);

  logic        trig_issue;
  logic [31:0] trig_count, trig_interval, trig_mask;
  exec_pipeline #(.SEQ_AW(SEQ_AW)) u_exec (
    .clk, .rst_n, .mmio_valid, .mmio_we, .mmio_size, .mmio_addr, .mmio_wdata,
    .mmio_ready, .mmio_rvalid, .mmio_rdata, .part_base, .play_param,
    .gm_region, .gm_index, .gm_start, .gm_len, .seq_addr, .seq_entry,
    .trig_busy, .trig_issue, .trig_count, .trig_interval, .trig_mask,
    .ram_raddr, .ram_rdata, .iqe, .err_count);

  trigger_gen u_trig (.clk, .rst_n, .issue(trig_issue), .count(trig_count),
                      .interval(trig_interval), .mask(trig_mask), .trig, .busy(trig_busy));
endmodule
