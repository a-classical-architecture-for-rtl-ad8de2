// broadcast_parser: the partition filter at the input of every AWG and
// digitizer.
//
// All IQE instructions reach all devices.  The device's partition mask is a
// list of ENTRIES partition identifiers, each with the set of local channels
// that belong to that partition.  An instruction is accepted when its
// identifier equals at least one valid entry; out_ch is then the union of the
// channel sets of all matching entries.  The all-ones identifier (Wait) is
// accepted by every device with all channels.  Everything else is dropped.
// One register stage: out follows iqe by one cycle.  The comparison is done on
// all entries at once, so the cost does not depend on how many devices share a
// partition.
// An IQE_MASK instruction is not filtered and never reaches the queue: it is
// a real-time write of one mask entry, flagged on mask_set in the same cycle
// as out.  It carries the target device's slot in operand[27:20], the entry
// index in operand[7:0] and the entry's valid bit and channel set in param
// ([31], [27:24]); the entry takes the instruction's own partition identifier.
// The device compares the slot and writes its REG file (awg_regfile,
// dig_regfile), so the mask is in force for the next instruction.
// Matching against a partition mask, and reconfiguring the masks in real time
// over the same star, are the paper's mechanism; the list form of
// the mask and the per-entry channel set are this design's own.
module broadcast_parser
  import qarch_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned N_CH    = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  iqe_instr_t                    iqe,
  input  logic [ENTRIES-1:0]            mask_valid,
  input  logic [ENTRIES-1:0][PID_W-1:0] mask_pid,
  input  logic [ENTRIES-1:0][N_CH-1:0]  mask_ch,
  output iqe_instr_t                    out,
  output logic [N_CH-1:0]               out_ch,
  output logic                          mask_set
);
  logic [N_CH-1:0] ch;
  always_comb begin
    ch = '0;
    for (int unsigned e = 0; e < ENTRIES; e++)
      if (mask_valid[e] && mask_pid[e] == iqe.pid) ch |= mask_ch[e];
    if (iqe.pid == PID_ALL) ch = '1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0; out_ch <= '0; mask_set <= 1'b0;
    end else begin
      out    <= iqe;
      out.valid <= iqe.valid && iqe.op != IQE_MASK && (ch != '0);
      mask_set  <= iqe.valid && iqe.op == IQE_MASK;
      out_ch <= ch;
    end
  end
endmodule
