// iqe_driver_regfile: the REG file of the IQE driver, holding both mappings the
// instruction decoder needs.
//
//  * address -> partition: one base register per MMIO region (SQ, TQ, PLAY,
//    APP).  A store at byte offset k of region r addresses partition
//    part_base[r] + k.  The defaults give the four regions disjoint identifier
//    ranges (0, 0x4000, 0xC000, 0x14000).
//  * value -> IQE instructions: the byte written to SQ/TQ/APP is a gate (or
//    operation) index.  gate_map[r][index] gives {start, len} in a sequence
//    table of IQE instruction templates {op, operand, param}; the decoder
//    issues those len templates in order with the partition of the address.
//    A template's op is NOP (an empty cycle), Wait, Play or Mask (a real-time
//    partition-mask write; see broadcast_parser).
//  * play_param: the preserved "parameters" operand of Play.
//
// Register map (20-bit word addresses from the command parser):
//   0x00000 + r        part_base[r]         (r = 0..3)
//   0x00004            play_param
//   0x01000 + r*256+g  gate_map[r][g] = {len[20:16], start[15:0]}  (r = 0 SQ, 1 TQ, 2 APP)
//   0x10000 + 2*i      seq[i].{op[31:30], operand[29:0]}
//   0x10001 + 2*i      seq[i].param
// Writes land one cycle after reg_we; all reads are combinational.
// The two mappings and their storage in a REG file follow the paper; the
// base-plus-offset form of the address mapping, the table sizes and the
// register map are this design's choices.
module iqe_driver_regfile
  import qarch_pkg::*;
#(
  parameter int unsigned SEQ_DEPTH = 1024,
  parameter int unsigned SEQ_AW    = $clog2(SEQ_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  reg_we,
  input  logic [19:0]           reg_addr,
  input  logic [31:0]           reg_wdata,
  output logic [3:0][PID_W-1:0] part_base,
  output logic [31:0]           play_param,
  // gate-map lookup
  input  logic [1:0]            gm_region,   // 0 SQ, 1 TQ, 2 APP
  input  logic [7:0]            gm_index,
  output logic [SEQ_AW-1:0]     gm_start,
  output logic [4:0]            gm_len,
  // sequence-table lookup
  input  logic [SEQ_AW-1:0]     seq_addr,
  output seq_entry_t            seq_entry
);
  logic [SEQ_AW+4:0] gate_map [0:2][256];   // {len, start}
  logic [63:0]  seq_mem  [SEQ_DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      part_base[0] <= PID_W'(0);
      part_base[1] <= PID_W'(SQ_BYTES);
      part_base[2] <= PID_W'(SQ_BYTES + TQ_BYTES);
      part_base[3] <= PID_W'(SQ_BYTES + TQ_BYTES + PLAY_BYTES);
      play_param   <= '0;
    end else if (reg_we && reg_addr[19:3] == 17'd0) begin
      if (reg_addr[2] == 1'b0) part_base[reg_addr[1:0]] <= reg_wdata[PID_W-1:0];
      else if (reg_addr[1:0] == 2'd0) play_param <= reg_wdata;
    end
  end

  // gate map and sequence table: plain memories, no reset (loaded before use)
  always_ff @(posedge clk) begin
    if (reg_we && reg_addr[19:10] == 10'h004 && reg_addr[9:8] != 2'd3)
      gate_map[reg_addr[9:8]][reg_addr[7:0]] <= {reg_wdata[20:16], reg_wdata[SEQ_AW-1:0]};
  end

  always_ff @(posedge clk) begin
    if (reg_we && reg_addr[19:16] == 4'h1 && reg_addr[15:1] < 15'(SEQ_DEPTH)) begin
      if (reg_addr[0] == 1'b0) seq_mem[reg_addr[SEQ_AW:1]][63:32] <= reg_wdata;
      else                     seq_mem[reg_addr[SEQ_AW:1]][31:0]  <= reg_wdata;
    end
  end

  logic [SEQ_AW+4:0] gm_word;
  always_comb begin
    gm_word  = (gm_region != 2'd3) ? gate_map[gm_region][gm_index] : '0;
    gm_start = gm_word[SEQ_AW-1:0];
    gm_len   = gm_word[SEQ_AW +: 5];
  end

  assign seq_entry = seq_entry_t'(seq_mem[seq_addr]);
endmodule
