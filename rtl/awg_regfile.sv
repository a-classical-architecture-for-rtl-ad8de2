// awg_regfile: REG file and waveform Mapping of one AWG (digital-analog unit).
//
// Holds, written through the unit's command parser:
//   0x00000 + e   partition mask entry e: [31] valid, [27:24] channel set,
//                 [16:0] partition identifier
//   0x00100       trig_base: the device's channel c answers trigger-mask bit
//                 (trig_base + c) mod 32
//   0x01000 + i   Mapping entry of waveform index i: [26:16] length in
//                 samples, [15:0] start address in the waveform memory
//   0x10000 + ch*0x1000 + a   waveform sample a of channel ch (16 bits); these
//                 writes are passed on to the pulse generator's memories
// The mask and trig_base are reset to zero (the device accepts nothing);
// the Mapping table is a memory loaded before use.  Reads are combinational.
// A real-time mask write (rt_we, from an IQE_MASK instruction addressed to
// this device) sets entry rt_entry to rt_data's valid bit and channel set and
// to the identifier rt_pid, one cycle later.  A command-stream write in the
// same cycle wins.
// Partition masks held in a REG file and the Mapping block are the paper's;
// the contents and register map are this design's own.
module awg_regfile
  import qarch_pkg::*;
#(
  parameter int unsigned ENTRIES   = 16,
  parameter int unsigned N_CH      = 4,
  parameter int unsigned MAP_DEPTH = 256,
  parameter int unsigned WAVE_AW   = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          reg_we,
  input  logic [19:0]                   reg_addr,
  input  logic [31:0]                   reg_wdata,
  input  logic                          rt_we,
  input  logic [7:0]                    rt_entry,
  input  logic [31:0]                   rt_data,
  input  logic [PID_W-1:0]              rt_pid,
  output logic [ENTRIES-1:0]            mask_valid,
  output logic [ENTRIES-1:0][PID_W-1:0] mask_pid,
  output logic [ENTRIES-1:0][N_CH-1:0]  mask_ch,
  output logic [4:0]                    trig_base,
  input  logic [7:0]                    map_idx,
  output logic [WAVE_AW-1:0]            map_start,
  output logic [WAVE_AW:0]              map_len,
  output logic                          wave_we,
  output logic [1:0]                    wave_ch,
  output logic [WAVE_AW-1:0]            wave_addr,
  output logic [15:0]                   wave_data
);
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  logic [2*WAVE_AW:0] map_mem [MAP_DEPTH];   // {len, start}

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_valid <= '0; mask_pid <= '0; mask_ch <= '0; trig_base <= '0;
    end else if (reg_we && reg_addr[19:8] == 12'h000) begin
      if (int'(reg_addr[7:0]) < ENTRIES) begin
        mask_valid[reg_addr[EW-1:0]] <= reg_wdata[31];
        mask_ch[reg_addr[EW-1:0]]    <= reg_wdata[24 +: N_CH];
        mask_pid[reg_addr[EW-1:0]]   <= reg_wdata[PID_W-1:0];
      end
    end else if (reg_we && reg_addr == 20'h00100) begin
      trig_base <= reg_wdata[4:0];
    end else if (rt_we && int'(rt_entry) < ENTRIES) begin
      mask_valid[rt_entry[EW-1:0]] <= rt_data[31];
      mask_ch[rt_entry[EW-1:0]]    <= rt_data[24 +: N_CH];
      mask_pid[rt_entry[EW-1:0]]   <= rt_pid;
    end
  end

  always_ff @(posedge clk) begin
    if (reg_we && reg_addr[19:12] == 8'h01 && int'(reg_addr[11:0]) < MAP_DEPTH)
      map_mem[reg_addr[7:0]] <= {reg_wdata[16 +: WAVE_AW+1], reg_wdata[WAVE_AW-1:0]};
  end

  logic [2*WAVE_AW:0] map_word;
  assign map_word  = (int'(map_idx) < MAP_DEPTH) ? map_mem[map_idx] : '0;
  assign map_start = map_word[WAVE_AW-1:0];
  assign map_len   = map_word[WAVE_AW +: WAVE_AW+1];

  // bits 30:28 of a mask entry are spare
  logic unused;
  assign unused = ^{reg_wdata[30:28], rt_data[30:28], rt_data[23:0]};

  // waveform loads go straight on to the pulse generator
  assign wave_we   = reg_we && reg_addr[19:16] == 4'h1 && reg_addr[15:14] == 2'b00;
  assign wave_ch   = reg_addr[13:12];
  assign wave_addr = reg_addr[WAVE_AW-1:0];
  assign wave_data = reg_wdata[15:0];
endmodule
