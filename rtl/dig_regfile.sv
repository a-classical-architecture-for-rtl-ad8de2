// dig_regfile: REG file of one digitizer (analog-digital unit).
//
// Written through the unit's command parser:
//   0x00000 + e          partition mask entry e: [31] valid, [27:24] channel
//                        set, [16:0] partition identifier
//   0x00100              trig_base (channel c answers trigger-mask bit
//                        (trig_base + c) mod 32)
//   0x00200 + c          discriminator weights of channel c: [31:16] wQ, [15:0] wI
//   0x00210 + c          discriminator threshold of channel c (signed)
//   0x00220 + c          result base address of channel c (word in the result
//                        memory); writing it also pulses res_base_wr[c]
//   0x02000 + c*256 + k  demodulation table of channel c, k < DEMOD_LEN:
//                        [31:16] sin, [15:0] cos (signed)
// Registers reset to zero; the demodulation tables are memories loaded before
// use, read combinationally through one port per channel.
// A real-time mask write (rt_we, from an IQE_MASK instruction addressed to
// this device) sets entry rt_entry to rt_data's valid bit and channel set and
// to the identifier rt_pid, one cycle later.  A command-stream write in the
// same cycle wins.
// What the tables hold serves the IQ demodulation and state discrimination the
// paper describes; the register map is this design's own.
module dig_regfile
  import qarch_pkg::*;
#(
  parameter int unsigned ENTRIES   = 16,
  parameter int unsigned N_CH      = 4,
  parameter int unsigned DEMOD_LEN = 64,
  parameter int unsigned LW        = $clog2(DEMOD_LEN)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           reg_we,
  input  logic [19:0]                    reg_addr,
  input  logic [31:0]                    reg_wdata,
  input  logic                           rt_we,
  input  logic [7:0]                     rt_entry,
  input  logic [31:0]                    rt_data,
  input  logic [PID_W-1:0]               rt_pid,
  output logic [ENTRIES-1:0]             mask_valid,
  output logic [ENTRIES-1:0][PID_W-1:0]  mask_pid,
  output logic [ENTRIES-1:0][N_CH-1:0]   mask_ch,
  output logic [4:0]                     trig_base,
  output logic [N_CH-1:0][15:0]          w_i,
  output logic [N_CH-1:0][15:0]          w_q,
  output logic [N_CH-1:0][31:0]          thr,
  output logic [N_CH-1:0][FMR_AW-1:0]    res_base,
  output logic [N_CH-1:0]                res_base_wr,
  input  logic [N_CH-1:0][LW-1:0]        lut_idx,
  output logic [N_CH-1:0][15:0]          lut_cos,
  output logic [N_CH-1:0][15:0]          lut_sin
);
  logic [31:0] lut [N_CH][DEMOD_LEN];

  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_valid <= '0; mask_pid <= '0; mask_ch <= '0; trig_base <= '0;
      w_i <= '0; w_q <= '0; thr <= '0; res_base <= '0; res_base_wr <= '0;
    end else begin
      res_base_wr <= '0;
      if (reg_we && reg_addr[19:8] == 12'h000 && int'(reg_addr[7:0]) < ENTRIES) begin
        mask_valid[reg_addr[EW-1:0]] <= reg_wdata[31];
        mask_ch[reg_addr[EW-1:0]]    <= reg_wdata[24 +: N_CH];
        mask_pid[reg_addr[EW-1:0]]   <= reg_wdata[PID_W-1:0];
      end else if (rt_we && int'(rt_entry) < ENTRIES) begin
        mask_valid[rt_entry[EW-1:0]] <= rt_data[31];
        mask_ch[rt_entry[EW-1:0]]    <= rt_data[24 +: N_CH];
        mask_pid[rt_entry[EW-1:0]]   <= rt_pid;
      end
      if (reg_we && reg_addr == 20'h00100) trig_base <= reg_wdata[4:0];
      for (int unsigned c = 0; c < N_CH; c++) begin
        if (reg_we && reg_addr == 20'h00200 + 20'(c)) begin
          w_i[c] <= reg_wdata[15:0];
          w_q[c] <= reg_wdata[31:16];
        end
        if (reg_we && reg_addr == 20'h00210 + 20'(c)) thr[c] <= reg_wdata;
        if (reg_we && reg_addr == 20'h00220 + 20'(c)) begin
          res_base[c]    <= reg_wdata[FMR_AW-1:0];
          res_base_wr[c] <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned c = 0; c < N_CH; c++)
      if (reg_we && reg_addr[19:12] == 8'h02 && int'(reg_addr[11:8]) == c &&
          int'(reg_addr[7:0]) < DEMOD_LEN)
        lut[c][reg_addr[LW-1:0]] <= reg_wdata;
  end

  always_comb begin
    for (int unsigned c = 0; c < N_CH; c++) begin
      lut_cos[c] = lut[c][lut_idx[c]][15:0];
      lut_sin[c] = lut[c][lut_idx[c]][31:16];
    end
  end

  // only the valid bit and channel set of a real-time mask word are used
  logic unused;
  assign unused = ^{rt_data[30:24+N_CH], rt_data[23:0]};
endmodule
