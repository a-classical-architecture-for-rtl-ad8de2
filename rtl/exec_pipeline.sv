// exec_pipeline: the instruction decoder of the IQE driver.  It sits on the
// CPU's memory bus and turns stores into the quantum MMIO window into IQE
// instructions for the star-like broadcast, and fmr loads into reads of the
// measurement-result memory.
//
//   store ADDR_TRIGGER+8   latch channel mask
//   store ADDR_TRIGGER+4   latch repeat count
//   store ADDR_TRIGGER     repeat interval; issues the trigger train
//   store ADDR_WAIT        one Wait(time) broadcast to every partition
//   sb    ADDR_PLAY+k      one Play(waveform = byte) to partition base[PLAY]+k,
//                          carrying the preserved Play parameters
//   sb    ADDR_SQ/TQ/APP+k gate index g -> the REG file's sequence for g,
//                          each template issued to partition base[r]+k
//                          (a Mask template re-partitions a device in real
//                          time; the entry gets partition base[r]+k)
//   lw    ADDR_FMR+4j      word j of the result memory
// Other addresses are ignored and counted in err_count.
//
// Timing: one request per cycle (mmio_ready high).  A gate that expands to L
// IQE instructions keeps mmio_ready low for L cycles after it is accepted
// (stall); a trigger store waits while the trigger generator is busy (or its
// issue pulse is still on the way to it).  The IQE
// instruction appears one cycle after acceptance (registered); a load answers
// with mmio_rvalid one cycle after acceptance.  The byte of sb is wdata[7:0].
// A stalled request must hold its address and data until it is accepted.
//
// The address layout, the address->partition / value->instruction decode and
// the main-operand rule follow the paper.  Where its trigger description
// disagrees (which store issues), the store order of the trig expansion is
// followed: the last store, to ADDR_TRIGGER, issues.
module exec_pipeline
  import qarch_pkg::*;
#(
  parameter int unsigned SEQ_AW = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // MMIO request / response
  input  logic                  mmio_valid,
  input  logic                  mmio_we,
  input  logic [1:0]            mmio_size,    // 0 byte, 1 half, 2 word
  input  logic [31:0]           mmio_addr,
  input  logic [31:0]           mmio_wdata,
  output logic                  mmio_ready,
  output logic                  mmio_rvalid,
  output logic [31:0]           mmio_rdata,
  // REG file
  input  logic [3:0][PID_W-1:0] part_base,
  input  logic [31:0]           play_param,
  output logic [1:0]            gm_region,
  output logic [7:0]            gm_index,
  input  logic [SEQ_AW-1:0]     gm_start,
  input  logic [4:0]            gm_len,
  output logic [SEQ_AW-1:0]     seq_addr,
  input  seq_entry_t            seq_entry,
  // trigger generator
  input  logic                  trig_busy,
  output logic                  trig_issue,
  output logic [31:0]           trig_count,
  output logic [31:0]           trig_interval,
  output logic [31:0]           trig_mask,
  // result memory read port (1-cycle synchronous read)
  output logic [FMR_AW-1:0]     ram_raddr,
  input  logic [31:0]           ram_rdata,
  // broadcast
  output iqe_instr_t            iqe,
  output logic [15:0]           err_count
);
  typedef enum logic {S_IDLE, S_EXPAND} state_e;
  state_e            state;
  logic [PID_W-1:0]  pid_q;
  logic [SEQ_AW-1:0] ptr_q;
  logic [4:0]        left_q;
  logic              rd_fmr_q;

  // ---- address decode ----
  logic        hit_trig, hit_wait, hit_fmr, hit_sq, hit_tq, hit_play, hit_app, hit_gate;
  logic [31:0] off;
  logic [1:0]  region;        // index into part_base
  always_comb begin
    hit_trig = (mmio_addr == ADDR_TRIGGER) || (mmio_addr == ADDR_TRIGGER + 32'd4) ||
               (mmio_addr == ADDR_TRIGGER + 32'd8);
    hit_wait = (mmio_addr == ADDR_WAIT);
    hit_fmr  = (mmio_addr >= ADDR_FMR)  && (mmio_addr < ADDR_FMR  + 32'(4*FMR_WORDS));
    hit_sq   = (mmio_addr >= ADDR_SQ)   && (mmio_addr < ADDR_SQ   + 32'(SQ_BYTES));
    hit_tq   = (mmio_addr >= ADDR_TQ)   && (mmio_addr < ADDR_TQ   + 32'(TQ_BYTES));
    hit_play = (mmio_addr >= ADDR_PLAY) && (mmio_addr < ADDR_PLAY + 32'(PLAY_BYTES));
    hit_app  = (mmio_addr >= ADDR_APP)  && (mmio_addr < ADDR_APP  + 32'(APP_BYTES));
    hit_gate = hit_sq || hit_tq || hit_app;
    off      = '0;
    region   = REG_SQ;
    if (hit_sq)   begin off = mmio_addr - ADDR_SQ;   region = REG_SQ;   end
    if (hit_tq)   begin off = mmio_addr - ADDR_TQ;   region = REG_TQ;   end
    if (hit_play) begin off = mmio_addr - ADDR_PLAY; region = REG_PLAY; end
    if (hit_app)  begin off = mmio_addr - ADDR_APP;  region = REG_APP;  end
    if (hit_fmr)  off = mmio_addr - ADDR_FMR;
  end

  // gate-map lookup (REG file rows: 0 SQ, 1 TQ, 2 APP)
  assign gm_region = hit_app ? 2'd2 : (hit_tq ? 2'd1 : 2'd0);
  assign gm_index  = mmio_wdata[7:0];
  assign seq_addr  = ptr_q;
  assign ram_raddr = off[FMR_AW+1:2];

  wire trig_fire = mmio_we && (mmio_addr == ADDR_TRIGGER);
  assign mmio_ready = (state == S_IDLE) && !(trig_fire && (trig_busy || trig_issue));
  wire accept = mmio_valid && mmio_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pid_q <= '0; ptr_q <= '0; left_q <= '0;
      iqe <= '0; trig_issue <= 1'b0; trig_count <= 32'd1; trig_interval <= 32'd1;
      trig_mask <= '0; mmio_rvalid <= 1'b0; rd_fmr_q <= 1'b0; err_count <= '0;
    end else begin
      iqe         <= '0;
      trig_issue  <= 1'b0;
      mmio_rvalid <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          if (!mmio_we) begin
            mmio_rvalid <= 1'b1;
            rd_fmr_q    <= hit_fmr;
            if (!hit_fmr) err_count <= err_count + 16'd1;
          end else if (hit_trig) begin
            unique case (mmio_addr[3:0])
              4'h8:    trig_mask  <= mmio_wdata;
              4'h4:    trig_count <= mmio_wdata;
              default: begin trig_interval <= mmio_wdata; trig_issue <= 1'b1; end
            endcase
          end else if (hit_wait) begin
            iqe <= '{valid: 1'b1, op: IQE_WAIT, pid: PID_ALL, operand: mmio_wdata, param: '0};
          end else if (hit_play) begin
            iqe <= '{valid: 1'b1, op: IQE_PLAY, pid: part_base[REG_PLAY] + PID_W'(off),
                     operand: {24'd0, mmio_wdata[7:0]}, param: play_param};
          end else if (hit_gate) begin
            if (gm_len != 5'd0) begin
              pid_q  <= part_base[region] + PID_W'(off);
              ptr_q  <= gm_start;
              left_q <= gm_len;
              state  <= S_EXPAND;
            end
          end else begin
            err_count <= err_count + 16'd1;
          end
        end
        S_EXPAND: begin
          iqe <= '{valid: seq_entry.op != IQE_NOP, op: seq_entry.op, pid: pid_q,
                   operand: {2'b00, seq_entry.operand}, param: seq_entry.param};
          ptr_q  <= ptr_q + SEQ_AW'(1);
          left_q <= left_q - 5'd1;
          if (left_q == 5'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign mmio_rdata = rd_fmr_q ? ram_rdata : 32'd0;


  logic unused;
  assign unused = ^{mmio_size, off[31:FMR_AW+2], off[1:0]};
endmodule
