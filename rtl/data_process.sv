// data_process: measurement processing of a digitizer - sampling window, IQ
// demodulation and state discrimination, one engine per channel.
//
// A measurement is a Play whose waveform index is 128 or more.  When the queue
// sequencer starts such an entry, each channel in start_ch opens a sampling
// window on its circular buffer: the window begins param[15:0] samples after
// the sample being written at the start, and lasts param[31:16] samples.  The
// engine reads the window one sample per clock as soon as each sample has been
// written, and accumulates
//     I = sum x[k] * cos[k mod DEMOD_LEN],   Q = sum x[k] * sin[k mod DEMOD_LEN]
// with the channel's tables from the REG file.  At the end the state is
//     state = ((wI*I + wQ*Q) >>> 16) > thr      (signed)
// and a result word {count[15:0], 15'b0, state} is queued for
// result-memory address res_base + n, where n counts the channel's
// measurements since res_base was last written and `count` counts all of the
// channel's measurements.  Results leave through one valid/ready port, lowest
// channel first; a result that finds its channel's slot still full is lost
// and sets res_overflow.  A Play below 128 is ignored here.
// Timing: the result is ready 3 cycles after the last window sample was
// written.  busy is high while any window is open.
// Windows set by the instruction's parameters, IQ demodulation and state
// discrimination are the paper's; the parameter encoding, the linear
// discriminator and the result format are this design's own.
module data_process
  import qarch_pkg::*;
#(
  parameter int unsigned N_CH      = 4,
  parameter int unsigned RB_AW     = 10,
  parameter int unsigned DEMOD_LEN = 64,
  parameter int unsigned LW        = $clog2(DEMOD_LEN)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [N_CH-1:0]              start_ch,
  input  logic [7:0]                   id_wave,
  input  logic [31:0]                  id_param,
  output logic                         busy,
  // circular buffers
  input  logic [N_CH-1:0][31:0]        rb_wr_ptr,
  output logic [N_CH-1:0][RB_AW-1:0]   rb_raddr,
  input  logic [N_CH-1:0][15:0]        rb_rdata,
  // REG file
  output logic [N_CH-1:0][LW-1:0]      lut_idx,
  input  logic [N_CH-1:0][15:0]        lut_cos,
  input  logic [N_CH-1:0][15:0]        lut_sin,
  input  logic [N_CH-1:0][15:0]        w_i,
  input  logic [N_CH-1:0][15:0]        w_q,
  input  logic [N_CH-1:0][31:0]        thr,
  input  logic [N_CH-1:0][FMR_AW-1:0]  res_base,
  input  logic [N_CH-1:0]              res_base_wr,
  // results
  output logic                         res_valid,
  output logic [FMR_AW-1:0]            res_addr,
  output logic [31:0]                  res_data,
  input  logic                         res_ready,
  output logic                         res_overflow
);
  wire is_meas = (id_wave >= 8'(MEAS_WAVE_MIN));

  logic [N_CH-1:0]       open_q;     // window being read
  logic [N_CH-1:0]       acc_v;      // a sample arrives from the buffer this cycle
  logic [N_CH-1:0]       fin_q;      // last sample arrives this cycle
  logic [N_CH-1:0]       disc_q;     // accumulation complete: discriminate
  logic [N_CH-1:0]       pend_q;     // result waiting for the output port
  logic [N_CH-1:0][31:0] pos_q;      // next sample number to read
  logic [N_CH-1:0][15:0] left_q;     // samples still to read
  logic [N_CH-1:0][LW-1:0] k_q;      // table index of the next sample
  logic signed [47:0]    acc_i [N_CH];
  logic signed [47:0]    acc_q [N_CH];
  logic [N_CH-1:0][FMR_AW-1:0] shot_q;
  logic [N_CH-1:0][15:0] count_q;
  logic [N_CH-1:0]       state_q;
  logic [N_CH-1:0][FMR_AW-1:0] raddr_q;
  logic [N_CH-1:0][LW-1:0] kd_q;     // table index of the sample arriving

  logic [N_CH-1:0] res_overflow_set;
  logic [N_CH-1:0] avail;
  always_comb begin
    for (int unsigned c = 0; c < N_CH; c++) begin
      avail[c]    = open_q[c] && (left_q[c] != 16'd0) && ($signed(rb_wr_ptr[c] - pos_q[c]) > 0);
      rb_raddr[c] = pos_q[c][RB_AW-1:0];
      lut_idx[c]  = kd_q[c];
    end
  end

  // output port: lowest pending channel
  logic [$clog2(N_CH > 1 ? N_CH : 2)-1:0] osel;
  always_comb begin
    osel = '0;
    for (int c = N_CH-1; c >= 0; c--) if (pend_q[c]) osel = c[$bits(osel)-1:0];
  end
  assign res_valid = (pend_q != '0);
  assign res_addr  = raddr_q[osel];
  assign res_data  = {count_q[osel], 15'd0, state_q[osel]};

  for (genvar c = 0; c < N_CH; c++) begin : g_eng
    logic signed [31:0] pi, pq;
    logic signed [63:0] proj;
    assign pi   = $signed(rb_rdata[c]) * $signed(lut_cos[c]);
    assign pq   = $signed(rb_rdata[c]) * $signed(lut_sin[c]);
    assign proj = (64'(acc_i[c]) * $signed(w_i[c]) + 64'(acc_q[c]) * $signed(w_q[c])) >>> 16;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        open_q[c] <= 1'b0; acc_v[c] <= 1'b0; fin_q[c] <= 1'b0; disc_q[c] <= 1'b0;
        pend_q[c] <= 1'b0; pos_q[c] <= '0; left_q[c] <= '0; k_q[c] <= '0; kd_q[c] <= '0;
        acc_i[c] <= '0; acc_q[c] <= '0; shot_q[c] <= '0; count_q[c] <= '0;
        state_q[c] <= 1'b0; raddr_q[c] <= '0; res_overflow_set[c] <= 1'b0;
      end else begin
        // window control and buffer read
        acc_v[c] <= avail[c];
        fin_q[c] <= avail[c] && (left_q[c] == 16'd1);
        if (start && start_ch[c] && is_meas) begin
          open_q[c] <= (id_param[31:16] != 16'd0);
          pos_q[c]  <= rb_wr_ptr[c] + {16'd0, id_param[15:0]};
          left_q[c] <= id_param[31:16];
          k_q[c]    <= '0;
          acc_i[c]  <= '0;
          acc_q[c]  <= '0;
        end else begin
          if (avail[c]) begin
            pos_q[c]  <= pos_q[c] + 32'd1;
            left_q[c] <= left_q[c] - 16'd1;
            kd_q[c]   <= k_q[c];
            k_q[c]    <= (int'(k_q[c]) == DEMOD_LEN-1) ? '0 : k_q[c] + 1'b1;
            if (left_q[c] == 16'd1) open_q[c] <= 1'b0;
          end
          // accumulate the sample read last cycle
          if (acc_v[c]) begin
            acc_i[c] <= acc_i[c] + 48'(pi);
            acc_q[c] <= acc_q[c] + 48'(pq);
          end
        end
        disc_q[c] <= fin_q[c];
        // discriminate and queue the result
        if (res_valid && res_ready && int'(osel) == c) pend_q[c] <= 1'b0;
        if (res_base_wr[c]) shot_q[c] <= '0;
        if (disc_q[c]) begin
          if (pend_q[c] && !(res_ready && int'(osel) == c)) begin
            res_overflow_set[c] <= 1'b1;
          end else begin
            pend_q[c]  <= 1'b1;
            state_q[c] <= (proj > 64'($signed(thr[c])));
            raddr_q[c] <= res_base[c] + (res_base_wr[c] ? '0 : shot_q[c]);
            shot_q[c]  <= res_base_wr[c] ? FMR_AW'(1) : shot_q[c] + 1'b1;
            count_q[c] <= count_q[c] + 16'd1;
          end
        end
      end
    end
  end

  assign res_overflow = (res_overflow_set != '0);
  assign busy = (open_q != '0) || (acc_v != '0) || (disc_q != '0);
endmodule
