// pulse_generator: the waveform player of an AWG.
//
// Each of the N_CH channels has its own waveform memory (2**WAVE_AW samples of
// SAMPLE_W bits, loaded through the REG file) and a playback engine.  When
// the queue sequencer starts an entry, the entry's waveform index is looked up
// in the Mapping table ({start, length}) and every channel in start_ch begins
// to stream that memory range, one sample per clock, to its DAC port.  A
// channel that is restarted while playing switches to the new waveform.
// Timing: the first sample is on dac_data one cycle after `start`
// (synchronous memory read); dac_valid marks the samples of a waveform, and
// dac_data is 0 between waveforms.  Channels started by the same entry stay
// sample-aligned.
// Playing stored waveforms on trigger is the paper's; memory sizes, the
// Mapping format and the restart rule are this design's own.
module pulse_generator
  import qarch_pkg::*;
#(
  parameter int unsigned N_CH     = 4,
  parameter int unsigned WAVE_AW  = 10,
  parameter int unsigned SAMPLE_W = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // waveform memory load
  input  logic                           wave_we,
  input  logic [1:0]                     wave_ch,
  input  logic [WAVE_AW-1:0]             wave_addr,
  input  logic [SAMPLE_W-1:0]            wave_data,
  // start from the sequencer, with the Mapping entry of the waveform
  input  logic                           start,
  input  logic [N_CH-1:0]                start_ch,
  input  logic [WAVE_AW-1:0]             map_start,
  input  logic [WAVE_AW:0]               map_len,
  output logic                           busy,
  // DAC sample ports
  output logic [N_CH-1:0][SAMPLE_W-1:0]  dac_data,
  output logic [N_CH-1:0]                dac_valid
);
  logic [WAVE_AW-1:0]  ptr  [N_CH];
  logic [WAVE_AW:0]    left [N_CH];
  logic [N_CH-1:0]     run;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [SAMPLE_W-1:0] wmem [2**WAVE_AW];   // this channel's waveform memory
    always_ff @(posedge clk) begin
      if (wave_we && int'(wave_ch) == c) wmem[wave_addr] <= wave_data;
      dac_data[c] <= run[c] ? wmem[ptr[c]] : '0;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ptr[c] <= '0; left[c] <= '0; dac_valid[c] <= 1'b0;
      end else begin
        dac_valid[c] <= run[c];
        if (start && start_ch[c]) begin
          ptr[c]  <= map_start;
          left[c] <= map_len;
        end else if (run[c]) begin
          ptr[c]  <= ptr[c] + 1'b1;
          left[c] <= left[c] - 1'b1;
        end
      end
    end
    assign run[c] = (left[c] != '0);
  end

  assign busy = (run != '0) || (dac_valid != '0);
endmodule
