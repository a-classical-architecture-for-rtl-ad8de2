// qarch_pkg: types and constants shared by the control-system RTL.
//
// The quantum instruction pipeline turns CPU loads/stores in a reserved MMIO
// window into IQE instructions ("electronics-level instructions") that are
// broadcast to every AWG and digitizer.  Each broadcast instruction carries a
// partition identifier; a device acts on it only when the identifier is in its
// partition mask.  The trigger that starts playback travels on separate lines.
//
// The MMIO addresses and region sizes follow the example layout of the
// architecture; the field widths and encodings below are this design's own.
// A module that imports the package but uses only some of its constants gets
// lint notes about the unused ones; they are deliberate and stand.
package qarch_pkg;

  // ---- MMIO layout (example layout of the architecture) ----
  localparam logic [31:0] ADDR_TRIGGER = 32'h4000_1000;  // int32 x3: interval, count, mask
  localparam logic [31:0] ADDR_WAIT    = 32'h4000_2000;  // int32
  localparam logic [31:0] ADDR_FMR     = 32'h4000_3000;  // int32[0x1400]
  localparam logic [31:0] ADDR_SQ      = 32'h4001_0000;  // uint8[0x4000]
  localparam logic [31:0] ADDR_TQ      = 32'h4001_4000;  // uint8[0x8000]
  localparam logic [31:0] ADDR_PLAY    = 32'h4001_c000;  // uint8[0x8000]
  localparam logic [31:0] ADDR_APP     = 32'h4002_4000;  // uint8[0x4000]

  localparam int unsigned FMR_WORDS = 32'h1400;
  localparam int unsigned SQ_BYTES  = 32'h4000;
  localparam int unsigned TQ_BYTES  = 32'h8000;
  localparam int unsigned PLAY_BYTES= 32'h8000;
  localparam int unsigned APP_BYTES = 32'h4000;

  localparam int unsigned FMR_AW = 13;         // word address inside the FMR region
  localparam int unsigned PID_W  = 17;         // partition identifier width
  localparam logic [PID_W-1:0] PID_ALL = '1;   // matches every device (used by Wait)

  localparam int unsigned MEAS_WAVE_MIN = 128; // waveform index >= 128: measurement

  // MMIO regions that carry a partition identifier in their byte offset
  typedef enum logic [1:0] {
    REG_SQ   = 2'd0,
    REG_TQ   = 2'd1,
    REG_PLAY = 2'd2,
    REG_APP  = 2'd3
  } region_e;

  // ---- IQE instructions ----
  typedef enum logic [1:0] {
    IQE_NOP  = 2'd0,
    IQE_WAIT = 2'd1,
    IQE_PLAY = 2'd2,
    IQE_MASK = 2'd3   // real-time partition-mask write (see broadcast_parser)
  } iqe_op_e;

  typedef struct packed {
    logic             valid;
    iqe_op_e          op;
    logic [PID_W-1:0] pid;      // partition identifier
    logic [31:0]      operand;  // Play: waveform index in [7:0]; Wait: time in cycles
    logic [31:0]      param;    // Play parameters (digitizer: sampling window)
  } iqe_instr_t;

  // Trigger lines
  typedef struct packed {
    logic        valid;
    logic        last;          // last repetition: devices empty their queues after it
    logic [31:0] mask;          // bit mask of channels
  } trig_t;

  // Sequence-table entry of the IQE driver (one IQE instruction template)
  typedef struct packed {
    iqe_op_e     op;
    logic [29:0] operand;
    logic [31:0] param;
  } seq_entry_t;

  // Measurement result on its way to system RAM
  typedef struct packed {
    logic              valid;
    logic [FMR_AW-1:0] addr;
    logic [31:0]       data;
  } result_t;

endpackage
