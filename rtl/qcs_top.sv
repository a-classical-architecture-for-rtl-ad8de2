// qcs_top: the digital part of the classical control system of a
// superconducting quantum computer - one main control unit's IQE driver and
// result memory, the star-like broadcast, and the AWGs and digitizers of a
// chassis.
//
//   CPU (outside) --MMIO--> iqe_driver --{IQE instruction, trigger}--> star_tree
//        ^                      |                                     |  |
//        |                 system_ram <-- result_arbiter <-- digitizer_unit x N_DIG
//        |                                                  awg_unit x N_AWG --> DAC ports
//   instr_ram (program memory, port brought out)
//   PXIe command stream --> every unit's command parser (slot 0: driver,
//                           1..N_AWG: AWGs, then the digitizers)
//
// A quantum program on the CPU stores gate indices to addresses that name
// qubit groups; the driver turns each store into a few IQE instructions
// tagged with a partition identifier and broadcasts them; each device keeps
// those of its partitions in its queue; a trigger store starts all devices in
// the same cycle, possibly repeated; digitizers write the measured states to
// system RAM, where fmr loads read them.
// The CPU, PXIe, clocking, DACs and ADCs are outside this RTL: their signals
// are the ports.  One clock domain; asynchronous active-low reset.
// Latency from a trigger store being accepted to the first DAC sample:
// 2 (driver) + star latency (2 for one chassis) + 3 + Queue_delay[0] cycles.
module qcs_top
  import qarch_pkg::*;
#(
  parameter int unsigned N_AWG  = 8,
  parameter int unsigned N_DIG  = 2,
  parameter int unsigned FANOUT = 10
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // CPU MMIO port
  input  logic                            mmio_valid,
  input  logic                            mmio_we,
  input  logic [1:0]                      mmio_size,
  input  logic [31:0]                     mmio_addr,
  input  logic [31:0]                     mmio_wdata,
  output logic                            mmio_ready,
  output logic                            mmio_rvalid,
  output logic [31:0]                     mmio_rdata,
  // CPU instruction memory port
  input  logic                            imem_en,
  input  logic                            imem_we,
  input  logic [13:0]                     imem_addr,
  input  logic [31:0]                     imem_wdata,
  output logic [31:0]                     imem_rdata,
  // PXIe configuration commands
  input  logic                            cmd_valid,
  input  logic [31:0]                     cmd_data,
  // converters
  output logic [N_AWG-1:0][3:0][15:0]     dac_data,
  output logic [N_AWG-1:0][3:0]           dac_valid,
  input  logic [N_DIG-1:0][3:0][15:0]     adc_data,
  // status
  output logic [N_AWG+N_DIG-1:0][15:0]    dev_rounds,
  output logic [N_AWG+N_DIG-1:0]          dev_overflow,
  output logic [N_AWG+N_DIG-1:0][15:0]    dev_missed,
  output logic [N_DIG-1:0]                dig_res_overflow,
  output logic [N_AWG+N_DIG:0]            cmd_err,      // bit 0 driver, then devices
  output logic                            trig_busy,
  output logic [15:0]                     drv_err_count
);
  localparam int unsigned N_DEV = N_AWG + N_DIG;
  localparam int unsigned BW    = $bits(trig_t) + $bits(iqe_instr_t);

  // ---- command stream, registered once and shared ----
  logic        cmd_v_q;
  logic [31:0] cmd_d_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin cmd_v_q <= 1'b0; cmd_d_q <= '0; end
    else        begin cmd_v_q <= cmd_valid; cmd_d_q <= cmd_data; end
  end

  // ---- main control unit ----
  logic [FMR_AW-1:0] ram_raddr;
  logic [31:0]       ram_rdata;
  iqe_instr_t        iqe;
  trig_t             trig;
  iqe_driver u_drv (
    .clk, .rst_n, .slot_id(8'd0), .cmd_valid(cmd_v_q), .cmd_data(cmd_d_q),
    .mmio_valid, .mmio_we, .mmio_size, .mmio_addr, .mmio_wdata,
    .mmio_ready, .mmio_rvalid, .mmio_rdata, .ram_raddr, .ram_rdata,
    .iqe, .trig, .trig_busy, .err_count(drv_err_count), .cmd_err(cmd_err[0]));

  logic              res_we;
  logic [FMR_AW-1:0] res_waddr;
  logic [31:0]       res_wdata;
  system_ram u_sram (.clk, .raddr(ram_raddr), .rdata(ram_rdata),
                     .we(res_we), .waddr(res_waddr), .wdata(res_wdata));

  instr_ram #(.WORDS(16384)) u_iram (.clk, .en(imem_en), .we(imem_we), .addr(imem_addr),
                                     .wdata(imem_wdata), .rdata(imem_rdata));

  // ---- star-like broadcast ----
  logic [N_DEV-1:0][BW-1:0] bcast;
  star_tree #(.W(BW), .N_OUT(N_DEV), .FANOUT(FANOUT)) u_star (
    .clk, .rst_n, .din({trig, iqe}), .dout(bcast));

  // ---- AWGs ----
  for (genvar a = 0; a < N_AWG; a++) begin : g_awg
    trig_t      t;
    iqe_instr_t i;
    assign {t, i} = bcast[a];
    awg_unit u_awg (
      .clk, .rst_n, .slot_id(8'(1 + a)), .cmd_valid(cmd_v_q), .cmd_data(cmd_d_q),
      .iqe(i), .trig(t), .dac_data(dac_data[a]), .dac_valid(dac_valid[a]),
      .overflow(dev_overflow[a]), .cmd_err(cmd_err[1 + a]), .rounds(dev_rounds[a]),
      .missed(dev_missed[a]));
  end

  // ---- digitizers and the result return path ----
  logic [N_DIG-1:0]             r_valid, r_ready;
  logic [N_DIG-1:0][FMR_AW-1:0] r_addr;
  logic [N_DIG-1:0][31:0]       r_data;
  for (genvar d = 0; d < N_DIG; d++) begin : g_dig
    trig_t      t;
    iqe_instr_t i;
    assign {t, i} = bcast[N_AWG + d];
    digitizer_unit u_dig (
      .clk, .rst_n, .slot_id(8'(1 + N_AWG + d)), .cmd_valid(cmd_v_q), .cmd_data(cmd_d_q),
      .iqe(i), .trig(t), .adc_data(adc_data[d]),
      .res_valid(r_valid[d]), .res_addr(r_addr[d]), .res_data(r_data[d]), .res_ready(r_ready[d]),
      .overflow(dev_overflow[N_AWG + d]), .res_overflow(dig_res_overflow[d]),
      .cmd_err(cmd_err[1 + N_AWG + d]), .rounds(dev_rounds[N_AWG + d]),
      .missed(dev_missed[N_AWG + d]));
  end

  result_arbiter #(.N(N_DIG)) u_arb (
    .clk, .rst_n, .in_valid(r_valid), .in_addr(r_addr), .in_data(r_data), .in_ready(r_ready),
    .out_valid(res_we), .out_addr(res_waddr), .out_data(res_wdata));
endmodule
