// clock_module_top: one VME clock module of the end-cap TOF clock system.
//
// The module turns the accelerator's RF clock into the 41.67 MHz TOF clock,
// fans it out to 20 channels, and keeps its phase locked to the beam: the
// control FPGA steers an external programmable delay line on the BSYNC
// signal, watches the synchronization flag of the detector and finds the
// centre of the 2 ns window in which the divider phase is stable.
//
// Blocks and connections:
//   sync_control   BSYNC + delayed BSYNC -> divider reset; RF/12 -> TOF clock
//   clock_fanout   TOF clock / optical slave clock / oscillator/2 -> sys_clk
//                  and the 5 optical + 15 electrical outputs
//   sync_detector  RF clock, sys_clk, delayed BSYNC -> SynFlag[1:0]
//   auto_sync_ctrl window search (runs on sys_clk)
//   sync_regs      crate-bus registers, manual operation, clock mode
//
// Outside this module: the optical receivers, the delay line chip (its
// 10-bit code goes out on delay_code, the delayed BSYNC comes back on
// bsync_dly), the 83.3 MHz oscillator and the crate-bus interface, which
// presents single-cycle register accesses on bus_*.
//
// The control logic is clocked by sys_clk, the same clock the detector's
// flags are synchronous to.  A divider reset stretches one sys_clk period
// by at most the delay of the delay line.  rst_n is asynchronous; while it
// is low the divider's one-shot reset flip-flops are held clear.
//
// From the paper: the blocks, the signals between them and the clock
// sources.  This design's choices: the FPGA clock, the reset and the bus.
module clock_module_top
  import clk_sync_pkg::*;
#(
  parameter int unsigned SETTLE_CYCLES = 4,
  parameter int unsigned TEST_CYCLES   = 64,
  parameter int unsigned RESET_WAIT    = 64
) (
  input  logic         rst_n,
  input  logic         rf_clk,      // 499.8 MHz RF clock (optical receiver)
  input  logic         opt_clk_in,  // 41.67 MHz from the master (slave mode)
  input  logic         osc_clk,     // 83.3 MHz on-board oscillator
  input  logic         bsync,       // beam synchronization signal
  input  logic         bsync_dly,   // BSYNC after the external delay line
  output delay_t       delay_code,  // to the external delay line
  input  logic [15:0]  bus_addr,
  input  logic [15:0]  bus_wdata,
  input  logic         bus_wr,
  input  logic         bus_rd,
  output logic [15:0]  bus_rdata,
  output logic         sys_clk,
  output logic [4:0]   opt_out,
  output logic [14:0]  pecl_out,
  output logic [1:0]   syn_flag
);
  timeunit 1ns;
  timeprecision 1ps;

  logic         tof_clk;
  logic         div_arm, start, auto_arm, busy, done, error;
  delay_t       init_delay, auto_delay;
  sync_result_t result;
  clk_mode_e    mode;

  sync_control #(.DIV(12), .RESET_COUNT(3)) u_sync_control (
    .rf_clk    (rf_clk),
    .bsync     (bsync),
    .bsync_dly (bsync_dly),
    .arm       (div_arm | ~rst_n),
    .tof_clk   (tof_clk),
    .div_rst   ()
  );

  clock_fanout u_clock_fanout (
    .rf_div_clk (tof_clk),
    .opt_clk    (opt_clk_in),
    .osc_clk    (osc_clk),
    .mode       (mode),
    .sys_clk    (sys_clk),
    .opt_out    (opt_out),
    .pecl_out   (pecl_out)
  );

  sync_detector u_sync_detector (
    .rf_clk     (rf_clk),
    .tof_clk    (sys_clk),
    .bsync_dly  (bsync_dly),
    .syn_flag   (syn_flag),
    .pulse_1_12 ()
  );

  auto_sync_ctrl #(
    .SETTLE_CYCLES (SETTLE_CYCLES),
    .TEST_CYCLES   (TEST_CYCLES),
    .RESET_WAIT    (RESET_WAIT)
  ) u_auto_sync_ctrl (
    .clk        (sys_clk),
    .rst_n      (rst_n),
    .start      (start),
    .init_delay (init_delay),
    .syn_flag   (syn_flag),
    .delay_code (auto_delay),
    .div_arm    (auto_arm),
    .busy       (busy),
    .done       (done),
    .error      (error),
    .result     (result)
  );

  sync_regs u_sync_regs (
    .clk        (sys_clk),
    .rst_n      (rst_n),
    .addr       (bus_addr),
    .wdata      (bus_wdata),
    .wr         (bus_wr),
    .rd         (bus_rd),
    .rdata      (bus_rdata),
    .start      (start),
    .init_delay (init_delay),
    .auto_delay (auto_delay),
    .auto_arm   (auto_arm),
    .busy       (busy),
    .done       (done),
    .error      (error),
    .result     (result),
    .syn_flag   (syn_flag),
    .delay_code (delay_code),
    .div_arm    (div_arm),
    .mode       (mode)
  );
endmodule
