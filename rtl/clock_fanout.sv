// clock_fanout: clock source selection and fan-out of one clock module.
//
// A module works in one of three modes.  As master its system clock is the
// 499.8 MHz RF clock divided by 12 on the board; as slave it is the
// 41.67 MHz clock received over fibre from the master; off-line it is the
// on-board 83.3 MHz oscillator divided by 2.  The selected clock is copied
// to 20 outputs: 5 that drive optical transmitters (trigger system and
// slave modules) and 15 electrical (LVPECL) outputs for the other modules of
// the crate.  sys_clk is the same clock for on-board use (control FPGA and
// synchronization detector).
//
// Interface: rf_div_clk, opt_clk, osc_clk, mode in; sys_clk, opt_out[4:0],
// pecl_out[14:0] out.  Timing: the outputs follow the selected input with no
// register in the path; only the divide-by-2 of the oscillator is a
// flip-flop.  The selection is a plain multiplexer, so the mode must only be
// changed while the clock it drives is not in use.
//
// From the paper: the three sources and their frequencies, the split into 5
// optical and 15 electrical outputs, and the divide-by-2 on the oscillator
// path.  This design's choices: the mode encoding, and that an unused code
// selects master mode.
module clock_fanout
  import clk_sync_pkg::*;
#(
  parameter int unsigned N_OPTICAL = 5,
  parameter int unsigned N_PECL    = 15
) (
  input  logic                 rf_div_clk,
  input  logic                 opt_clk,
  input  logic                 osc_clk,
  input  clk_mode_e            mode,
  output logic                 sys_clk,
  output logic [N_OPTICAL-1:0] opt_out,
  output logic [N_PECL-1:0]    pecl_out
);
  timeunit 1ns;
  timeprecision 1ps;

  logic osc_half_q;   // a toggle: any start value is a valid phase

  // Divide the 83.3 MHz oscillator by 2.
  always_ff @(posedge osc_clk)
    osc_half_q <= ~osc_half_q;

  always_comb
    unique case (mode)
      MODE_SLAVE:   sys_clk = opt_clk;
      MODE_OFFLINE: sys_clk = osc_half_q;
      default:      sys_clk = rf_div_clk;
    endcase

  assign opt_out  = {N_OPTICAL{sys_clk}};
  assign pecl_out = {N_PECL{sys_clk}};
endmodule
