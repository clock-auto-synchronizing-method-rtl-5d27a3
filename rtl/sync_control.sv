// sync_control: synchronization control and TOF clock generation.
//
// The 41.67 MHz TOF clock is the 499.8 MHz RF clock divided by 12.  To give
// the divider a known phase with respect to the beam, two one-shot flip-flops
// build a reset pulse from the BSYNC signal: D2 is set by the BSYNC leading
// edge and D1 by the delayed copy of the same edge.  While D2 is set and D1
// is not, the divider is held in reset, so it restarts on the first RF edge
// after the delayed BSYNC edge.  Both flip-flops keep their data input high,
// so after one pulse they stay set until the controller clears them with
// `arm`; each `arm` pulse therefore yields exactly one divider restart, on
// the next BSYNC.
//
// Interface: rf_clk (RF clock), bsync, bsync_dly (BSYNC after the
// programmable delay line), arm (asynchronous clear of D1 and D2, active
// high), tof_clk (divided clock, duty 1/2), div_rst (the reset pulse).
//
// Timing: during reset the counter holds RESET_COUNT; on each RF edge it
// counts modulo DIV and tof_clk is high for counts DIV/2..DIV-1, so with
// RESET_COUNT = 3 tof_clk rises on the third RF edge after the reset ends.
//
// From the paper: the two flip-flops, their clocks (delayed and undelayed
// BSYNC), the high data inputs and the divide-by-12 with a reset input.  This
// design's choices: the combining gate is an AND of D1's inverted output and
// D2's output (the figure draws the gate but prints no type), the clear
// input driven by the controller, the counter's reset value and the
// position of the clock's high half.
module sync_control #(
  parameter int unsigned DIV         = 12,
  parameter int unsigned RESET_COUNT = 3
) (
  input  logic rf_clk,
  input  logic bsync,
  input  logic bsync_dly,
  input  logic arm,
  output logic tof_clk,
  output logic div_rst
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned CW = $clog2(DIV);

  logic d1_q, d2_q;
  logic [CW-1:0] cnt_q, cnt_nxt;

  // D1: clocked by the delayed BSYNC, data tied high.
  always_ff @(posedge bsync_dly or posedge arm)
    if (arm) d1_q <= 1'b0;
    else     d1_q <= 1'b1;

  // D2: clocked by the undelayed BSYNC, data tied high.
  always_ff @(posedge bsync or posedge arm)
    if (arm) d2_q <= 1'b0;
    else     d2_q <= 1'b1;

  assign div_rst = d2_q & ~d1_q;

  always_comb
    cnt_nxt = (cnt_q >= CW'(DIV - 1)) ? '0 : cnt_q + 1'b1;

  always_ff @(posedge rf_clk or posedge div_rst)
    if (div_rst) begin
      cnt_q   <= CW'(RESET_COUNT);
      tof_clk <= (RESET_COUNT >= DIV / 2);
    end else begin
      cnt_q   <= cnt_nxt;
      tof_clk <= (cnt_nxt >= CW'(DIV / 2));
    end
endmodule
