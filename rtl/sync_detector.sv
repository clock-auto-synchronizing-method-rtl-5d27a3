// sync_detector: synchronization monitor that produces the 2-bit SynFlag.
//
// D3 and D4 turn the 41.67 MHz TOF clock (duty 1/2) into a pulse one RF
// period wide (duty 1/12) with the same phase: D3 is set by the TOF clock
// edge and cleared by D4, which copies D3 on the next RF edge.  The delayed
// BSYNC is shifted through four RF-clocked flip-flops D5..D8 (taps DL1..DL4).
// On the rising edge of the 1/12 pulse, D9 samples DL4 and D10 samples DL3.
// SynFlag = {D10, D9} reads 2'b10 when the delayed BSYNC edge has passed DL3
// but not yet DL4 at that moment, i.e. when it fell into one particular RF
// period (about 2 ns wide) before the TOF clock edge.
//
// Interface: rf_clk, tof_clk, bsync_dly in; syn_flag[1:0] (bit1 = Sync_Flag1
// from D10, bit0 = Sync_Flag0 from D9) and the 1/12 pulse out.
//
// Timing: syn_flag is refreshed on every TOF clock period.  With BSYNC
// repeating at a multiple of the TOF period and a synchronized delay, 2'b10
// appears for one TOF period after each BSYNC leading edge.
//
// From the paper: flip-flop names, which tap feeds which flag, the 1/12
// pulse and the meaning of 2'b10.  This design's choices: D4's output
// clears D3 (the figure shows the feedback but no pin name is printed for
// it), and all chain flip-flops use the rising RF edge; the figure draws a
// small circle at an input of the first chain flip-flop whose meaning is not
// printed and that is not modelled here.
module sync_detector (
  input  logic       rf_clk,
  input  logic       tof_clk,
  input  logic       bsync_dly,
  output logic [1:0] syn_flag,
  output logic       pulse_1_12
);
  timeunit 1ns;
  timeprecision 1ps;

  logic d3_q, d4_q;
  logic [3:0] dl_q;     // dl_q[0] = DL1 ... dl_q[3] = DL4
  logic d9_q, d10_q;

  // D3: set by the TOF clock edge, cleared by D4.
  always_ff @(posedge tof_clk or posedge d4_q)
    if (d4_q) d3_q <= 1'b0;
    else      d3_q <= 1'b1;

  // D4: one RF period later, clear D3.
  always_ff @(posedge rf_clk)
    d4_q <= d3_q;

  // D5..D8: shift register of the delayed BSYNC.
  always_ff @(posedge rf_clk)
    dl_q <= {dl_q[2:0], bsync_dly};

  // D9, D10: sample DL4 and DL3 on the 1/12 pulse.
  always_ff @(posedge d3_q) begin
    d9_q  <= dl_q[3];
    d10_q <= dl_q[2];
  end

  assign syn_flag   = {d10_q, d9_q};
  assign pulse_1_12 = d3_q;
endmodule
