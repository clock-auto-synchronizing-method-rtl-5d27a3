// sy89295_model: behavioural model of the programmable delay line on BSYNC.
// Not synthesizable; used only by testbenches.
//
// The output copies the input after T0_PS + code * STEP_PS picoseconds
// (about 9 ps per step for the part used on the board) plus a random
// jitter, drawn per edge, uniform in [-JITTER_PS, +JITTER_PS].  The jitter
// makes the edges of the synchronization window unstable over a few codes,
// as on the real board.  The delay is a transport delay: every input edge is
// reproduced.
module sy89295_model #(
  parameter int STEP_PS   = 9,
  parameter int T0_PS     = 3200,
  parameter int JITTER_PS = 0
) (
  input  logic       in,
  input  logic [9:0] code,
  output logic       out
);
  timeunit 1ns;
  timeprecision 1ps;

  int base_ps;

  initial out = 1'b0;

  always_comb base_ps = T0_PS + int'(code) * STEP_PS;

  always @(in) begin
    int d;
    d = base_ps;
    if (JITTER_PS > 0) d += int'($urandom_range(2 * JITTER_PS)) - JITTER_PS;
    fork
      begin
        automatic logic v  = in;
        automatic int   dd = d;
        #(dd * 1ps) out = v;
      end
    join_none
  end
endmodule
