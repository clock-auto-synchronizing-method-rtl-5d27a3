// sync_regs: register file of the clock module's control FPGA.
//
// The crate computer reaches the synchronization logic through 16-bit
// registers.  It can start the automatic window search and read back the
// initial data (0xf040), centre (0xf050), minimum (0xf0c0) and maximum
// (0xf0d0), or work by hand as before: write a delay code, reset the
// divider, and read the current SynFlag.  The register also selects the
// clock source (master, slave or off-line mode).
//
// Map (see clk_sync_pkg):
//   0xf000 CTRL    W: bit0 starts a run, bit1 re-arms the divider reset.
//                  R: {13'b0, error, done, busy}
//   0xf010 MODE    R/W: bits[1:0] clock source mode, reset = master
//   0xf020 SYNFLAG R: bits[1:0] SynFlag (registered)
//   0xf030 DELAY   W: manual delay code (takes over the delay line)
//                  R: code currently driven to the delay line
//   0xf040 INITIAL R/W: initial delay data, reset 0x100; a run writes back
//                  the initial data it finally used
//   0xf050 CENTER, 0xf0c0 MIN, 0xf0d0 MAX  R: last run's result
//
// Bus: a simple synchronous slave.  wr writes wdata to addr on the clock
// edge; rd with addr gives rdata combinationally in the same cycle.  The
// crate-bus protocol itself (VME64x) sits in front of this and is not part
// of it.  A manual delay write selects the manual code for the delay line
// until the next run starts; the result of a finished run is driven from the
// controller's own delay output, which then holds the centre.
//
// From the paper: the four addresses and their meaning, start by register
// access, and keeping manual delay setting and detection.  This design's
// choices: all other addresses and bit positions, the bus, and the reset
// value of the initial data (0x100, the first initial value in the paper's
// window table).
module sync_regs
  import clk_sync_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // register bus
  input  logic [15:0]  addr,
  input  logic [15:0]  wdata,
  input  logic         wr,
  input  logic         rd,
  output logic [15:0]  rdata,
  // to / from the automatic synchronization controller
  output logic         start,
  output delay_t       init_delay,
  input  delay_t       auto_delay,
  input  logic         auto_arm,
  input  logic         busy,
  input  logic         done,
  input  logic         error,
  input  sync_result_t result,
  // board side
  input  logic [1:0]   syn_flag,
  output delay_t       delay_code,
  output logic         div_arm,
  output clk_mode_e    mode
);
  timeunit 1ns;
  timeprecision 1ps;

  delay_t    init_q, manual_q;
  logic      manual_sel_q, start_q, man_arm_q, done_d;
  logic [1:0] flag_q;
  clk_mode_e mode_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      init_q       <= 10'h100;
      manual_q     <= '0;
      manual_sel_q <= 1'b0;
      start_q      <= 1'b0;
      man_arm_q    <= 1'b0;
      mode_q       <= MODE_MASTER;
      flag_q       <= 2'b00;
      done_d       <= 1'b0;
    end else begin
      start_q   <= 1'b0;
      man_arm_q <= 1'b0;
      flag_q    <= syn_flag;
      done_d    <= done;
      if (wr) begin
        unique case (addr)
          ADDR_CTRL: begin
            if (wdata[0] && !busy) begin
              start_q      <= 1'b1;
              manual_sel_q <= 1'b0;
            end
            man_arm_q <= wdata[1];
          end
          ADDR_MODE:    mode_q <= clk_mode_e'(wdata[1:0]);
          ADDR_DELAY: begin
            manual_q     <= wdata[DELAY_W-1:0];
            manual_sel_q <= 1'b1;
          end
          ADDR_INITIAL: init_q <= wdata[DELAY_W-1:0];
          default: ;
        endcase
      end
      // The run may have moved the initial data (retry with +0x30).
      if (done && !done_d) init_q <= result.initial_used;
    end

  always_comb begin
    rdata = '0;
    if (rd) begin
      unique case (addr)
        ADDR_CTRL:    rdata = {13'b0, error, done, busy};
        ADDR_MODE:    rdata = {14'b0, mode_q};
        ADDR_SYNFLAG: rdata = {14'b0, flag_q};
        ADDR_DELAY:   rdata = {6'b0, delay_code};
        ADDR_INITIAL: rdata = {6'b0, init_q};
        ADDR_CENTER:  rdata = {6'b0, result.center};
        ADDR_MIN:     rdata = {6'b0, result.minimum};
        ADDR_MAX:     rdata = {6'b0, result.maximum};
        default:      rdata = '0;
      endcase
    end
  end

  assign start      = start_q;
  assign init_delay = init_q;
  assign delay_code = (manual_sel_q && !busy) ? manual_q : auto_delay;
  assign div_arm    = auto_arm | man_arm_q;
  assign mode       = mode_q;

  // One bus access at a time.
  a_no_rd_wr: assert property (@(posedge clk) disable iff (!rst_n) !(rd && wr));
endmodule
