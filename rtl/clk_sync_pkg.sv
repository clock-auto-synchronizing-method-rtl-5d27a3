// clk_sync_pkg: constants and types shared by the clock-module RTL.
//
// The BSYNC delay line is steered by a 10-bit code.  The window search walks
// that code in three step sizes (0x30 coarse, 0x4 medium, 0x1 fine) and
// accepts a window edge only after 8 repeated good tests; the detector's
// two-bit flag reads 2'b10 when the delayed BSYNC edge falls in the wanted
// RF period.  These numbers follow the paper's flowchart.  The register
// addresses 0xf040 (initial), 0xf050 (centre), 0xf0c0 (minimum) and 0xf0d0
// (maximum) are the paper's; the other addresses and the clock-mode encoding
// are this design's own choice.
package clk_sync_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DELAY_W = 10;
  typedef logic [DELAY_W-1:0] delay_t;

  localparam delay_t STEP_COARSE  = 10'h030;
  localparam delay_t STEP_MEDIUM  = 10'h004;
  localparam delay_t STEP_FINE    = 10'h001;
  localparam int unsigned STABLE_TESTS = 8;

  // SynFlag = {Sync_Flag1, Sync_Flag0}; 2'b10 means synchronized.
  localparam logic [1:0] SYNC_OK = 2'b10;

  // Clock source of the fan-out (master / slave / off-line).
  typedef enum logic [1:0] {
    MODE_MASTER  = 2'd0,   // RF 499.8 MHz divided by 12
    MODE_SLAVE   = 2'd1,   // 41.67 MHz optical clock from the master module
    MODE_OFFLINE = 2'd2    // on-board 83.3 MHz oscillator divided by 2
  } clk_mode_e;

  // Register map, 16-bit addresses, 16-bit data.
  localparam logic [15:0] ADDR_CTRL    = 16'hf000; // W: bit0 start, bit1 divider reset; R: status
  localparam logic [15:0] ADDR_MODE    = 16'hf010; // R/W: clock source mode
  localparam logic [15:0] ADDR_SYNFLAG = 16'hf020; // R: current SynFlag
  localparam logic [15:0] ADDR_DELAY   = 16'hf030; // W: manual delay code; R: code driven to the delay line
  localparam logic [15:0] ADDR_INITIAL = 16'hf040; // R/W: initial delay data
  localparam logic [15:0] ADDR_CENTER  = 16'hf050; // R: window centre
  localparam logic [15:0] ADDR_MIN     = 16'hf0c0; // R: window minimum
  localparam logic [15:0] ADDR_MAX     = 16'hf0d0; // R: window maximum

  // Result of one automatic synchronization run.
  typedef struct packed {
    delay_t center;
    delay_t minimum;
    delay_t maximum;
    delay_t initial_used;
  } sync_result_t;
endpackage
