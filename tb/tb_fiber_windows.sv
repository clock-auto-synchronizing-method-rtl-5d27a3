// tb_fiber_windows: two clock modules fed over fibres of different length.
//
// The fibre length sets the phase of BSYNC against the RF clock, and so the
// position of the synchronization window on the delay axis.  Two modules
// share one RF clock; module A sees BSYNC at a phase that puts a window edge
// at code 0x108, module B at one that puts it at 0xb0 (the minima measured
// for the two fibres in the published test).  Each module is started from
// the centre of its published window (0x174 and 0x11d).  The expected
// window is worked out from the stimulus alone, as in tb_clock_module_top:
// a code is good when BSYNC + 3.2 ns + 9 ps * code falls in the same RF
// period as for the initial code.  Checked: both runs end done, minimum,
// maximum and centre within 2 codes of the prediction, and SynFlag reads 10
// after the run.
module tb_fiber_windows;
  timeunit 1ns;
  timeprecision 1ps;
  import clk_sync_pkg::*;

  localparam int STEP_PS  = 9;
  localparam int T0_PS    = 3200;
  localparam int RF_PS    = 2000;
  localparam int BSYNC_PS = 816000;
  localparam int PHI_A    = 95428;    // window edge near code 0x108
  localparam int PHI_B    = 96220;    // window edge near code 0x0b0

  logic rst_n = 1'b1, rf_clk = 1'b0, opt_clk = 1'b0, osc_clk = 1'b0;
  logic [1:0] bsync = '0, bsync_dly;
  delay_t code [2];
  logic [15:0] addr [2], wdata [2], rdata [2];
  logic [1:0] wr = '0, rd = '0;
  logic [1:0] sys_clk;
  logic [1:0] flag [2];
  int checks = 0, failures = 0;

  always #1ns  rf_clk  = ~rf_clk;
  always #12ns opt_clk = ~opt_clk;
  always #6ns  osc_clk = ~osc_clk;

  for (genvar i = 0; i < 2; i++) begin : g_mod
    localparam int PHI = (i == 0) ? PHI_A : PHI_B;
    logic [4:0]  opt_out;
    logic [14:0] pecl_out;

    initial begin
      addr[i] = '0; wdata[i] = '0;
      #(PHI * 1ps);
      forever begin
        bsync[i] = 1'b1;
        #(BSYNC_PS / 2 * 1ps);
        bsync[i] = 1'b0;
        #(BSYNC_PS / 2 * 1ps);
      end
    end

    sy89295_model #(.STEP_PS(STEP_PS), .T0_PS(T0_PS), .JITTER_PS(10)) u_delay (
      .in(bsync[i]), .code(code[i]), .out(bsync_dly[i]));

    clock_module_top u_mod (
      .rst_n(rst_n), .rf_clk(rf_clk), .opt_clk_in(opt_clk), .osc_clk(osc_clk),
      .bsync(bsync[i]), .bsync_dly(bsync_dly[i]), .delay_code(code[i]),
      .bus_addr(addr[i]), .bus_wdata(wdata[i]), .bus_wr(wr[i]), .bus_rd(rd[i]),
      .bus_rdata(rdata[i]), .sys_clk(sys_clk[i]), .opt_out(opt_out), .pecl_out(pecl_out),
      .syn_flag(flag[i]));
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  function automatic int abs_i(input int x);
    return x < 0 ? -x : x;
  endfunction

  // Register access on module i.
  task automatic write(input int i, input logic [15:0] a, input logic [15:0] d);
    @(negedge sys_clk[i]);
    addr[i] = a; wdata[i] = d; wr[i] = 1'b1;
    @(negedge sys_clk[i]);
    wr[i] = 1'b0;
  endtask

  task automatic read(input int i, input logic [15:0] a, output logic [15:0] d);
    @(negedge sys_clk[i]);
    addr[i] = a; rd[i] = 1'b1;
    #1ns d = rdata[i];
    @(negedge sys_clk[i]);
    rd[i] = 1'b0;
  endtask

  task automatic run_fibre(input int i, input int phi, input int init, input string name);
    logic [15:0] v;
    int cmin, cmax, ccen, emin, emax;
    longint e0, r0;
    logic seen;
    write(i, ADDR_INITIAL, 16'(init));
    write(i, ADDR_CTRL, 16'h0001);
    do begin
      repeat (50) @(negedge sys_clk[i]);
      read(i, ADDR_CTRL, v);
    end while (v[0]);
    check(v[1] && !v[2], {name, ": run done"});
    read(i, ADDR_MIN, v);    cmin = int'(v);
    read(i, ADDR_MAX, v);    cmax = int'(v);
    read(i, ADDR_CENTER, v); ccen = int'(v);
    e0   = longint'(phi) + T0_PS + longint'(init) * STEP_PS;
    r0   = ((e0 - 1000 + RF_PS - 1) / RF_PS) * RF_PS + 1000;
    emax = int'((r0 - phi - T0_PS) / STEP_PS);
    emin = int'((r0 - RF_PS - phi - T0_PS) / STEP_PS) + 1;
    $display("%s: found 0x%0h..0x%0h centre 0x%0h, predicted 0x%0h..0x%0h", name, cmin, cmax,
             ccen, emin, emax);
    check(abs_i(cmin - emin) <= 2, {name, ": minimum"});
    check(abs_i(cmax - emax) <= 2, {name, ": maximum"});
    check(abs_i(ccen - (emin + emax) / 2) <= 2, {name, ": centre"});
    seen = 1'b0;
    repeat (3) @(posedge bsync[i]);
    repeat (70) begin
      @(negedge sys_clk[i]);
      if (flag[i] == SYNC_OK) seen = 1'b1;
    end
    check(seen, {name, ": SynFlag 10 after the run"});
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ns rst_n = 1'b0;
    #200ns rst_n = 1'b1;
    #2us;
    fork
      run_fibre(0, PHI_A, 'h174, "fibre A");
      run_fibre(1, PHI_B, 'h11d, "fibre B");
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
