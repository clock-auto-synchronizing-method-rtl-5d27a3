// tb_clock_module_top: end-to-end test of one clock module in master mode.
//
// Stimulus: a 2 ns RF clock (500 MHz, standing for 499.8 MHz), a BSYNC
// signal synchronous to it (period 816 ns = 34 TOF periods, high for half),
// the delay line model (about 9 ps per code, 3.2 ns offset, +/-10 ps jitter
// per edge), an 83.3 MHz oscillator and a 41.67 MHz slave clock.  Register
// accesses are made on the falling edge of the module's system clock.
//
// The expected window is worked out from the stimulus alone: after the
// divider is reset at initial code d0, a code d is synchronized when
// BSYNC + 3.2 ns + 9 ps * d falls in the same RF period (between the same
// two RF rising edges) as for d0.  Checked, with every parameter of the
// module at its default:
//   * three runs with initial data 0x100, 0x1a0 and 0x280 (the initial
//     values of the paper's window table) find three windows about 2 ns
//     (222 codes) wide whose minimum, maximum and centre match the
//     prediction within 2 codes and that adjoin one another;
//   * after each run the delayed BSYNC edge sits within 0.1 ns of the
//     middle of its RF period, the TOF clock rises on the third RF edge
//     after it, and SynFlag reads 10 once per BSYNC;
//   * manual operation: a delay written by hand outside the window stops
//     SynFlag 10, the centre written by hand brings it back, and a manual
//     divider reset at the centre keeps it;
//   * clock-mode switching to off-line and slave and back to master;
//   * a run started at a window edge takes the +0x30 retry at least once.
// Each mechanism is counted and a mechanism that never happened is a
// failure.
module tb_clock_module_top;
  timeunit 1ns;
  timeprecision 1ps;
  import clk_sync_pkg::*;

  localparam int STEP_PS   = 9;
  localparam int T0_PS     = 3200;
  localparam int RF_PS     = 2000;
  localparam int BSYNC_PS  = 816000;
  localparam int PHI_PS    = 96328;   // BSYNC phase: a window edge lands near code 0xa4

  logic rst_n = 1'b1, rf_clk = 1'b0, opt_clk_in = 1'b0, osc_clk = 1'b0, bsync = 1'b0;
  logic bsync_dly;
  delay_t delay_code;
  logic [15:0] bus_addr = '0, bus_wdata = '0, bus_rdata;
  logic bus_wr = 1'b0, bus_rd = 1'b0;
  logic sys_clk;
  logic [4:0] opt_out;
  logic [14:0] pecl_out;
  logic [1:0] syn_flag;
  int checks = 0, failures = 0;

  // Mechanism counters.
  int n_runs = 0, n_retry = 0, n_div_reset = 0, n_coarse = 0, n_medium = 0, n_fine = 0;
  int n_manual = 0, n_mode = 0, n_sync10 = 0, n_verify_fail = 0;

  clock_module_top dut (
    .rst_n(rst_n), .rf_clk(rf_clk), .opt_clk_in(opt_clk_in), .osc_clk(osc_clk),
    .bsync(bsync), .bsync_dly(bsync_dly), .delay_code(delay_code),
    .bus_addr(bus_addr), .bus_wdata(bus_wdata), .bus_wr(bus_wr), .bus_rd(bus_rd),
    .bus_rdata(bus_rdata), .sys_clk(sys_clk), .opt_out(opt_out), .pecl_out(pecl_out),
    .syn_flag(syn_flag));

  sy89295_model #(.STEP_PS(STEP_PS), .T0_PS(T0_PS), .JITTER_PS(10)) u_delay (
    .in(bsync), .code(delay_code), .out(bsync_dly));

  always #1ns    rf_clk     = ~rf_clk;      // rising edges at 1, 3, 5 ... ns
  always #12ns   opt_clk_in = ~opt_clk_in;
  always #6ns    osc_clk    = ~osc_clk;

  initial begin
    #(PHI_PS * 1ps);
    forever begin
      bsync = 1'b1;
      #(BSYNC_PS / 2 * 1ps);
      bsync = 1'b0;
      #(BSYNC_PS / 2 * 1ps);
    end
  end

  // Observe the mechanisms.
  delay_t last_code = '0;
  always @(delay_code) begin
    int diff;
    diff = int'(delay_code) - int'(last_code);
    if (diff == 'h30 || diff == -'h30) n_coarse++;
    if (diff == 'h4  || diff == -'h4)  n_medium++;
    if (diff == 'h1  || diff == -'h1)  n_fine++;
    last_code = delay_code;
  end
  always @(posedge dut.u_sync_control.div_rst) n_div_reset++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  task automatic write(input logic [15:0] a, input logic [15:0] d);
    @(negedge sys_clk);
    bus_addr = a; bus_wdata = d; bus_wr = 1'b1;
    @(negedge sys_clk);
    bus_wr = 1'b0;
  endtask

  task automatic read(input logic [15:0] a, output logic [15:0] d);
    @(negedge sys_clk);
    bus_addr = a; bus_rd = 1'b1;
    #1ns d = bus_rdata;
    @(negedge sys_clk);
    bus_rd = 1'b0;
  endtask

  // Time of the delayed BSYNC edge for a code, within the BSYNC period.
  function automatic longint edge_ps(input int code);
    return longint'(PHI_PS) + T0_PS + longint'(code) * STEP_PS;
  endfunction
  // First RF rising edge at or after time t (edges at odd ns).
  function automatic longint rf_after(input longint t);
    longint k;
    k = (t - 1000 + RF_PS - 1) / RF_PS;
    return k * RF_PS + 1000;
  endfunction

  // Watch SynFlag (through the register) for two BSYNC periods.
  task automatic saw_sync10(output logic seen);
    seen = 1'b0;
    @(negedge sys_clk);
    bus_addr = ADDR_SYNFLAG; bus_rd = 1'b1;
    repeat (70) begin
      @(negedge sys_clk);
      if (bus_rdata[1:0] == SYNC_OK) seen = 1'b1;
    end
    bus_rd = 1'b0;
  endtask

  task automatic run_auto(input int init, output int cmin, output int cmax, output int ccen,
                          output logic ok);
    logic [15:0] v;
    write(ADDR_INITIAL, 16'(init));
    write(ADDR_CTRL, 16'h0001);
    do begin
      repeat (50) @(negedge sys_clk);
      read(ADDR_CTRL, v);
    end while (v[0]);
    ok = v[1] && !v[2];
    n_runs++;
    read(ADDR_MIN, v);    cmin = int'(v);
    read(ADDR_MAX, v);    cmax = int'(v);
    read(ADDR_CENTER, v); ccen = int'(v);
    read(ADDR_INITIAL, v);
    if (int'(v) != init) n_retry++;
    $display("run from 0x%0h: initial data now 0x%0h, ok=%0b", init, v, ok);
  endtask

  function automatic int abs_i(input int x);
    return x < 0 ? -x : x;
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int inits[3] = '{'h100, 'h1a0, 'h280};
    int wmin[3], wmax[3];
    int cmin, cmax, ccen, emin, emax;
    logic ok, seen;
    logic [15:0] v;
    longint r0, e;
    realtime t_rise, t_up;

    #1ns rst_n = 1'b0;
    #(200ns) rst_n = 1'b1;
    // First BSYNC after reset restarts the divider at code 0.
    #2us;

    for (int w = 0; w < 3; w++) begin
      run_auto(inits[w], cmin, cmax, ccen, ok);
      // Prediction from the stimulus alone.
      r0   = rf_after(edge_ps(inits[w]));
      emax = int'((r0 - edge_ps(0)) / STEP_PS);
      emin = int'((r0 - RF_PS - edge_ps(0)) / STEP_PS) + 1;
      $display("window %0d: found 0x%0h..0x%0h centre 0x%0h, predicted 0x%0h..0x%0h",
               w + 1, cmin, cmax, ccen, emin, emax);
      check(ok, "run done without error");
      check(abs_i(cmin - emin) <= 2, "minimum as predicted");
      check(abs_i(cmax - emax) <= 2, "maximum as predicted");
      check(abs_i(ccen - (emin + emax) / 2) <= 2, "centre as predicted");
      check(abs_i((cmax - cmin) - 222) <= 4, "window about 2 ns wide");
      check(delay_code == delay_t'(ccen), "delay line left at the centre");
      wmin[w] = cmin; wmax[w] = cmax;
      // Margin: delayed edge near the middle of its RF period.
      e  = edge_ps(ccen);
      r0 = rf_after(e);
      check(abs_i(int'(r0 - e) - RF_PS / 2) <= 100, "delayed edge in the middle of the RF period");
      // TOF clock rises on the third RF edge after the delayed edge.
      repeat (2) @(posedge bsync_dly);
      t_up = $realtime;
      @(posedge sys_clk);
      t_rise = $realtime;
      $display("phase: edge-to-rf %0d ps, edge-to-tof %0d ps", r0 - e, int'((t_rise - t_up) / 1ps));
      check(int'((t_rise - t_up) / 1ps) >= int'(r0 - e) + 2 * RF_PS - 30 &&
            int'((t_rise - t_up) / 1ps) <= int'(r0 - e) + 2 * RF_PS + 30,
            "TOF clock phase follows the delayed BSYNC");
      saw_sync10(seen);
      check(seen, "SynFlag 10 after the run");
      if (seen) n_sync10++;
    end
    check(abs_i(wmin[1] - (wmax[0] + 1)) <= 3, "windows 1 and 2 adjoin");
    check(abs_i(wmin[2] - (wmax[1] + 1)) <= 3, "windows 2 and 3 adjoin");

    // Manual operation.
    write(ADDR_DELAY, 16'(wmax[2] + 40));
    n_manual++;
    check(delay_code == delay_t'(wmax[2] + 40), "manual delay on the delay line");
    saw_sync10(seen);
    check(!seen, "no SynFlag 10 outside the window");
    write(ADDR_DELAY, 16'((wmin[2] + wmax[2]) / 2));
    n_manual++;
    saw_sync10(seen);
    check(seen, "SynFlag 10 back at the centre");
    write(ADDR_CTRL, 16'h0002);
    n_manual++;
    saw_sync10(seen);
    check(seen, "SynFlag 10 after a manual divider reset at the centre");

    // Clock modes.
    write(ADDR_MODE, 16'(MODE_OFFLINE));
    n_mode++;
    read(ADDR_MODE, v);
    check(v[1:0] == MODE_OFFLINE, "off-line mode, registers still reachable");
    @(posedge sys_clk) t_up = $realtime;
    @(posedge sys_clk) t_rise = $realtime;
    check((t_rise - t_up) > 23.9ns && (t_rise - t_up) < 24.1ns, "off-line clock is 83.3 MHz / 2");
    write(ADDR_MODE, 16'(MODE_SLAVE));
    n_mode++;
    read(ADDR_MODE, v);
    check(v[1:0] == MODE_SLAVE, "slave mode");
    check(opt_out == {5{opt_clk_in}} && pecl_out == {15{opt_clk_in}}, "slave clock on the outputs");
    write(ADDR_MODE, 16'(MODE_MASTER));
    n_mode++;
    saw_sync10(seen);
    check(seen, "back in master mode and still synchronized");

    // Retry: start exactly at a window edge until the +0x30 retry is taken.
    for (int k = 0; k < 24 && n_retry == 0; k++) begin
      run_auto(wmin[0] - 1 + (k % 2), cmin, cmax, ccen, ok);
      check(ok || n_retry > 0, "edge start ends done, or in error only after a retry");
    end

    $display("mechanisms: runs=%0d retries=%0d divider_resets=%0d coarse=%0d medium=%0d fine=%0d manual=%0d mode=%0d sync10=%0d",
             n_runs, n_retry, n_div_reset, n_coarse, n_medium, n_fine, n_manual, n_mode, n_sync10);
    check(n_runs > 0 && n_retry > 0 && n_div_reset > 0 && n_coarse > 0 && n_medium > 0 &&
          n_fine > 0 && n_manual > 0 && n_mode > 0 && n_sync10 > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
