// tb_auto_sync_ctrl: checks the window search against a simple board model.
//
// The model answers for the synchronization detector: once per BSYNC period
// (PERIOD clock cycles) it shows SynFlag 2'b10 if the current delay code is
// inside the window [lo, hi], and 2'b00 or 2'b11 otherwise.  Codes within
// `unstable` of either edge answer 2'b10 at random half of the time.
// Checked: with clean edges the run returns exactly lo, hi and (lo+hi)/2
// and ends with the centre on the delay output; the divider is re-armed at
// the start and at the end; with an initial code outside the window the
// run retries once with +0x30 and reports the new initial data, or ends in
// error if that fails too; with noisy edges the edges found lie within the
// unstable bands and the centre is within 3 codes of the true centre; a
// window near the top of the code range ends in error instead of wrapping.
module tb_auto_sync_ctrl;
  timeunit 1ns;
  timeprecision 1ps;
  import clk_sync_pkg::*;

  localparam int PERIOD = 8;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  delay_t init_delay = '0, delay_code;
  logic [1:0] syn_flag;
  logic div_arm, busy, done, error;
  sync_result_t result;
  int checks = 0, failures = 0;
  int lo = 0, hi = 0, unstable = 0;
  int phase = 0, arms = 0;

  auto_sync_ctrl #(.SETTLE_CYCLES(2), .TEST_CYCLES(PERIOD), .RESET_WAIT(PERIOD)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .init_delay(init_delay), .syn_flag(syn_flag),
    .delay_code(delay_code), .div_arm(div_arm), .busy(busy), .done(done), .error(error),
    .result(result));

  always #12ns clk = ~clk;

  // Board model.
  always_ff @(posedge clk) begin
    int d;
    phase <= (phase == PERIOD - 1) ? 0 : phase + 1;
    d = int'(delay_code);
    if (phase != 0)                               syn_flag <= 2'b00;
    else if (d >= lo + unstable && d <= hi - unstable) syn_flag <= 2'b10;
    else if (d >= lo - unstable && d <= hi + unstable) syn_flag <= ($urandom_range(1) != 0) ? 2'b10 : 2'b11;
    else                                          syn_flag <= (d < lo) ? 2'b00 : 2'b11;
  end

  always @(posedge clk) if (div_arm) arms++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  task automatic run(input int init, input int wlo, input int whi, input int u);
    lo = wlo; hi = whi; unstable = u;
    init_delay = delay_t'(init);
    @(negedge clk);
    arms  = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (!busy);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    syn_flag = 2'b00;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. Clean window, Table 1 fibre A values.
    run(16'h140, 16'h108, 16'h1e0, 0);
    check(done && !error, "clean run done");
    check(result.minimum == 10'h108, "clean minimum");
    check(result.maximum == 10'h1e0, "clean maximum");
    check(result.center == 10'h174, "clean centre (0x108+0x1e0)/2 = 0x174");
    check(delay_code == 10'h174, "delay left at centre");
    check(arms == 2, "divider armed at start and end");
    check(result.initial_used == 10'h140, "initial data unchanged");

    // 2. Clean window, fibre B values (0xb0..0x18b, centre 0x11d).
    run(16'h100, 16'h0b0, 16'h18b, 0);
    check(done && result.center == 10'h11d && result.minimum == 10'h0b0 &&
          result.maximum == 10'h18b, "fibre B window");

    // 3. Initial data just below the window: one retry with +0x30.
    run(16'h0e0, 16'h0f0, 16'h1c0, 0);
    check(done && !error, "retry succeeds");
    check(result.initial_used == 10'h110, "initial data moved by 0x30");
    check(result.minimum == 10'h0f0 && result.maximum == 10'h1c0, "retry window");
    check(arms == 3, "divider armed for the retry too");

    // 4. Initial data far from the window: error after the retry.
    run(16'h010, 16'h200, 16'h2c0, 0);
    check(error && !done, "error when the retry fails as well");

    // 5. Noisy edges.
    for (int k = 0; k < 4; k++) begin
      int wl, wh;
      wl = 16'h178 + k * 40;
      wh = wl + 16'hd6;
      run((wl + wh) / 2, wl, wh, 3);
      check(done && !error, "noisy run done");
      check(int'(result.maximum) >= wh - 3 && int'(result.maximum) <= wh + 3, "noisy maximum in band");
      check(int'(result.minimum) >= wl - 3 && int'(result.minimum) <= wl + 3, "noisy minimum in band");
      check(int'(result.center) >= (wl + wh) / 2 - 3 && int'(result.center) <= (wl + wh) / 2 + 3,
            "noisy centre near true centre");
    end

    // 6. Window touching the top of the code range.
    run(16'h3f0, 16'h3a0, 16'h3ff, 0);
    check(error, "error instead of stepping past code 0x3ff");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
