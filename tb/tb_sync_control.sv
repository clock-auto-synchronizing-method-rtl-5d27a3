// tb_sync_control: checks the divide-by-12 and its BSYNC-driven reset.
//
// An RF clock of 2 ns drives the divider.  The test checks that the TOF
// clock has a 12-RF-period cycle with 6 high periods, that an arm pulse
// followed by a BSYNC edge produces exactly one reset pulse lasting from the
// BSYNC edge to the delayed BSYNC edge, that tof_clk then rises on the
// third RF edge after the delayed edge, and that with no new arm a further
// BSYNC edge does not disturb the divider.
module tb_sync_control;
  timeunit 1ns;
  timeprecision 1ps;

  logic rf_clk = 1'b0, bsync = 1'b0, bsync_dly = 1'b0, arm = 1'b0;
  logic tof_clk, div_rst;
  int checks = 0, failures = 0;

  sync_control dut (.rf_clk(rf_clk), .bsync(bsync), .bsync_dly(bsync_dly), .arm(arm),
                    .tof_clk(tof_clk), .div_rst(div_rst));

  always #1ns rf_clk = ~rf_clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // Count RF edges between tof_clk rising edges and high periods.
  realtime last_rise = 0;
  int rises = 0;
  always @(posedge tof_clk) begin
    rises++;
    last_rise = $realtime;
  end

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t_b, t_rst_rise, t_rst_fall, t_rise, r1, r2;
    int hi;
    #0.5ns arm = 1'b1;
    #4.5ns arm = 1'b0;
    // Free running: period 24 ns, 12 RF periods.
    repeat (3) @(posedge tof_clk);
    r1 = $realtime;
    @(posedge tof_clk);
    r2 = $realtime;
    check((r2 - r1) == 24ns, "TOF clock period is 12 RF periods");
    hi = 0;
    repeat (12) begin
      @(posedge rf_clk);
      #0.1ns;
      if (tof_clk) hi++;
    end
    check(hi == 6, "TOF clock high for 6 of 12 RF periods");

    // Arm, then BSYNC at an arbitrary phase, delayed copy 5.3 ns later.
    @(posedge rf_clk);
    arm = 1'b1;
    #3ns arm = 1'b0;
    #10.7ns;
    check(!div_rst, "no reset before BSYNC");
    t_b = $realtime;
    bsync = 1'b1;
    #0.01ns;
    check(div_rst, "reset starts on BSYNC edge");
    #5.29ns;
    check(div_rst, "reset held until the delayed edge");
    bsync_dly = 1'b1;
    #0.01ns;
    check(!div_rst, "reset ends on the delayed edge");
    t_rst_fall = $realtime;
    // The first RF edge after the delayed edge is the next whole-ns odd edge.
    @(posedge tof_clk);
    t_rise = $realtime;
    // rf posedges occur at odd ns (1,3,5...): find first after t_rst_fall.
    begin
      realtime first_edge;
      first_edge = $ceil((t_rst_fall - 1ns) / 2ns) * 2ns + 1ns;
      check(t_rise == first_edge + 4ns, "tof_clk rises on the third RF edge after release");
    end
    // Divider keeps running with the new phase.
    @(posedge tof_clk);
    check(($realtime - t_rise) == 24ns, "period after restart");

    // A second BSYNC without re-arming does nothing.
    bsync = 1'b0; bsync_dly = 1'b0;
    #40ns;
    bsync = 1'b1;
    #0.01ns;
    check(!div_rst, "no reset without arm");
    #5ns bsync_dly = 1'b1;
    r1 = last_rise;
    repeat (2) @(posedge tof_clk);
    check((($realtime - t_rise) / 24ns) == $floor(($realtime - t_rise) / 24ns),
          "phase unchanged without arm");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
