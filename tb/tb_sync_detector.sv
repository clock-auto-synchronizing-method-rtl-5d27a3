// tb_sync_detector: checks the 1/12 pulse and the SynFlag window.
//
// The testbench makes its own TOF clock from the 2 ns RF clock (a counter,
// high for 6 of 12 periods).  It checks that the 1/12 pulse is one RF period
// wide and repeats every TOF period, then places the delayed BSYNC edge at
// offsets from -10 ns to +2 ns around a TOF clock edge T and checks that
// SynFlag shows 2'b10 on the next TOF edges exactly when the edge lies in (T-6 ns, T-4 ns]: the
// edge must reach tap DL3 (third RF edge) but not DL4 (fourth) by T.
module tb_sync_detector;
  timeunit 1ns;
  timeprecision 1ps;

  logic rf_clk = 1'b0, tof_clk = 1'b0, bsync_dly = 1'b0;
  logic [1:0] syn_flag;
  logic pulse;
  int cnt = 0;
  int checks = 0, failures = 0;

  sync_detector dut (.rf_clk(rf_clk), .tof_clk(tof_clk), .bsync_dly(bsync_dly),
                     .syn_flag(syn_flag), .pulse_1_12(pulse));

  always #1ns rf_clk = ~rf_clk;
  always @(posedge rf_clk) begin
    cnt     <= (cnt == 11) ? 0 : cnt + 1;
    tof_clk <= ((cnt == 11 ? 0 : cnt + 1) >= 6);
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t_up, t_dn, t_up2;
    int phi_ps;
    logic seen10, expect10;
    repeat (3) @(posedge tof_clk);
    // Pulse shape.
    @(posedge pulse) t_up = $realtime;
    @(negedge pulse) t_dn = $realtime;
    @(posedge pulse) t_up2 = $realtime;
    check((t_dn - t_up) == 2ns, "1/12 pulse lasts one RF period");
    check((t_up2 - t_up) == 24ns, "1/12 pulse repeats every TOF period");

    // Sweep the delayed BSYNC edge around a TOF edge.
    for (phi_ps = -10250; phi_ps <= 2000; phi_ps += 500) begin
      @(posedge tof_clk);
      fork
        begin
          #(24ns + phi_ps * 1ps);
          bsync_dly = 1'b1;
          #48ns bsync_dly = 1'b0;
        end
      join_none
      // The TOF edge after the leading edge shows 10 or not; the one after
      // that must show 11 (both taps high while BSYNC is high).
      @(posedge tof_clk);
      #3ns;
      seen10 = (syn_flag == 2'b10);
      @(posedge tof_clk);
      #3ns;
      check(syn_flag == 2'b11, "SynFlag 11 while BSYNC high");
      // Back to idle: flags settle to 00 while BSYNC is low.
      repeat (7) @(posedge tof_clk);
      expect10 = (phi_ps > -6000) && (phi_ps <= -4000);
      check(seen10 == expect10, $sformatf("SynFlag 10 for edge at %0d ps", phi_ps));
    end
    #3ns;
    check(syn_flag == 2'b00, "flags idle while BSYNC low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
