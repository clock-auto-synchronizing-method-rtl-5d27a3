// tb_clock_fanout: checks source selection and fan-out.
//
// Three free-running test clocks with different periods stand for the RF/12
// clock (24 ns), the optical slave clock (25 ns here, so it can be told
// apart) and the 83.3 MHz oscillator (12 ns).  For each mode the testbench
// measures the period of sys_clk and of every output: 24 ns in master mode,
// 25 ns in slave mode, 24 ns (12 ns divided by 2) in off-line mode, and
// checks that all 20 outputs equal sys_clk.
module tb_clock_fanout;
  timeunit 1ns;
  timeprecision 1ps;
  import clk_sync_pkg::*;

  logic rf_div_clk = 1'b0, opt_clk = 1'b0, osc_clk = 1'b0;
  clk_mode_e mode = MODE_MASTER;
  logic sys_clk;
  logic [4:0] opt_out;
  logic [14:0] pecl_out;
  int checks = 0, failures = 0;

  clock_fanout dut (.rf_div_clk(rf_div_clk), .opt_clk(opt_clk), .osc_clk(osc_clk), .mode(mode),
                    .sys_clk(sys_clk), .opt_out(opt_out), .pecl_out(pecl_out));

  always #12ns   rf_div_clk = ~rf_div_clk;
  always #12.5ns opt_clk    = ~opt_clk;
  always #6ns    osc_clk    = ~osc_clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  task automatic measure(input clk_mode_e m, input realtime expect_period, input string name);
    realtime t1, t2;
    mode = m;
    repeat (3) @(posedge sys_clk);
    t1 = $realtime;
    @(posedge sys_clk);
    t2 = $realtime;
    check((t2 - t1) > expect_period - 0.01ns && (t2 - t1) < expect_period + 0.01ns,
          {name, " period"});
    repeat (20) begin
      #1.7ns;
      check(opt_out == {5{sys_clk}} && pecl_out == {15{sys_clk}}, {name, " outputs follow sys_clk"});
    end
  endtask

  initial begin
    #10us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    measure(MODE_MASTER,  24ns, "master");
    measure(MODE_SLAVE,   25ns, "slave");
    measure(MODE_OFFLINE, 24ns, "off-line");
    measure(MODE_MASTER,  24ns, "master again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
