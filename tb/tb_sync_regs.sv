// tb_sync_regs: checks the register map, manual operation and start control.
//
// The controller side is driven directly by the testbench.  Checked: reset
// values (master mode, initial data 0x100); write/read of MODE and INITIAL;
// a start write gives one start pulse, and is ignored while busy; a CTRL
// bit1 write gives one divider arm pulse and the controller's arm passes
// through; the status word; SynFlag read-back one cycle after a change; a
// manual DELAY write takes over the delay output until the next start; the
// result registers at 0xf050, 0xf0c0, 0xf0d0; and the initial data written
// back from a finished run.
module tb_sync_regs;
  timeunit 1ns;
  timeprecision 1ps;
  import clk_sync_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] addr = '0, wdata = '0, rdata;
  logic wr = 1'b0, rd = 1'b0;
  logic start, auto_arm = 1'b0, busy = 1'b0, done = 1'b0, error = 1'b0, div_arm;
  delay_t init_delay, auto_delay = 10'h055, delay_code;
  sync_result_t result = '{center: 10'h10d, minimum: 10'h0a4, maximum: 10'h177, initial_used: 10'h100};
  logic [1:0] syn_flag = 2'b00;
  clk_mode_e mode;
  int checks = 0, failures = 0, starts = 0, arms = 0;

  sync_regs dut (.clk(clk), .rst_n(rst_n), .addr(addr), .wdata(wdata), .wr(wr), .rd(rd),
                 .rdata(rdata), .start(start), .init_delay(init_delay), .auto_delay(auto_delay),
                 .auto_arm(auto_arm), .busy(busy), .done(done), .error(error), .result(result),
                 .syn_flag(syn_flag), .delay_code(delay_code), .div_arm(div_arm), .mode(mode));

  always #12ns clk = ~clk;
  always @(posedge clk) begin
    if (start) starts++;
    if (div_arm) arms++;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  task automatic write(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk);
    addr = a; wdata = d; wr = 1'b1;
    @(negedge clk);
    wr = 1'b0;
  endtask

  task automatic read(input logic [15:0] a, output logic [15:0] d);
    @(negedge clk);
    addr = a; rd = 1'b1;
    #1ns d = rdata;
    @(negedge clk);
    rd = 1'b0;
  endtask

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(mode == MODE_MASTER, "reset mode is master");
    read(16'hf040, v); check(v == 16'h0100, "reset initial data 0x100");
    write(16'hf040, 16'h01a0);
    read(16'hf040, v); check(v == 16'h01a0, "initial data written");
    check(init_delay == 10'h1a0, "initial data to the controller");
    write(16'hf010, 16'h0001);
    check(mode == MODE_SLAVE, "slave mode selected");
    read(16'hf010, v); check(v == 16'h0001, "mode read back");
    write(16'hf010, 16'h0002);
    check(mode == MODE_OFFLINE, "off-line mode selected");
    write(16'hf010, 16'h0000);

    // Manual delay.
    check(delay_code == 10'h055, "controller drives the delay by default");
    write(16'hf030, 16'h0123);
    check(delay_code == 10'h123, "manual delay takes over");
    read(16'hf030, v); check(v == 16'h0123, "delay read back");

    // Manual divider reset and pass-through of the controller's arm.
    arms = 0;
    write(16'hf000, 16'h0002);
    repeat (2) @(negedge clk);
    check(arms == 1, "one arm pulse per manual reset");
    auto_arm = 1'b1; @(negedge clk); auto_arm = 1'b0; @(negedge clk);
    check(arms == 2, "controller arm passes through");

    // SynFlag read-back.
    syn_flag = 2'b10; @(negedge clk);
    read(16'hf020, v); check(v == 16'h0002, "SynFlag reads 10");
    syn_flag = 2'b01; @(negedge clk);
    read(16'hf020, v); check(v == 16'h0001, "SynFlag reads 01");

    // Start: one pulse, returns the delay to the controller.
    starts = 0;
    write(16'hf000, 16'h0001);
    repeat (2) @(negedge clk);
    check(starts == 1, "one start pulse");
    check(delay_code == 10'h055, "start returns the delay line to the controller");
    busy = 1'b1;
    write(16'hf000, 16'h0001);
    repeat (2) @(negedge clk);
    check(starts == 1, "start ignored while busy");
    read(16'hf000, v); check(v == 16'h0001, "status busy");
    busy = 1'b0; done = 1'b1;
    result.initial_used = 10'h1d0;
    repeat (2) @(negedge clk);
    read(16'hf000, v); check(v == 16'h0002, "status done");
    read(16'hf040, v); check(v == 16'h01d0, "initial data written back by the run");
    read(16'hf050, v); check(v == 16'h010d, "centre register");
    read(16'hf0c0, v); check(v == 16'h00a4, "minimum register");
    read(16'hf0d0, v); check(v == 16'h0177, "maximum register");
    done = 1'b0; error = 1'b1; @(negedge clk);
    read(16'hf000, v); check(v == 16'h0004, "status error");
    read(16'hf0e0, v); check(v == 16'h0000, "unmapped address reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
