// auto_sync_ctrl: automatic search of the BSYNC synchronization window.
//
// A "test" sets the delay code, lets the delay line and detector settle for
// SETTLE_CYCLES, then watches the registered SynFlag for TEST_CYCLES clock
// cycles; it passes if SynFlag read 2'b10 at least once.  The window only
// shows 2'b10 once per BSYNC period, so TEST_CYCLES must cover at least one
// BSYNC period.
//
// The run follows the paper's flowchart:
//   * Delay <= initial data, reset the divider, test.  On failure add 0x30 to
//     both the delay and the initial data, reset again and test; a second
//     failure ends in ERROR.
//   * Step 1 (maximum): add 0x30 while the test passes; then subtract 0x4
//     until it passes; then add 0x1 while it passes; Max <= Delay - 1.  Then
//     set Delay <= Max and repeat the test 8 times; if any of them fails,
//     Max <= Max - 1 and repeat the 8 tests.
//   * Step 2 (minimum): Delay <= initial data, then the mirror image:
//     subtract 0x30 while passing, add 0x4 until passing, subtract 0x1 while
//     passing, Min <= Delay + 1, 8 repeated tests, Min <= Min + 1 on failure.
//   * Centre <= (Max + Min) / 2, Delay <= Centre, reset the divider, done.
//
// Interface: start (one-cycle pulse) begins a run with init_delay; syn_flag
// is the detector output (it is registered here); delay_code drives the
// delay line; div_arm is a one-cycle pulse that re-arms the divider reset in
// the synchronization control; busy/done/error report the state; result
// holds centre, minimum, maximum and the initial data actually used, valid
// when done is set.  After a reset the divider restarts on the next BSYNC,
// so the controller waits RESET_WAIT cycles before its next test.
//
// From the paper: the sequence, step sizes, the 8 repeated tests and the
// centre formula.  This design's choices: what one test is (settle, then a
// watch window), "8 times" read as 8 consecutive passes, the wait after a
// divider reset, and ending in ERROR when a step would move the code out of
// 0..1023 (the flowchart does not cover that case).
module auto_sync_ctrl
  import clk_sync_pkg::*;
#(
  parameter int unsigned SETTLE_CYCLES = 4,
  parameter int unsigned TEST_CYCLES   = 64,
  parameter int unsigned RESET_WAIT    = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  delay_t       init_delay,
  input  logic [1:0]   syn_flag,
  output delay_t       delay_code,
  output logic         div_arm,
  output logic         busy,
  output logic         done,
  output logic         error,
  output sync_result_t result
);
  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic [3:0] {
    S_IDLE, S_RESET, S_TEST,
    S_INIT_CHK, S_RETRY_CHK,
    S_MAX_COARSE, S_MAX_MEDIUM, S_MAX_FINE, S_MAX_VERIFY,
    S_MIN_COARSE, S_MIN_MEDIUM, S_MIN_FINE, S_MIN_VERIFY,
    S_FINISH
  } state_e;

  localparam int unsigned CNT_W = $clog2(SETTLE_CYCLES + TEST_CYCLES + RESET_WAIT + 2);
  localparam logic signed [DELAY_W+1:0] CODE_MAX = (1 << DELAY_W) - 1;

  state_e     st_q, ret_q;
  delay_t     delay_q, init_q, max_q, min_q, center_q;
  logic [CNT_W-1:0] cnt_q;
  logic [3:0] pass_cnt_q;
  logic [1:0] flag_q;
  logic       seen_q, pass_q;
  logic       done_q, error_q, arm_q;

  // Next value of the delay code when stepping: signed so that a step past
  // either end of the code range can be detected.
  function automatic logic signed [DELAY_W+1:0] step(input delay_t base, input delay_t amount,
                                                      input logic down);
    logic signed [DELAY_W+1:0] b, a;
    b = $signed({2'b00, base});
    a = $signed({2'b00, amount});
    return down ? b - a : b + a;
  endfunction

  function automatic logic in_range(input logic signed [DELAY_W+1:0] v);
    return (v >= 0) && (v <= CODE_MAX);
  endfunction

  // Candidate delay code of the current decision state.
  logic signed [DELAY_W+1:0] nxt;
  delay_t center_nxt;

  always_comb begin
    unique case (st_q)
      S_INIT_CHK:   nxt = pass_q ? step(delay_q, STEP_COARSE, 1'b0) : step(init_q, STEP_COARSE, 1'b0);
      S_RETRY_CHK:  nxt = step(delay_q, STEP_COARSE, 1'b0);
      S_MAX_COARSE: nxt = pass_q ? step(delay_q, STEP_COARSE, 1'b0) : step(delay_q, STEP_MEDIUM, 1'b1);
      S_MAX_MEDIUM: nxt = pass_q ? step(delay_q, STEP_FINE, 1'b0)   : step(delay_q, STEP_MEDIUM, 1'b1);
      S_MAX_FINE:   nxt = step(delay_q, STEP_FINE, 1'b0);
      S_MAX_VERIFY: nxt = step(init_q, STEP_COARSE, 1'b1);
      S_MIN_COARSE: nxt = pass_q ? step(delay_q, STEP_COARSE, 1'b1) : step(delay_q, STEP_MEDIUM, 1'b0);
      S_MIN_MEDIUM: nxt = pass_q ? step(delay_q, STEP_FINE, 1'b1)   : step(delay_q, STEP_MEDIUM, 1'b0);
      S_MIN_FINE:   nxt = step(delay_q, STEP_FINE, 1'b1);
      default:      nxt = step(delay_q, '0, 1'b0);
    endcase
    center_nxt = delay_t'(({1'b0, max_q} + {1'b0, min_q}) >> 1);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) flag_q <= 2'b00;
    else        flag_q <= syn_flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      ret_q      <= S_IDLE;
      delay_q    <= '0;
      init_q     <= '0;
      max_q      <= '0;
      min_q      <= '0;
      center_q   <= '0;
      cnt_q      <= '0;
      pass_cnt_q <= '0;
      seen_q     <= 1'b0;
      pass_q     <= 1'b0;
      done_q     <= 1'b0;
      error_q    <= 1'b0;
      arm_q      <= 1'b0;
    end else begin
      arm_q <= 1'b0;
      unique case (st_q)
        S_IDLE:
          if (start) begin
            delay_q <= init_delay;
            init_q  <= init_delay;
            done_q  <= 1'b0;
            error_q <= 1'b0;
            arm_q   <= 1'b1;
            cnt_q   <= '0;
            ret_q   <= S_INIT_CHK;
            st_q    <= S_RESET;
          end

        // Wait for the divider to restart on the next BSYNC, then test.
        S_RESET:
          if (cnt_q == CNT_W'(RESET_WAIT - 1)) begin
            cnt_q  <= '0;
            seen_q <= 1'b0;
            st_q   <= S_TEST;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end

        // One test: settle, then watch for SynFlag == 2'b10.
        S_TEST: begin
          if (cnt_q >= CNT_W'(SETTLE_CYCLES) && flag_q == SYNC_OK) seen_q <= 1'b1;
          if (cnt_q == CNT_W'(SETTLE_CYCLES + TEST_CYCLES - 1)) begin
            pass_q <= seen_q || (flag_q == SYNC_OK);
            cnt_q  <= '0;
            st_q   <= ret_q;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end

        S_INIT_CHK:
          if (pass_q) begin
            if (in_range(nxt)) begin
              delay_q <= delay_t'(nxt);
              seen_q  <= 1'b0;
              ret_q   <= S_MAX_COARSE;
              st_q    <= S_TEST;
            end else begin
              error_q <= 1'b1;
              st_q    <= S_IDLE;
            end
          end else begin
            if (in_range(nxt)) begin
              delay_q <= delay_t'(nxt);
              init_q  <= delay_t'(nxt);
              arm_q   <= 1'b1;
              ret_q   <= S_RETRY_CHK;
              st_q    <= S_RESET;
            end else begin
              error_q <= 1'b1;
              st_q    <= S_IDLE;
            end
          end

        S_RETRY_CHK:
          if (pass_q) begin
            if (in_range(nxt)) begin
              delay_q <= delay_t'(nxt);
              seen_q  <= 1'b0;
              ret_q   <= S_MAX_COARSE;
              st_q    <= S_TEST;
            end else begin
              error_q <= 1'b1;
              st_q    <= S_IDLE;
            end
          end else begin
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end

        // ---- Step 1: maximum ----
        S_MAX_COARSE: begin
          if (in_range(nxt)) begin
            delay_q <= delay_t'(nxt);
            seen_q  <= 1'b0;
            ret_q   <= pass_q ? S_MAX_COARSE : S_MAX_MEDIUM;
            st_q    <= S_TEST;
          end else begin
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end
        end

        S_MAX_MEDIUM: begin
          if (in_range(nxt)) begin
            delay_q <= delay_t'(nxt);
            seen_q  <= 1'b0;
            ret_q   <= pass_q ? S_MAX_FINE : S_MAX_MEDIUM;
            st_q    <= S_TEST;
          end else begin
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end
        end

        S_MAX_FINE:
          if (pass_q) begin
            if (in_range(nxt)) begin
              delay_q <= delay_t'(nxt);
              seen_q  <= 1'b0;
              ret_q   <= S_MAX_FINE;
              st_q    <= S_TEST;
            end else begin
              error_q <= 1'b1;
              st_q    <= S_IDLE;
            end
          end else begin
            // Max <= Delay - 1; Delay <= Max; start the 8 repeated tests.
            max_q      <= delay_q - STEP_FINE;
            delay_q    <= delay_q - STEP_FINE;
            pass_cnt_q <= '0;
            seen_q     <= 1'b0;
            ret_q      <= S_MAX_VERIFY;
            st_q       <= S_TEST;
          end

        S_MAX_VERIFY:
          if (pass_q && pass_cnt_q == 4'(STABLE_TESTS - 1)) begin
            // Step 2 starts from the initial data.
            if (in_range(nxt)) begin
              delay_q <= delay_t'(nxt);
              seen_q  <= 1'b0;
              ret_q   <= S_MIN_COARSE;
              st_q    <= S_TEST;
            end else begin
              error_q <= 1'b1;
              st_q    <= S_IDLE;
            end
          end else if (pass_q) begin
            pass_cnt_q <= pass_cnt_q + 1'b1;
            seen_q     <= 1'b0;
            st_q       <= S_TEST;
          end else if (max_q == init_q) begin
            // The window shrank to nothing around the initial data.
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end else begin
            max_q      <= max_q - STEP_FINE;
            delay_q    <= max_q - STEP_FINE;
            pass_cnt_q <= '0;
            seen_q     <= 1'b0;
            st_q       <= S_TEST;
          end

        // ---- Step 2: minimum ----
        S_MIN_COARSE: begin
          if (in_range(nxt)) begin
            delay_q <= delay_t'(nxt);
            seen_q  <= 1'b0;
            ret_q   <= pass_q ? S_MIN_COARSE : S_MIN_MEDIUM;
            st_q    <= S_TEST;
          end else begin
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end
        end

        S_MIN_MEDIUM: begin
          if (in_range(nxt)) begin
            delay_q <= delay_t'(nxt);
            seen_q  <= 1'b0;
            ret_q   <= pass_q ? S_MIN_FINE : S_MIN_MEDIUM;
            st_q    <= S_TEST;
          end else begin
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end
        end

        S_MIN_FINE:
          if (pass_q) begin
            if (in_range(nxt)) begin
              delay_q <= delay_t'(nxt);
              seen_q  <= 1'b0;
              ret_q   <= S_MIN_FINE;
              st_q    <= S_TEST;
            end else begin
              error_q <= 1'b1;
              st_q    <= S_IDLE;
            end
          end else begin
            min_q      <= delay_q + STEP_FINE;
            delay_q    <= delay_q + STEP_FINE;
            pass_cnt_q <= '0;
            seen_q     <= 1'b0;
            ret_q      <= S_MIN_VERIFY;
            st_q       <= S_TEST;
          end

        S_MIN_VERIFY:
          if (pass_q && pass_cnt_q == 4'(STABLE_TESTS - 1)) begin
            st_q <= S_FINISH;
          end else if (pass_q) begin
            pass_cnt_q <= pass_cnt_q + 1'b1;
            seen_q     <= 1'b0;
            st_q       <= S_TEST;
          end else if (min_q == max_q) begin
            error_q <= 1'b1;
            st_q    <= S_IDLE;
          end else begin
            min_q      <= min_q + STEP_FINE;
            delay_q    <= min_q + STEP_FINE;
            pass_cnt_q <= '0;
            seen_q     <= 1'b0;
            st_q       <= S_TEST;
          end

        // Centre = (Max + Min) / 2, set it and reset the divider.
        S_FINISH: begin
          center_q <= center_nxt;
          delay_q  <= center_nxt;
          arm_q    <= 1'b1;
          done_q   <= 1'b1;
          st_q     <= S_IDLE;
        end

        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign delay_code = delay_q;
  assign div_arm    = arm_q;
  assign busy       = (st_q != S_IDLE);
  assign done       = done_q;
  assign error      = error_q;
  assign result     = '{center: center_q, minimum: min_q, maximum: max_q, initial_used: init_q};

  // A run ends either done or in error, never both.
  a_done_xor_error: assert property (@(posedge clk) disable iff (!rst_n) !(done_q && error_q));
  // The divider re-arm request is a single-cycle pulse.
  a_arm_pulse: assert property (@(posedge clk) disable iff (!rst_n) arm_q |=> !arm_q);
endmodule
