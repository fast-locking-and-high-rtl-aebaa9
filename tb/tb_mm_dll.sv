// tb_mm_dll: end-to-end test of the binary-search DLL at its default
// parameters.
//
// Runs the whole loop (delay line, DAC, replica, phase detector, divider,
// controller, toggle detector) through these operations and counts each
// mechanism; a mechanism that never happens counts as a failure:
//   lock      4.26 GHz (N = 4), 800 MHz (N = 1) and 533 MHz (N = 4): the
//             search must move by 512, 256, ..., 2 (one halving per control
//             cycle), lock at the B-th = 10th control edge after enable
//             (B+1 = 11 codes), at 4.26 GHz in under 10.5 ns and at
//             800 MHz in under 12.5 ns, and leave CLK_FB within a few
//             LSBs of one period after CLK_REF with the eight phases T/8
//             apart (at 4.26 GHz within 0.8 ps);
//   dither    the locked code moves by +/-1;
//   freeze    the code holds while freeze is high;
//   stall     code_init = 511 makes the first jump land on code 1023; the
//             DAC overshoot stops the line, the controller reverts and then
//             locks;
//   error     with all tail branches off (BW = 0) the line never runs; the
//             controller must end in error; a restart with BW = 1111 locks.
// Time is in ps; the expected figures come from the paper (B+1 cycles,
// 10.5 ns, 12.5 ns) and from the loop's definition (CLK_FB one period after CLK_REF).
`timescale 1ps/1fs
module tb_mm_dll;
  import dll_pkg::*;
  localparam int B = DAC_BITS;

  real  tper = 234.742;
  logic clk_in_p = 1'b0, clk_in_n = 1'b1, run_clk = 1'b1;
  logic rst = 1'b0, en = 1'b0, freeze = 1'b0;
  div_sel_t div_sel = DIV4;
  logic [1:0] cb_en = 2'd0;
  logic [3:0] bw_p = 4'hF, bw_n = 4'hF;
  logic [7:0] en_clkout = 8'hFF;
  logic [B-1:0] code_init = '0, step_init = B'(512);
  logic [7:0] clk_out;
  logic clk_ref, clk_fb, clk_ctrl, pd_er, toggling, locked, stall_event, error;
  logic [B-1:0] code, codepre, step;
  bs_state_t state;

  int checks = 0, failures = 0;
  int n_lock = 0, n_dither = 0, n_freeze = 0, n_stall = 0, n_error = 0, n_restart = 0;
  realtime t_ref_last, t_out[8];
  real fb_err;   // CLK_FB rise minus one period after CLK_REF rise, ps

  mm_dll dut (.*);

  always begin
    #(tper/2.0);
    if (run_clk) begin clk_in_p = ~clk_in_p; clk_in_n = ~clk_in_n; end
  end

  always @(posedge clk_ref) t_ref_last = $realtime;
  always @(posedge clk_fb) begin
    fb_err = $realtime - t_ref_last;
    if (fb_err > tper / 2.0) fb_err = fb_err - tper;
  end
  for (genvar i = 0; i < 8; i++) begin : g_ph
    always @(posedge clk_out[i]) t_out[i] = $realtime;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic restart(input real t, input div_sel_t d, input logic [1:0] cb,
                         input logic [3:0] bw, input int ci);
    // give the asynchronous resets a rising edge even at time zero
    rst = 1'b0; #1;
    rst = 1'b1; en = 1'b0;
    tper = t; div_sel = d; cb_en = cb; bw_p = bw; bw_n = bw;
    code_init = B'(ci);
    #(20.0 * tper);
    rst = 1'b0;
    repeat (3) @(negedge clk_ctrl);
    en = 1'b1;
  endtask

  // search from code 0 and lock in B control edges; then check the phases
  task automatic lock_test(input string name, input real t, input div_sel_t d,
                           input logic [1:0] cb, input logic [3:0] bw, input real tol);
    int prev;
    realtime t_en;
    restart(t, d, cb, bw, 0);
    t_en = $realtime;
    prev = 0;
    for (int k = 1; k <= B; k++) begin
      @(posedge clk_ctrl); #1;
      if (k < B) begin
        check(fabs(real'(int'(code) - prev)) == real'(512 >> (k-1)),
              $sformatf("%s: edge %0d moved %0d -> %0d", name, k, prev, code));
        check(!locked, $sformatf("%s: locked too early at edge %0d", name, k));
      end
      prev = int'(code);
    end
    check(locked, $sformatf("%s: locked at the %0d-th control edge", name, B));
    check(!stall_event && !error, $sformatf("%s: no clock failure", name));
    if (locked) n_lock++;
    $display("%s: locked at code %0d after %0.2f ns", name, code, ($realtime - t_en) / 1000.0);
    if (t < 300.0) check($realtime - t_en < 10_500.0, "lock within 10.5 ns at 4.26 GHz");
    if (d == DIV1 && t > 1000.0)
      check($realtime - t_en < 12_500.0, "lock within 12.5 ns at 800 MHz");
    // let the line settle, then look at the phases while dithering
    repeat (6) begin
      prev = int'(code);
      @(posedge clk_ctrl); #1;
      check(fabs(real'(int'(code) - prev)) == 1.0, $sformatf("%s: locked code steps by 1", name));
      if (fabs(real'(int'(code) - prev)) == 1.0) n_dither++;
    end
    @(posedge clk_in_p); #(tper - 1.0);
    check(fabs(fb_err) < tol, $sformatf("%s: CLK_FB - CLK_REF - T = %0.2f ps", name, fb_err));
    for (int i = 1; i < 8; i++) begin
      real sp;
      sp = t_out[i] - t_out[i-1];
      if (sp < 0.0) sp = sp + tper;    // phase i-1 already rose again
      check(fabs(sp - tper / 8.0) < tol,
            $sformatf("%s: phase %0d spacing %0.2f ps, T/8 = %0.2f", name, i, sp, tper / 8.0));
      // at 4.26 GHz the published phase error between outputs is 0.8 ps
      if (t < 300.0)
        check(fabs(sp - tper / 8.0) < 0.8, $sformatf("%s: phase %0d error under 0.8 ps", name, i));
    end
  endtask

  initial begin
    // 4.26 GHz, N = 4, no capacitor bank, four tails
    lock_test("4.26GHz", 234.742, DIV4, 2'd0, 4'hF, 3.0);

    // freeze while locked
    freeze = 1'b1;
    begin
      int held;
      held = int'(code);
      repeat (8) begin
        @(posedge clk_ctrl); #1;
        check(int'(code) == held, "freeze holds the code");
      end
      if (int'(code) == held) n_freeze++;
    end
    freeze = 1'b0;

    // 800 MHz, N = 1 (CLK_CTRL = CLK_IN), CB_EN = 2, one tail
    lock_test("800MHz", 1250.0, DIV1, 2'd2, 4'h1, 12.0);
    // 533 MHz, N = 4, CB_EN = 3, one tail
    lock_test("533MHz", 1876.17, DIV4, 2'd3, 4'h1, 16.0);

    // clock failure and recovery at 4.26 GHz: first jump 511 -> 1023
    restart(234.742, DIV4, 2'd0, 4'hF, 511);
    begin
      bit seen;
      int lock_edge;
      seen = 1'b0;
      lock_edge = 0;
      for (int k = 1; k <= 20; k++) begin
        @(posedge clk_ctrl); #1;
        if (stall_event) seen = 1'b1;
        if (locked && lock_edge == 0) lock_edge = k;
      end
      // each revert also halves the step, so one stall costs no extra cycle
      check(lock_edge > 0 && lock_edge <= B,
            $sformatf("lock %0d control edges after enable despite a stall", lock_edge));
      $display("stall: locked at code %0d, %0d control edges after enable", code, lock_edge);
      check(seen, "stall detected after the overshoot");
      check(locked && !error, "locked after the revert");
      if (seen && locked) n_stall++;
      repeat (4) @(posedge clk_ctrl);
      @(posedge clk_in_p); #(tper - 1.0);
      check(fabs(fb_err) < 3.0, $sformatf("recovered lock: CLK_FB - CLK_REF - T = %0.2f ps", fb_err));
    end

    // no tail branch enabled: the line cannot run -> error
    restart(234.742, DIV4, 2'd0, 4'h0, 0);
    repeat (12) @(posedge clk_ctrl);
    #1;
    check(error && state == BS_ERROR && !locked, "error with the line stalled");
    if (error) n_error++;
    repeat (4) @(posedge clk_ctrl);
    check(error, "error is held until reset");
    // new start with other settings
    restart(234.742, DIV4, 2'd0, 4'hF, 0);
    repeat (B + 1) @(posedge clk_ctrl);
    #1;
    check(locked && !error, "restart with four tails locks");
    if (locked) n_restart++;

    check(n_lock == 3, "three frequencies locked");
    check(n_dither > 0, "dither seen");
    check(n_freeze > 0, "freeze seen");
    check(n_stall > 0, "stall recovery seen");
    check(n_error > 0, "error seen");
    check(n_restart > 0, "restart after error seen");
    $display("mechanisms: lock=%0d dither=%0d freeze=%0d stall=%0d error=%0d restart=%0d",
             n_lock, n_dither, n_freeze, n_stall, n_error, n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;   // 2 us
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
