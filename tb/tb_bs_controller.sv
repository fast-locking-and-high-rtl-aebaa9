// tb_bs_controller: self-checking test of the binary-search controller.
//
// The phase detector is modelled as pd_er = (code > target) and the delay
// line's clock failure as toggling = (code < fail). The expected code after
// every control-clock edge was worked out by hand for each scenario:
//   1) plain search to target 745: lock after exactly B = 10 edges, then
//      +/-1 dither between 745 and 746;
//   2) stall at 896 (fail = 850): revert to 768 with step 32, retry, recover
//      (stall_event clears), lock after 10 edges;
//   3) stall, then the finer retry stalls too: error, held until reset;
//   4) freeze holds the code; 5) code_init = 100, step_init = 64 locks after
//      log2(64)+1 = 7 edges; 6) a stall on the move by 2 delays lock by two
//      edges (the step cannot shrink below 1).
`timescale 1ps/1fs
module tb_bs_controller;
  import dll_pkg::*;
  localparam int B = 10;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0, freeze = 1'b0;
  logic [B-1:0] code_init, step_init, code, codepre, step;
  logic pd_er, toggling, locked, stall_event, error, pd_rst;
  bs_state_t state;
  int target, fail;
  int checks = 0, failures = 0, pd_rst_pulses = 0;

  bs_controller #(.B(B)) dut (.clk_ctrl(clk), .*);

  always #500 clk = ~clk;
  always_comb pd_er    = (int'(code) > target);
  always_comb toggling = (int'(code) < fail);
  always @(posedge pd_rst) pd_rst_pulses++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic start(input int ci, input int si, input int t, input int f);
    rst = 1'b1; en = 1'b0;
    code_init = B'(ci); step_init = B'(si); target = t; fail = f;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(code == B'(ci) && state == BS_IDLE, "idle holds code_init");
    en = 1'b1;
  endtask

  // run the listed edges and compare code / locked after each
  task automatic expect_seq(input int exp[], input int lock_edge, input string name);
    foreach (exp[i]) begin
      @(negedge clk);
      check(int'(code) == exp[i], $sformatf("%s edge %0d: code %0d expected %0d", name, i+1, code, exp[i]));
      check(locked == (i+1 >= lock_edge), $sformatf("%s edge %0d: locked=%0b", name, i+1, locked));
    end
  endtask

  initial begin
    // 1) plain binary search
    start(0, 512, 745, 1024);
    expect_seq('{512,768,640,704,736,752,744,748,746,745,746,745,746}, 10, "search");
    check(!stall_event && !error, "no stall in plain search");

    // 2) stall and recovery
    start(0, 512, 820, 850);
    @(negedge clk); check(code == 512, "s2 e1");
    @(negedge clk); check(code == 768, "s2 e2");
    @(negedge clk); check(code == 896, "s2 e3");
    @(negedge clk);
    check(code == 768 && step == 32 && stall_event && state == BS_REVERT, "s2 revert to codepre, step halved");
    @(negedge clk); check(code == 800 && stall_event, "s2 retry with finer step");
    @(negedge clk); check(code == 816 && !stall_event && !error, "s2 recovered");
    expect_seq('{824,820,822,821,820,821}, 4, "recover");
    check(pd_rst_pulses == 1, "one pd_rst pulse per revert");

    // 3) retry stalls as well -> error until reset
    start(0, 512, 900, 800);
    repeat (3) @(negedge clk);
    check(code == 896, "s3 e3");
    @(negedge clk); check(code == 768 && stall_event, "s3 revert");
    @(negedge clk); check(code == 800, "s3 retry");
    @(negedge clk); check(error && state == BS_ERROR && code == 800, "s3 error");
    repeat (5) @(negedge clk);
    check(error && code == 800, "s3 error is held");

    // 4) freeze
    start(0, 512, 745, 1024);
    repeat (3) @(negedge clk);
    freeze = 1'b1;
    repeat (4) @(negedge clk);
    check(code == 640 && step == 64, "freeze holds code and step");
    freeze = 1'b0;
    expect_seq('{704,736,752,744,748,746,745}, 7, "after freeze");

    // 5) configurable initial code and step
    start(100, 64, 150, 1024);
    expect_seq('{164,132,148,156,152,150,151,150}, 7, "init100");

    // 6) stall on the move by 2 (fail = 1022): revert to 1020 with the step
    //    held at 1, retry 1021, then the locking move; lock after 12 edges
    start(0, 512, 1021, 1022);
    expect_seq('{512,768,896,960,992,1008,1016,1020,1022,1020,1021,1022}, 12, "late stall");
    check(!stall_event && !error, "late stall recovered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
