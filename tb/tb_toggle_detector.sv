// tb_toggle_detector: self-checking test of the clock-failure detector.
//
// CLK_IN runs with a 500 ps period; CLK_REF is a copy delayed by 40 ps that
// can be stopped. The edge pulses come from the edge_detector model. Checks:
// toggling stays 1 while CLK_REF runs; after CLK_REF stops it falls less
// than one and a half CLK_IN periods after the first missing CLK_REF edge
// (the latency figure of the published design); it stays low when CLK_REF
// starts again; a reset brings it back to 1.
`timescale 1ps/1fs
module tb_toggle_detector;
  localparam real T = 500.0;
  logic clk_in = 1'b0, clk_ref = 1'b0, ref_run = 1'b1, rst = 1'b1;
  logic ed_pulse, toggling;
  realtime t_last_ref, t_fall;
  int checks = 0, failures = 0;

  edge_detector u_ed (.clk_ref(clk_ref), .ed_pulse(ed_pulse));
  toggle_detector dut (.clk_in(clk_in), .ed_pulse(ed_pulse), .rst(rst), .toggling(toggling));

  always #(T/2) clk_in = ~clk_in;
  always @(clk_in) if (ref_run) clk_ref <= #40 clk_in;
  always @(posedge clk_ref or negedge clk_ref) t_last_ref = $realtime;
  always @(negedge toggling) t_fall = $realtime;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #(3*T) rst = 1'b0;
    repeat (20) begin
      @(posedge clk_in); #(T/4);
      check(toggling, "toggling while CLK_REF runs");
    end
    // stop CLK_REF after a falling edge (as in the timing diagram)
    @(negedge clk_in); #60; ref_run = 1'b0;
    repeat (4) @(posedge clk_in);
    #1;
    check(!toggling, "toggling falls after CLK_REF stops");
    // latency from the first missing CLK_REF edge (half a period after the
    // last one): under one and a half CLK_IN cycles
    check(t_fall - (t_last_ref + T/2) < 1.5*T,
          $sformatf("latency %0.1f ps after the missing edge", t_fall - (t_last_ref + T/2)));
    check(t_fall - t_last_ref >= 0.5*T, "no early detection");
    // restart: flag is held until reset
    ref_run = 1'b1;
    repeat (10) begin
      @(posedge clk_in); #(T/4);
      check(!toggling, "flag held after CLK_REF restarts");
    end
    rst = 1'b1; #(T/4);
    check(toggling, "reset clears the flag");
    rst = 1'b0;
    repeat (10) begin
      @(posedge clk_in); #(T/4);
      check(toggling, "toggling again after reset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200*T);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
