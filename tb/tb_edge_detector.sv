// tb_edge_detector: self-checking test of the edge-detector model.
// A rising and a falling edge of CLK_REF must each give one pulse of width
// T_BUF (8 ps) that starts at the edge; no pulse while CLK_REF is steady.
`timescale 1ps/1fs
module tb_edge_detector;
  logic clk_ref = 1'b0, ed_pulse;
  int checks = 0, failures = 0, pulses = 0;
  realtime t_rise, width;

  edge_detector dut (.clk_ref(clk_ref), .ed_pulse(ed_pulse));

  always @(posedge ed_pulse) begin pulses++; t_rise = $realtime; end
  always @(negedge ed_pulse) width = $realtime - t_rise;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100;
    check(!ed_pulse && pulses == 0, "no pulse while steady");
    clk_ref = 1'b1; #1;
    check(ed_pulse, "pulse on rising edge");
    #20;
    check(!ed_pulse && pulses == 1, "one pulse");
    check(width > 7.9 && width < 8.1, $sformatf("width %0.2f ps", width));
    #100 clk_ref = 1'b0; #1;
    check(ed_pulse, "pulse on falling edge");
    #20;
    check(pulses == 2 && width > 7.9 && width < 8.1, "second pulse width");
    #100;
    check(pulses == 2, "no extra pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
