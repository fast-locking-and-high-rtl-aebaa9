// tb_clk_div: self-checking test of the control-clock divider.
// For each ratio N = 1, 2, 4, 6, 8 it measures the CLK_CTRL period and high
// time in CLK_IN periods: the period must be N and, for even N, the high
// time N/2.
`timescale 1ps/1fs
module tb_clk_div;
  import dll_pkg::*;
  localparam real T = 200.0;
  logic clk_in = 1'b0, rst = 1'b1, clk_ctrl;
  div_sel_t div_sel = DIV1;
  realtime t_r0, t_r1, t_f;
  int checks = 0, failures = 0;

  clk_div dut (.clk_in(clk_in), .rst(rst), .div_sel(div_sel), .clk_ctrl(clk_ctrl));

  always #(T/2) clk_in = ~clk_in;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic measure(input div_sel_t s, input int n);
    rst = 1'b1; div_sel = s; #(3*T); rst = 1'b0;
    repeat (3) @(posedge clk_ctrl);
    repeat (3) begin
      @(posedge clk_ctrl); t_r0 = $realtime;
      @(negedge clk_ctrl); t_f  = $realtime;
      @(posedge clk_ctrl); t_r1 = $realtime;
      check((t_r1 - t_r0) > n*T - 1.0 && (t_r1 - t_r0) < n*T + 1.0,
            $sformatf("N=%0d period %0.1f", n, t_r1 - t_r0));
      check((t_f - t_r0) > n*T/2.0 - 1.0 && (t_f - t_r0) < n*T/2.0 + 1.0,
            $sformatf("N=%0d high time %0.1f", n, t_f - t_r0));
    end
  endtask

  initial begin
    measure(DIV1, 1);
    measure(DIV2, 2);
    measure(DIV4, 4);
    measure(DIV6, 6);
    measure(DIV8, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1000*T);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
