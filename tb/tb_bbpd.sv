// tb_bbpd: self-checking test of the bang-bang phase detector.
// CLK_FB is CLK_REF delayed by d (period 1000 ps). For d between half and
// one period the feedback edge arrives before the next reference edge
// (CLK_FB leads): pd_er must be 0. For d between one and one and a half
// periods CLK_REF leads: pd_er must be 1. Reset forces 0.
`timescale 1ps/1fs
module tb_bbpd;
  localparam real T = 1000.0;
  logic clk_ref = 1'b0, clk_fb = 1'b0, rst = 1'b1, pd_er;
  real d = 900.0;
  int checks = 0, failures = 0;

  bbpd dut (.clk_ref(clk_ref), .clk_fb(clk_fb), .rst(rst), .pd_er(pd_er));

  always #(T/2) clk_ref = ~clk_ref;
  // transport delay: several edges may be in flight when d > T/2
  initial forever begin
    @(clk_ref);
    fork
      begin
        automatic logic v = clk_ref;
        #(d) clk_fb = v;
      end
    join_none
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #(2*T) rst = 1'b0;
    for (int k = 0; k < 8; k++) begin
      d = 550.0 + 120.0 * k;     // 550 .. 1390 ps
      #(6*T);
      check(pd_er == (d > T), $sformatf("d=%0.0f pd_er=%0b", d, pd_er));
    end
    d = 1005.0; #(6*T); check(pd_er == 1'b1, "5 ps late feedback -> 1");
    d = 995.0;  #(6*T); check(pd_er == 1'b0, "5 ps early feedback -> 0");
    d = 1100.0; #(6*T);
    rst = 1'b1; #10;
    check(pd_er == 1'b0, "reset clears pd_er");
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(500*T);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
