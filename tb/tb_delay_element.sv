// tb_delay_element: self-checking test of the delay-element model.
// The element is two CSIs, so its delay is twice the CSI delay computed
// here from the device formula with the load C = 3.5 fF + 3.2 fF * CB_EN.
// Checked: DE_OUT follows DE_IN (non-inverting) with that delay for every
// CB_EN value; a larger CB_EN gives a longer delay; the clock buffers pass
// the output only when enabled.
`timescale 1ps/1fs
module tb_delay_element;
  logic de_in_p = 1'b0, de_in_n = 1'b1;
  real vctrlp = 0.25, vctrln = 0.5;
  logic [1:0] cb_en = 2'd0;
  logic [3:0] bw_p = 4'hF, bw_n = 4'hF;
  logic en_clkout_p = 1'b1, en_clkout_n = 1'b0;
  logic de_out_p, de_out_n, clk_out_p, clk_out_n;
  realtime t_in, t_out;
  real prev_d;
  int checks = 0, failures = 0;

  delay_element dut (.*);

  always @(posedge de_out_p) t_out = $realtime;

  function automatic real t_csi(input real c);
    return c * (3.0 + 1.0 / (0.002 + 4.0 * 0.25));   // Vov = 0.25 V both ways
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    prev_d = 0.0;
    for (int cb = 0; cb < 4; cb++) begin
      real c, d;
      cb_en = 2'(cb);
      c = 3.5 + 3.2 * real'(cb);
      #2000;
      t_in = $realtime; de_in_p = 1'b1; de_in_n = 1'b0;
      #1000;
      d = t_out - t_in;
      check(de_out_p && !de_out_n, "non-inverting");
      check(d > 2.0 * t_csi(c) - 0.01 && d < 2.0 * t_csi(c) + 0.01,
            $sformatf("CB_EN=%0d delay %0.3f expected %0.3f", cb, d, 2.0 * t_csi(c)));
      check(d > prev_d, "delay grows with CB_EN");
      check(clk_out_p == de_out_p && clk_out_n == 1'b0, "clock buffer enables");
      prev_d = d;
      de_in_p = 1'b0; de_in_n = 1'b1;
      #1000;
    end
    en_clkout_p = 1'b0; en_clkout_n = 1'b1; #10;
    check(clk_out_p == 1'b0 && clk_out_n == de_out_n, "disabled P buffer, enabled N buffer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
