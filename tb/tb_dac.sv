// tb_dac: self-checking test of the bias DAC model.
// Expected values: V = 0.4 V * code / 1024 once settled; T_RISE (20 ps)
// after a jump the output shows an overshoot of half the jump (clamped at
// 0.75 V); a second code change during the overshoot cancels the first.
`timescale 1ps/1fs
module tb_dac;
  logic [9:0] code = '0;
  real vout;
  int checks = 0, failures = 0;

  dac dut (.code(code), .vout(vout));

  function automatic real v_of(input int c);
    return 0.4 * real'(c) / 1024.0;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit near(input real a, input real b);
    return (a - b < 1e-6) && (b - a < 1e-6);
  endfunction

  initial begin
    #1000;
    check(near(vout, 0.0), "code 0 -> 0 V");
    code = 10'd512; #10;
    check(near(vout, 0.0), "not yet moved 10 ps after the change");
    #20;
    check(near(vout, v_of(512) + 0.5 * v_of(512)), $sformatf("overshoot %f", vout));
    #1000;
    check(near(vout, v_of(512)), $sformatf("settled %f", vout));
    code = 10'd256; #30;
    check(near(vout, v_of(256) - 0.5 * v_of(256)), "undershoot on a downward jump");
    #1000;
    check(near(vout, v_of(256)), "settled 256");
    code = 10'd1023; #30;
    check(near(vout, 0.4 * 1023.0 / 1024.0 + 0.5 * (v_of(1023) - v_of(256))), "overshoot 256->1023");
    code = 10'd700; #1000;
    check(near(vout, v_of(700)), "a newer code cancels the pending overshoot");
    for (int c = 0; c < 1024; c += 93) begin
      code = 10'(c); #1000;
      check(near(vout, v_of(c)), $sformatf("code %0d -> %f", c, vout));
    end
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
