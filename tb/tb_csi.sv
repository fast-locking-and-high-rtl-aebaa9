// tb_csi: self-checking test of the current-starved inverter model.
// The expected edge delay is computed here from the device formula
// t = C * (3 kOhm + 1 / (0.002 mS + 1 mS/V * n_on * Vov)), with Vov = V_CTRLN
// - 0.25 V for a falling output and 0.75 V - V_CTRLP - 0.25 V for a rising
// one. Checked: both output polarities invert; rise and fall delays for
// several biases, branch counts and loads; a stage whose delay exceeds the
// half period swallows the clock (no output edges).
`timescale 1ps/1fs
module tb_csi;
  logic in_p = 1'b0, in_n = 1'b1, out_p, out_n;
  real vctrlp = 0.2, vctrln = 0.55, c_load = 4.0;
  logic [3:0] bw_p = 4'hF, bw_n = 4'hF;
  realtime t_in, t_out;
  int checks = 0, failures = 0, out_edges = 0;

  csi dut (.*);

  always @(posedge out_n or negedge out_n) begin t_out = $realtime; out_edges++; end

  function automatic real t_exp(input real vov, input int n, input real c);
    if (vov < 0.0) vov = 0.0;
    return c * (3.0 + 1.0 / (0.002 + 1.0 * real'(n) * vov));
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic edge_test(input real vp, input real vn, input logic [3:0] bw, input real c);
    real exp_f, exp_r;
    vctrlp = vp; vctrln = vn; bw_p = bw; bw_n = bw; c_load = c;
    #5000;
    exp_f = t_exp(vn - 0.25, $countones(bw), c);
    exp_r = t_exp(0.75 - vp - 0.25, $countones(bw), c);
    t_in = $realtime; in_p = 1'b1; in_n = 1'b0;
    #(exp_f + exp_r + 10.0);
    check(out_n == 1'b0 && out_p == 1'b1, "outputs invert after a rising input");
    check(t_out - t_in > exp_f - 0.01 && t_out - t_in < exp_f + 0.01,
          $sformatf("fall delay %0.3f expected %0.3f", t_out - t_in, exp_f));
    t_in = $realtime; in_p = 1'b0; in_n = 1'b1;
    #(exp_f + exp_r + 10.0);
    check(out_n == 1'b1 && out_p == 1'b0, "outputs invert after a falling input");
    check(t_out - t_in > exp_r - 0.01 && t_out - t_in < exp_r + 0.01,
          $sformatf("rise delay %0.3f expected %0.3f", t_out - t_in, exp_r));
  endtask

  initial begin
    #100;
    edge_test(0.20, 0.55, 4'hF, 4.0);
    edge_test(0.35, 0.40, 4'hF, 4.0);
    edge_test(0.30, 0.45, 4'h1, 4.0);
    edge_test(0.30, 0.45, 4'h3, 13.1);
    edge_test(0.10, 0.65, 4'h0, 2.0);    // static branch only
    // a 100 ps half period with a 1 us stage delay: all edges swallowed
    vctrlp = 0.5; vctrln = 0.25; bw_p = 4'hF; bw_n = 4'hF; c_load = 4.0;
    #5000;
    out_edges = 0;
    repeat (40) begin #100 in_p = ~in_p; in_n = ~in_n; end
    #3000;
    check(out_edges == 0, $sformatf("stalled stage passed %0d edges", out_edges));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
