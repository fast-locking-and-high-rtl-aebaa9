// tb_vcdl: self-checking test of the delay-line model.
// With fixed biases every delay element has the same delay t_DE, worked out
// here from the device formula (2 CSIs, C = 3.5 fF, four tails, Vov =
// 0.25 V). Checked on a 600 ps input clock: CLK_OUT[i+1] rises t_DE after
// CLK_OUT[i]; CLK_REF, the complement of CLK_OUT[0], rises when it falls;
// CLK_FB rises 8 t_DE after
// CLK_REF; disabled phases stay low.
`timescale 1ps/1fs
module tb_vcdl;
  localparam real T = 600.0;
  logic clk_in_p = 1'b0, clk_in_n = 1'b1;
  real vctrlp = 0.25, vctrln = 0.5;
  logic [1:0] cb_en = 2'd0;
  logic [3:0] bw_p = 4'hF, bw_n = 4'hF;
  logic [7:0] en_clkout = 8'hFF, clk_out;
  logic clk_ref, clk_fb;
  realtime t_out[8], t_out0_fall, t_ref, t_fb;
  real t_de;
  int checks = 0, failures = 0;

  vcdl dut (.*);

  always #(T/2) begin clk_in_p = ~clk_in_p; clk_in_n = ~clk_in_n; end
  for (genvar i = 0; i < 8; i++) begin : g_mon
    always @(posedge clk_out[i]) t_out[i] = $realtime;
  end
  always @(negedge clk_out[0]) t_out0_fall = $realtime;
  always @(posedge clk_ref) t_ref = $realtime;
  always @(posedge clk_fb)  t_fb  = $realtime;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    t_de = 2.0 * 3.5 * (3.0 + 1.0 / (0.002 + 4.0 * 0.25));
    #(10*T);
    @(posedge clk_in_p); #(T - 1.0);   // every phase of this cycle has risen
    for (int i = 1; i < 8; i++)
      check(t_out[i] - t_out[i-1] > t_de - 0.01 && t_out[i] - t_out[i-1] < t_de + 0.01,
            $sformatf("phase %0d spacing %0.3f expected %0.3f", i, t_out[i] - t_out[i-1], t_de));
    // CLK_REF is the N-side buffer of element 0: the complement of CLK_OUT[0]
    check(t_ref == t_out0_fall, $sformatf("CLK_REF rises when CLK_OUT[0] falls (%0.1f %0.1f)", t_ref, t_out0_fall));
    #(T);
    begin
      real d;
      d = t_fb - t_ref;
      if (d < 0.0) d = d + T;
      check(d > 8.0 * t_de - 0.01 && d < 8.0 * t_de + 0.01,
            $sformatf("CLK_FB - CLK_REF %0.3f expected %0.3f", d, 8.0 * t_de));
    end
    en_clkout = 8'h0F;
    repeat (3) @(posedge clk_in_p);
    check(clk_out[7:4] == 4'h0, "disabled phases stay low");
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
