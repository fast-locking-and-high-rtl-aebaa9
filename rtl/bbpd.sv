// bbpd: bang-bang phase detector.
//
// One flip-flop samples CLK_REF on the rising edge of CLK_FB. Since CLK_FB
// is CLK_REF delayed by eight delay elements, a sampled 1 means CLK_REF's
// rising edge came first (CLK_REF leads: the line is too slow) and pd_er = 1
// asks the controller to decrease the code; a 0 means CLK_FB leads and the
// code must rise. The paper gives only this input/output convention; the
// single-flip-flop detector, its reset value 0 and its asynchronous reset
// (driven by the controller after a clock-failure revert) are this design's
// choices. It is valid while the loop delay lies between half and one and a
// half clock periods, which the binary search guarantees by starting from
// the shortest delay.
`timescale 1ps/1fs
module bbpd (
  input  logic clk_ref,
  input  logic clk_fb,
  input  logic rst,      // asynchronous, active high
  output logic pd_er     // 1: CLK_REF leads CLK_FB
);
  always_ff @(posedge clk_fb or posedge rst) begin
    if (rst) pd_er <= 1'b0;
    else     pd_er <= clk_ref;
  end
endmodule
