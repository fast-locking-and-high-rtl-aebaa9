// edge_detector: behavioural model of the edge detector (ED) of the toggle
// detector. Not synthesizable logic: it relies on a real buffer delay.
//
// A buffer delays CLK_REF by T_BUF and an XOR compares the delayed copy with
// CLK_REF, so ed_pulse is high for T_BUF after every rising and every
// falling edge of CLK_REF. The buffer+XOR structure is the paper's; the
// delay value (T_BUF, in ps) is this model's own choice.
`timescale 1ps/1fs
module edge_detector #(
  parameter real T_BUF = 8.0   // buffer delay = pulse width, ps
) (
  input  logic clk_ref,
  output logic ed_pulse
);
  logic clk_ref_dly;

  assign #(T_BUF) clk_ref_dly = clk_ref;

  assign ed_pulse = clk_ref ^ clk_ref_dly;
endmodule
