// toggle_detector: clock-failure (stalled clock) detector.
//
// FF1 loads a constant 1 on every rising edge of clk_in and is cleared
// asynchronously by ed_pulse, the short pulse the edge detector makes at
// each rising and falling edge of CLK_REF. FF2 samples FF1 on the next
// rising edge of clk_in. While CLK_REF toggles, FF1 is always cleared
// before FF2 samples it, FF2 stays 0 and `toggling` = ~FF2 stays 1. When
// CLK_REF stops, FF1 keeps its 1, FF2 captures it and `toggling` falls,
// less than one and a half clk_in cycles after the last CLK_REF edge. FF2
// is cleared only by rst and, once set, holds its 1, so the flag stays low
// until the controller resets the detector even if CLK_REF starts again
// (a bias overshoot can stop the line only for a few hundred ps).
//
// This follows the paper's circuit (two flip-flops, the OR of the edge
// pulse and reset on FF1's clear, reset on FF2's clear, an inverter at the
// output). The buffer between FF1 and FF2 only adds delay and is left out;
// FF2 is clocked by clk_in like FF1, which the paper implies but does not
// state. The paper says the low flag persists until the detector is
// reset; the hold path on FF2 that makes it so is this design's reading of
// that sentence, since a plain FF2 would clear itself once CLK_REF resumes.
// The edge detector itself needs a real delay and is a separate
// behavioural model (edge_detector).
//
// Interface: rst is asynchronous, active high; toggling is valid after the
// second rising edge of clk_in following reset.
`timescale 1ps/1fs
module toggle_detector (
  input  logic clk_in,
  input  logic ed_pulse,   // pulse at every edge of CLK_REF
  input  logic rst,        // global reset or controller's pd_rst
  output logic toggling
);
  logic ff1_q, ff2_q;
  logic ff1_clr;

  assign ff1_clr = ed_pulse | rst;

  always_ff @(posedge clk_in or posedge ff1_clr) begin
    if (ff1_clr) ff1_q <= 1'b0;
    else         ff1_q <= 1'b1;
  end

  always_ff @(posedge clk_in or posedge rst) begin
    if (rst) ff2_q <= 1'b0;
    else     ff2_q <= ff2_q | ff1_q;   // holds a detected stall until reset
  end

  assign toggling = ~ff2_q;
endmodule
