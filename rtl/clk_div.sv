// clk_div: configurable clock divider making the control clock CLK_CTRL from
// CLK_IN.
//
// Supports N = 1, 2, 4, 6 and 8 (the paper's set). For even N a counter
// toggles a flip-flop every N/2 input cycles, giving a 50 % duty cycle; for
// N = 1 the input clock is passed through a clock multiplexer. Selecting a
// new ratio takes effect at the next toggle. The counter structure and the
// encoding of div_sel are this design's choices. rst is asynchronous and
// active high and leaves clk_ctrl low.
`timescale 1ps/1fs
module clk_div
  import dll_pkg::*;
(
  input  logic     clk_in,
  input  logic     rst,
  input  div_sel_t div_sel,
  output logic     clk_ctrl
);
  logic [1:0] cnt;
  logic [1:0] half_m1;   // N/2 - 1
  logic       q;

  always_comb begin
    unique case (div_sel)
      DIV2:    half_m1 = 2'd0;
      DIV4:    half_m1 = 2'd1;
      DIV6:    half_m1 = 2'd2;
      DIV8:    half_m1 = 2'd3;
      default: half_m1 = 2'd0;   // DIV1 does not use the counter
    endcase
  end

  always_ff @(posedge clk_in or posedge rst) begin
    if (rst) begin
      cnt <= '0;
      q   <= 1'b0;
    end else if (cnt >= half_m1) begin
      cnt <= '0;
      q   <= ~q;
    end else begin
      cnt <= cnt + 2'd1;
    end
  end

  assign clk_ctrl = (div_sel == DIV1) ? clk_in : q;
endmodule
