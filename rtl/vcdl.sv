// vcdl: behavioural model of the voltage-controlled delay line (analog; not
// synthesizable as a whole, its elements are behavioural models).
//
// Ten delay elements in a chain fed by CLK_IN,P/N. Element i (i = 0..7)
// drives phase CLK_OUT[i] from its P clock buffer; element 0's N buffer
// gives CLK_REF and element 8's N buffer gives CLK_FB, so CLK_FB is CLK_REF
// delayed by eight elements. When the loop is locked that delay equals one
// input period and the eight phases are T_clkin/8 apart. Element 9 is a
// dummy load that gives element 8 the same load as the others. This wiring
// is the paper's. All elements share V_CTRLP/V_CTRLN, CB_EN and BW_P/BW_N.
// The per-phase output enables en_clkout[7:0] are this design's choice
// (the paper shows one enable per buffer); the CLK_REF and CLK_FB buffers are
// always enabled and the unconnected buffers are disabled.
`timescale 1ps/1fs
module vcdl
  import dll_pkg::*;
(
  input  logic                  clk_in_p,
  input  logic                  clk_in_n,
  input  real                   vctrlp,
  input  real                   vctrln,
  input  logic [1:0]            cb_en,
  input  logic [3:0]            bw_p,
  input  logic [3:0]            bw_n,
  input  logic [NUM_PHASES-1:0] en_clkout,
  output logic [NUM_PHASES-1:0] clk_out,
  output logic                  clk_ref,
  output logic                  clk_fb
);
  logic [NUM_DE:0]   chain_p, chain_n;
  logic [NUM_DE-1:0] en_p, en_n, out_p, out_n;

  assign chain_p[0] = clk_in_p;
  assign chain_n[0] = clk_in_n;

  always_comb begin
    en_p = '0;
    en_n = '0;
    en_p[NUM_PHASES-1:0] = en_clkout;
    en_n[0]              = 1'b1;          // CLK_REF
    en_n[NUM_PHASES]     = 1'b1;          // CLK_FB
  end

  for (genvar i = 0; i < NUM_DE; i++) begin : g_de
    delay_element u_de (
      .de_in_p(chain_p[i]), .de_in_n(chain_n[i]),
      .vctrlp(vctrlp), .vctrln(vctrln),
      .cb_en(cb_en), .bw_p(bw_p), .bw_n(bw_n),
      .en_clkout_p(en_p[i]), .en_clkout_n(en_n[i]),
      .de_out_p(chain_p[i+1]), .de_out_n(chain_n[i+1]),
      .clk_out_p(out_p[i]), .clk_out_n(out_n[i])
    );
  end

  assign clk_out = out_p[NUM_PHASES-1:0];
  assign clk_ref = out_n[0];
  assign clk_fb  = out_n[NUM_PHASES];
endmodule
