// delay_element: behavioural model of one delay element (DE) of the delay
// line (analog; not synthesizable).
//
// Two cascaded PS-CSIs, so the element is non-inverting and its delay is the
// sum of the two CSI delays. Each CSI output is loaded by a capacitor bank
// selected by CB_EN[1:0]: C = C_BASE + C_BANK * CB_EN. The second CSI drives
// DE_OUT (to the next element) and two tri-state clock buffers (the phase
// drivers) enabled by EN_CLKOUT_P/N; the first CSI carries matching dummy
// buffers, so both CSIs see the same load. The structure follows the paper;
// the capacitor values and the binary weighting of CB_EN are this model's
// own. In this two-state model a disabled clock buffer drives 0 instead of
// high impedance, and the buffers add no delay.
`timescale 1ps/1fs
module delay_element #(
  parameter real C_BASE = 3.5,   // fF, CSI load with the bank off
  parameter real C_BANK = 3.2    // fF per CB_EN count
) (
  input  logic       de_in_p,
  input  logic       de_in_n,
  input  real        vctrlp,
  input  real        vctrln,
  input  logic [1:0] cb_en,
  input  logic [3:0] bw_p,
  input  logic [3:0] bw_n,
  input  logic       en_clkout_p,
  input  logic       en_clkout_n,
  output logic       de_out_p,
  output logic       de_out_n,
  output logic       clk_out_p,
  output logic       clk_out_n
);
  real  c_load;
  logic mid_p, mid_n;

  always_comb c_load = C_BASE + C_BANK * real'(cb_en);

  // CSI inverts each rail; chaining p->p and n->n keeps de_out_p in phase
  // with de_in_p after the two inversions.
  csi u_csi1 (
    .in_p(de_in_p), .in_n(de_in_n), .vctrlp(vctrlp), .vctrln(vctrln),
    .bw_p(bw_p), .bw_n(bw_n), .c_load(c_load), .out_p(mid_n), .out_n(mid_p)
  );
  csi u_csi2 (
    .in_p(mid_p), .in_n(mid_n), .vctrlp(vctrlp), .vctrln(vctrln),
    .bw_p(bw_p), .bw_n(bw_n), .c_load(c_load), .out_p(de_out_n), .out_n(de_out_p)
  );

  assign clk_out_p = en_clkout_p & de_out_p;
  assign clk_out_n = en_clkout_n & de_out_n;
endmodule
