// csi: behavioural model of the pseudo-differential current-starved
// inverter (PS-CSI) of a delay element (analog; not synthesizable).
//
// Two inverters, in_p -> out_n and in_n -> out_p, each with a pull-up
// through PMOS tails biased by V_CTRLP and a pull-down through NMOS tails
// biased by V_CTRLN. BW_P[3:0]/BW_N[3:0] switch each of four tail branches
// between the bias (on) and the rail that turns it off; a static branch of
// conductance G_STATIC is always on. The delay of an edge is
//   t = C_load * ( R_MAIN + 1 / (G_STATIC + G_TAIL * n_on * Vov) )
// with Vov = V_CTRLN - VT for a falling output and VDD - V_CTRLP - VT for a
// rising one (C in fF, R in kOhm, t in ps). This follows the paper's
// t_d ~ R_eff * C_B with R_eff = main-inverter term + tail term. Edges are
// inertial: an input edge that is undone before its output edge is due is
// swallowed, so a stage too slow for the input period stops toggling. That
// is how the model shows the paper's clock-failure condition. The cross-
// coupled inverters that keep the two rails aligned are not modelled (both
// rails see identical delays here). All numbers are this model's own.
`timescale 1ps/1fs
module csi #(
  parameter real VDD      = 0.75,
  parameter real VT       = 0.25,
  parameter real R_MAIN   = 3.0,    // kOhm, main inverter
  parameter real G_TAIL   = 1.0,    // mS per branch per volt of overdrive
  parameter real G_STATIC = 0.002   // mS, always-on static branch
) (
  input  logic       in_p,
  input  logic       in_n,
  input  real        vctrlp,
  input  real        vctrln,
  input  logic [3:0] bw_p,
  input  logic [3:0] bw_n,
  input  real        c_load,   // fF
  output logic       out_p,
  output logic       out_n
);
  int unsigned seq_n, seq_p;

  function automatic real t_edge(input logic rising);
    real vov;
    int  n_on;
    if (rising) begin
      vov  = VDD - vctrlp - VT;
      n_on = $countones(bw_p);
    end else begin
      vov  = vctrln - VT;
      n_on = $countones(bw_n);
    end
    if (vov < 0.0) vov = 0.0;
    return c_load * (R_MAIN + 1.0 / (G_STATIC + G_TAIL * real'(n_on) * vov));
  endfunction

  initial begin
    out_n = ~in_p;
    seq_n = 0;
    forever begin
      @(in_p);
      seq_n = seq_n + 1;
      fork
        begin : edge_n
          automatic int unsigned id = seq_n;
          automatic logic v = ~in_p;
          #(t_edge(v));
          if (id == seq_n) out_n = v;
        end
      join_none
    end
  end

  initial begin
    out_p = ~in_n;
    seq_p = 0;
    forever begin
      @(in_n);
      seq_p = seq_p + 1;
      fork
        begin : edge_p
          automatic int unsigned id = seq_p;
          automatic logic v = ~in_n;
          #(t_edge(v));
          if (id == seq_p) out_p = v;
        end
      join_none
    end
  end
endmodule
