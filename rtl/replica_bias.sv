// replica_bias: behavioural model of the replica bias circuit (analog; not
// synthesizable).
//
// Produces the NMOS tail bias V_CTRLN from the DAC's PMOS bias V_CTRLP so
// that both tails are starved by the same amount: V_CTRLN = VDD - V_CTRLP +
// V_OFS. The paper states only that a replica generates V_CTRLN and that the
// two biases are nearly symmetrical; the mirror formula and the optional
// offset V_OFS (to model the "nearly") are this model's own. VDD = 0.75 V is
// the paper's supply. Voltages are reals in volts; the output follows the
// input after T_D ps.
`timescale 1ps/1fs
module replica_bias #(
  parameter real VDD   = 0.75,
  parameter real V_OFS = 0.0,
  parameter real T_D   = 5.0
) (
  input  real vctrlp,
  output real vctrln
);
  initial vctrln = VDD;
  always @(vctrlp) vctrln <= #(T_D) (VDD - vctrlp + V_OFS);
endmodule
