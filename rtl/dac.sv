// dac: behavioural model of the B-bit bias DAC (analog; not synthesizable).
//
// Converts the controller's code into the PMOS tail bias V_CTRLP =
// VFS * code / 2^B (code 0 = lowest V_CTRLP = strongest pull-up = shortest
// delay). A code change does not settle at once: T_RISE after the change
// the output reaches the target plus OVERSHOOT times the size of the jump
// (the bias overshoot that large binary-search steps cause), and it settles
// to the target T_OVS later. A newer code change cancels the pending one.
// The 10-bit resolution and the overshoot on large steps follow the paper;
// VFS, the timing and the overshoot figure are this model's own numbers.
// Output is a real voltage in volts.
`timescale 1ps/1fs
module dac
  import dll_pkg::*;
#(
  parameter int unsigned B = DAC_BITS,
  parameter real VFS       = 0.4,    // full-scale voltage, V
  parameter real VMAX      = 0.75,   // output clamp (supply), V
  parameter real OVERSHOOT = 0.5,    // overshoot as a fraction of the jump
  parameter real T_RISE    = 20.0,   // ps from code change to peak
  parameter real T_OVS     = 400.0   // ps the overshoot lasts
) (
  input  logic [B-1:0] code,
  output real          vout
);
  int unsigned seq;
  real target;

  function automatic real code2v(input logic [B-1:0] c);
    return VFS * real'(c) / real'(2.0 ** B);
  endfunction

  initial begin
    seq    = 0;
    target = code2v(code);
    vout   = target;
    forever begin
      @(code);
      seq = seq + 1;
      fork
        begin : settle
          automatic int unsigned id = seq;
          automatic real prev = target;
          automatic real tgt  = code2v(code);
          automatic real peak = tgt + OVERSHOOT * (tgt - prev);
          target = tgt;
          if (peak > VMAX) peak = VMAX;
          if (peak < 0.0)  peak = 0.0;
          #(T_RISE);
          if (id == seq) vout = peak;
          #(T_OVS);
          if (id == seq) vout = tgt;
        end
      join_none
    end
  end
endmodule
