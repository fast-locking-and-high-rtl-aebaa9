// mm_dll: top level of the mixed-mode binary-search delay-locked loop.
//
// The delay line (vcdl) makes eight phases of CLK_IN; its delay is set by
// V_CTRLP from the 10-bit DAC and V_CTRLN from the replica bias. A bang-bang
// phase detector compares CLK_REF (after the first delay element) with
// CLK_FB (eight elements later). The binary-search controller, clocked by
// CLK_CTRL = CLK_IN / N, moves the DAC code by a halving step each control
// cycle and locks after B+1 = 11 cycles. A toggle detector watches CLK_REF
// against CLK_IN; when the clock stalls (a bias overshoot has starved the
// line) the controller reverts to the last working code with a smaller step,
// and after a second stall it reports `error`. This wiring is the paper's
// block diagram. The toggle detector and phase detector are reset by the
// global reset or by the controller's pd_rst pulse.
//
// The top contains behavioural models of the analog parts (DAC, replica,
// delay line, edge-detector buffer) and is meant for simulation; the digital
// part (bs_controller, clk_div, bbpd, toggle_detector) is synthesizable.
// The PLL that generates CLK_IN,P/N is outside this design.
//
// Interface: rst is asynchronous, active high. After rst falls, raise en;
// locked rises B control-clock cycles later. cb_en, bw_p and bw_n select the
// delay range for the input frequency (a new start with other settings is
// the paper's answer to `error`).
`timescale 1ps/1fs
module mm_dll
  import dll_pkg::*;
#(
  parameter int unsigned B = DAC_BITS
) (
  input  logic                  clk_in_p,
  input  logic                  clk_in_n,
  input  logic                  rst,
  input  logic                  en,
  input  logic                  freeze,
  input  div_sel_t              div_sel,
  input  logic [1:0]            cb_en,
  input  logic [3:0]            bw_p,
  input  logic [3:0]            bw_n,
  input  logic [NUM_PHASES-1:0] en_clkout,
  input  logic [B-1:0]          code_init,
  input  logic [B-1:0]          step_init,
  output logic [NUM_PHASES-1:0] clk_out,
  output logic                  clk_ref,
  output logic                  clk_fb,
  output logic                  clk_ctrl,
  output logic [B-1:0]          code,
  output logic [B-1:0]          codepre,
  output logic [B-1:0]          step,
  output bs_state_t             state,
  output logic                  pd_er,
  output logic                  toggling,
  output logic                  locked,
  output logic                  stall_event,
  output logic                  error
);
  real          vctrlp, vctrln;
  logic         pd_rst, det_rst, ed_pulse;

  assign det_rst = rst | pd_rst;

  vcdl u_vcdl (
    .clk_in_p(clk_in_p), .clk_in_n(clk_in_n), .vctrlp(vctrlp), .vctrln(vctrln),
    .cb_en(cb_en), .bw_p(bw_p), .bw_n(bw_n), .en_clkout(en_clkout),
    .clk_out(clk_out), .clk_ref(clk_ref), .clk_fb(clk_fb)
  );

  dac #(.B(B)) u_dac (.code(code), .vout(vctrlp));

  replica_bias u_replica (.vctrlp(vctrlp), .vctrln(vctrln));

  clk_div u_div (.clk_in(clk_in_p), .rst(rst), .div_sel(div_sel), .clk_ctrl(clk_ctrl));

  bbpd u_pd (.clk_ref(clk_ref), .clk_fb(clk_fb), .rst(det_rst), .pd_er(pd_er));

  edge_detector u_ed (.clk_ref(clk_ref), .ed_pulse(ed_pulse));

  toggle_detector u_td (.clk_in(clk_in_p), .ed_pulse(ed_pulse), .rst(det_rst), .toggling(toggling));

  bs_controller #(.B(B)) u_bs (
    .clk_ctrl(clk_ctrl), .rst(rst), .en(en), .freeze(freeze),
    .code_init(code_init), .step_init(step_init),
    .pd_er(pd_er), .toggling(toggling),
    .code(code), .codepre(codepre), .step(step), .state(state),
    .locked(locked), .stall_event(stall_event), .error(error), .pd_rst(pd_rst)
  );
endmodule
