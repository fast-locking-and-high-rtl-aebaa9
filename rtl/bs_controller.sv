// bs_controller: binary-search (BS) loop controller of the delay-locked loop.
//
// What it does: it chooses the B-bit DAC code that sets the delay of the
// voltage-controlled delay line. Starting from code_init (0, the shortest
// delay, so that the feedback clock leads and no harmonic lock is possible)
// it walks a binary tree: each control-clock cycle the code moves by the
// current step, up when pd_er = 0 (feedback clock leads, more delay needed)
// and down when pd_er = 1, and the step is halved by shifting it right. With
// step_init = 2^(B-1) = 512 the code reaches its final value in B+1 = 11
// codes, i.e. `locked` rises at the B-th control-clock edge after `en`. Once
// the step is 1 the code keeps tracking the phase detector by +/-1 (dither).
//
// Clock-failure recovery: before each search update the controller looks at
// `toggling`, the clock-activity flag for the code applied in the previous
// cycle. If the clock was alive, that code is saved in codepre. If it had
// stalled, the code goes back to codepre, the step is halved once more,
// stall_event is raised and the phase detector and toggle detector are reset
// (pd_rst, a half-cycle pulse). The next cycle applies codepre +/- the
// smaller step. If that code stalls too, the controller enters BS_ERROR and
// stays there until rst. `freeze` holds every register (debug).
//
// Follows the paper: the 10-bit code and previous-code registers, the
// step shift register, the add/subtract by PD_ER, the revert-to-codepre
// with a halved step, the stall_event/error behaviour, locking at step 1,
// the configurable initial code and step, and the freeze debug feature.
// Design choices: one update per control-clock cycle (the paper's FSM states
// are combined into one cycle so that lock takes B+1 cycles); the step
// register is B bits wide so that it can hold 512; stall_event is cleared
// once the retried code is seen toggling; the code saturates at 0 and
// 2^B-1; in the locked state toggling is no longer checked; the reset is
// asynchronous and active high.
//
// Interface: all inputs are sampled on the rising edge of clk_ctrl.
// code/step/codepre/state are registered outputs; pd_rst is high from a
// rising edge of clk_ctrl to the following falling edge.
`timescale 1ps/1fs
module bs_controller
  import dll_pkg::*;
#(
  parameter int unsigned B = DAC_BITS
) (
  input  logic         clk_ctrl,
  input  logic         rst,          // asynchronous, active high
  input  logic         en,           // start the search (held high while running)
  input  logic         freeze,       // debug: hold all state
  input  logic [B-1:0] code_init,    // configurable initial code (0 nominal)
  input  logic [B-1:0] step_init,    // configurable initial step (2^(B-1) nominal)
  input  logic         pd_er,        // 1: CLK_REF leads CLK_FB -> decrease delay
  input  logic         toggling,     // 1: CLK_REF is alive for the current code
  output logic [B-1:0] code,         // to the DAC
  output logic [B-1:0] codepre,      // last code seen working
  output logic [B-1:0] step,
  output bs_state_t    state,
  output logic         locked,
  output logic         stall_event,
  output logic         error,
  output logic         pd_rst        // resets BBPD and toggle detector after a revert
);

  localparam logic [B-1:0] CODE_MAX = '1;
  localparam logic [B-1:0] ONE = B'(1);

  // code +/- delta with saturation at the ends of the code range
  function automatic logic [B-1:0] step_code(input logic [B-1:0] c,
                                             input logic [B-1:0] delta,
                                             input logic down);
    logic [B:0] sum;
    if (down) begin
      step_code = (c > delta) ? c - delta : '0;
    end else begin
      sum = {1'b0, c} + {1'b0, delta};
      step_code = sum[B] ? CODE_MAX : sum[B-1:0];
    end
  endfunction

  // step >> 1, keeping the final step of 1
  function automatic logic [B-1:0] halve(input logic [B-1:0] s);
    halve = (s > ONE) ? (s >> 1) : s;
  endfunction

  logic retry;      // current code is the finer retry after a revert
  logic revert_q;   // set on the edge that reverts the code
  logic revert_nq;  // revert_q delayed by half a control-clock cycle

  always_ff @(posedge clk_ctrl or posedge rst) begin
    if (rst) begin
      state       <= BS_IDLE;
      code        <= code_init;
      codepre     <= code_init;
      step        <= step_init;
      stall_event <= 1'b0;
      retry       <= 1'b0;
      revert_q    <= 1'b0;
    end else if (!freeze) begin
      revert_q <= 1'b0;
      unique case (state)
        BS_IDLE: begin
          if (en) begin
            // first move: from code_init jump by step_init (to the midpoint)
            code    <= step_code(code, step, pd_er);
            codepre <= code;
            step    <= halve(step);
            state   <= BS_SEARCH;
          end else begin
            code    <= code_init;
            codepre <= code_init;
            step    <= step_init;
          end
        end
        BS_SEARCH: begin
          if (toggling) begin
            codepre <= code;
            if (retry) begin
              retry       <= 1'b0;
              stall_event <= 1'b0;
            end
            if (step == ONE) begin
              state <= BS_LOCKED;
              code  <= step_code(code, ONE, pd_er);
            end else begin
              code <= step_code(code, step, pd_er);
              step <= halve(step);
            end
          end else if (stall_event) begin
            state <= BS_ERROR;       // the finer retry stalled as well
          end else begin
            code        <= codepre;  // back to the last working code
            step        <= halve(step);
            stall_event <= 1'b1;
            revert_q    <= 1'b1;
            state       <= BS_REVERT;
          end
        end
        BS_REVERT: begin
          if (toggling) begin
            code  <= step_code(code, step, pd_er);
            step  <= halve(step);
            retry <= 1'b1;
            state <= BS_SEARCH;
          end else begin
            state <= BS_ERROR;
          end
        end
        BS_LOCKED: begin
          if (toggling) codepre <= code;
          code <= step_code(code, ONE, pd_er);
        end
        BS_ERROR: ;  // wait for reset
        default: state <= BS_ERROR;
      endcase
    end
  end

  always_ff @(negedge clk_ctrl or posedge rst) begin
    if (rst) revert_nq <= 1'b0;
    else     revert_nq <= revert_q;
  end

  assign pd_rst = revert_q & ~revert_nq;
  assign locked = (state == BS_LOCKED);
  assign error  = (state == BS_ERROR);

  // The step register holds a single '1' that is shifted right.
  a_step_onehot: assert property (@(posedge clk_ctrl) disable iff (rst)
                                  (state != BS_IDLE) |-> $onehot(step))
    else $error("bs_controller: step register is not one-hot");
  a_lock_step1: assert property (@(posedge clk_ctrl) disable iff (rst)
                                 locked |-> (step == ONE))
    else $error("bs_controller: locked with a step above 1");

endmodule
