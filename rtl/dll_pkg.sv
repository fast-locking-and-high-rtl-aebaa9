// dll_pkg: constants and types shared by the binary-search DLL.
//
// DAC_BITS is the resolution B of the DAC that biases the delay line (10 bits,
// as in the paper); the binary search therefore starts with a step of
// 2^(B-1) = 512 and locks after B+1 = 11 control-clock cycles.
// bs_state_t names the controller states; div_sel_t encodes the ratios the
// control-clock divider supports (1, 2, 4, 6 and 8, as in the paper; the
// 3-bit encoding is this design's own).
`timescale 1ps/1fs
package dll_pkg;
  localparam int unsigned DAC_BITS = 10;
  localparam int unsigned NUM_PHASES = 8;   // CLK_OUT[7:0]
  localparam int unsigned NUM_DE = 10;      // 8 phases + feedback DE + dummy DE

  typedef enum logic [2:0] {
    BS_IDLE   = 3'd0,  // reset / waiting for enable: code = code_init, step = step_init
    BS_SEARCH = 3'd1,  // binary search: check toggling, then code +/- step, step >> 1
    BS_REVERT = 3'd2,  // code was restored to codepre after a stalled clock
    BS_LOCKED = 3'd3,  // step reached 1: code tracks the phase detector by +/-1
    BS_ERROR  = 3'd4   // clock still stalled after the finer retry: wait for reset
  } bs_state_t;

  typedef enum logic [2:0] {
    DIV1 = 3'd0,
    DIV2 = 3'd1,
    DIV4 = 3'd2,
    DIV6 = 3'd3,
    DIV8 = 3'd4
  } div_sel_t;
endpackage
