// Shared types, constants and fixed-point helpers of the Q-learning accelerators.
//
// All datapath values are Q7.8 two's-complement words (16 bits, 8 fraction bits).
// The word and fraction length are this design's choice; the arithmetic helpers
// saturate instead of wrapping. Accumulators are 32 bits wide (Q23.8).
// The sigmoid and derivative tables cover net values in [-8, 8) with 256 entries,
// so the address is the net shifted right by LUT_SHIFT bits and clamped.
package ql_pkg;
  localparam int unsigned DW        = 16;  // word length
  localparam int unsigned FW        = 8;   // fraction length
  localparam int unsigned ACC_W     = 32;  // accumulator width
  localparam int unsigned LUT_AW    = 8;   // activation table address width
  localparam int unsigned LUT_SHIFT = 4;   // net LSBs dropped to form the address (1/16 step)
  localparam int unsigned AIDX_W    = 8;   // width of an action index / action count

  typedef logic signed [DW-1:0]    fx_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [AIDX_W-1:0]       aidx_t;

  localparam fx_t FX_MAX = 16'sh7fff;
  localparam fx_t FX_MIN = -16'sh8000;

  // Phases of one Q-value update (see ql_ctrl).
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,  // waiting for start with s_t
    PH_FF_CUR  = 3'd1,  // feed-forward of every action of s_t
    PH_WAIT    = 3'd2,  // action a_t offered, waiting for s_t+1
    PH_FF_NEXT = 3'd3,  // feed-forward of every action of s_t+1
    PH_SCAN    = 3'd4,  // both Q buffers read out in parallel
    PH_BP      = 3'd5   // error, deltas, weight changes, weight write
  } phase_e;

  // Run-time configuration shared by both accelerators.
  typedef struct packed {
    aidx_t num_actions;  // A, 1..A_MAX
    fx_t   alpha;        // Q-learning rate (Eq. 4/8)
    fx_t   gamma;        // discount factor
    fx_t   c_lr;         // network learning factor C (Eq. 9/13)
  } ql_cfg_t;

  // Clamp a wide signed value to the Q7.8 range.
  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'sd32767)       return FX_MAX;
    else if (v < -64'sd32768) return FX_MIN;
    else                      return fx_t'(v);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(64'(a) + 64'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(64'(a) - 64'(b));
  endfunction

  // Product of two Q7.8 values, truncated (floor) to Q7.8 and saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_sat(p >>> FW);
  endfunction

  // Net value to activation-table address: floor(net / 16) clamped to [-128, 127], offset by 128.
  function automatic logic [LUT_AW-1:0] lut_addr(input acc_t net);
    acc_t q;
    q = net >>> LUT_SHIFT;
    if (q > acc_t'(127))       q = acc_t'(127);
    else if (q < -acc_t'(128)) q = -acc_t'(128);
    return {~q[LUT_AW-1], q[LUT_AW-2:0]};
  endfunction
endpackage
