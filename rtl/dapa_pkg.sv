// dapa_pkg: types and constants shared by the DAPA activation engine and the
// softmax unit built around it.
//
// Data words are 16-bit two's-complement fixed point (Fix16). The number of
// fractional bits is a module parameter (FRAC_W); the same format is used for
// inputs, knots, coefficients and outputs, following the single 16-bit format
// the hardware is built for. The engine holds one table of knots and
// coefficients per function it can approximate; func_e names those tables.
package dapa_pkg;

  // Functions the reconfigurable engine approximates. GELU and the softmax
  // exponential are the two the engine is reconfigured between; the GELU
  // derivative table serves the backward pass of on-device training.
  typedef enum logic [1:0] {
    FN_GELU  = 2'd0,
    FN_EXP   = 2'd1,
    FN_DGELU = 2'd2
  } func_e;

  localparam int unsigned NUM_FUNCS = 3;

  // Which part of a function table a configuration write addresses.
  typedef enum logic [1:0] {
    SEL_KNOT  = 2'd0,   // knot k_(idx+1), idx = 0 .. N-2
    SEL_SLOPE = 2'd1,   // a_idx, idx = 0 .. N-1
    SEL_BIAS  = 2'd2    // b_idx, idx = 0 .. N-1
  } cfg_sel_e;

  // Operating mode of the top level.
  typedef enum logic {
    MODE_ACT     = 1'b0, // element-wise: one result per input, chosen table
    MODE_SOFTMAX = 1'b1  // vector softmax using the exp table
  } mode_e;

endpackage
