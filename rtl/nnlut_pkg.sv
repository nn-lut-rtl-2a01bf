// nnlut_pkg: constants shared by the NN-LUT special function unit.
//
// The NN-LUT unit replaces a non-linear function f(x) (GELU, exp, 1/x, 1/sqrt(x)) by
// a 16-segment first-order table: y = s_i*x + t_i, where segment i is chosen by
// comparing x with 15 sorted breakpoints. The numbers below are the defaults of
// the modules: the 16-entry table, 32-bit integer data path, the 2^10 input
// scale of the 1/sqrt trick and the two-cycle latency follow the published
// design; the fixed-point split (24 fractional bits for s, 16 for x) is this
// implementation's own choice.
package nnlut_pkg;

  // Number of LUT entries (segments); there is one breakpoint fewer.
  localparam int unsigned DEF_N_ENTRIES = 16;
  // Width of x, s, t, d and y (INT32 configuration).
  localparam int unsigned DEF_DATA_W    = 32;
  // Fractional bits of the slope s (y = (s*x) >>> SFRAC + t). 24 keeps the small
  // slopes of 1/x near x = 1024 (about -1e-6) while slopes up to +-128 still fit.
  localparam int unsigned DEF_SFRAC     = 24;
  // Fractional bits of the input x, i.e. 1.0 == 2**XFRAC (used by input scaling).
  localparam int unsigned DEF_XFRAC     = 16;
  // log2 of the input scale S used for small 1/sqrt inputs (S = 2**10).
  localparam int unsigned DEF_LOG2_S    = 10;
  // Number of parallel lanes in the special function unit.
  localparam int unsigned DEF_LANES     = 16;
  // Cycles from an input sample to its output (look-up cycle + multiply-add cycle).
  localparam int unsigned LATENCY       = 2;

endpackage
