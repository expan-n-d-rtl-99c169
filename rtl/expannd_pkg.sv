// expannd_pkg -- shared constants of the PoFx-based fully-connected layer
// accelerator.
//
// The number formats are fixed here once so that every module agrees on them:
//   * weights and biases are stored and streamed as normalized posits,
//     Posit(N-1, ES): an N-bit posit whose two identical leading bits have been
//     reduced to one, so only N-1 bits are kept;
//   * the PoFx converter turns them into signed fixed point FxP(M, F) with
//     F = M-1 (one sign bit, M-1 fraction bits, range (-1, 1));
//   * activations are signed M-bit fixed point with ACT_FRAC fraction bits;
//   * products are 2M bits wide and the accumulator 3M bits wide.
//
// The defaults follow the configuration the evaluation singles out: Posit
// (N-1 = 6, ES = 2) weights converted to 8-bit fixed point, and a 64 x 10
// fully-connected layer. ACT_FRAC is this design's own choice; the source
// evaluation keeps activations in floating point and gives no fraction width.
//
// Lint note: a module compiled on its own reads the whole package but uses
// only the constants it needs, so unused-parameter warnings that point at
// this package are expected and harmless.
package expannd_pkg;

  // Full posit length N; the stored (normalized) word is N-1 bits.
  parameter int unsigned POSIT_N  = 7;
  parameter int unsigned POSIT_ES = 2;
  // Fixed-point width M of weights after conversion and of activations.
  parameter int unsigned FXP_M    = 8;
  // Fraction bits of the M-bit activations (Q3.4 for M = 8).
  parameter int unsigned ACT_FRAC = 4;
  // Fully-connected layer size: IN_DIM inputs, OUT_DIM neurons.
  parameter int unsigned IN_DIM   = 64;
  parameter int unsigned OUT_DIM  = 10;

  // How the weights are kept inside the accelerator.
  //   STORE_POSIT: moved and stored as Posit(N-1,ES), converted by a PoFx in
  //                every MAC at run time ("Move & Store").
  //   STORE_FXP:   moved as Posit(N-1,ES), converted once by a PoFx on the
  //                load path and stored as FxP(M) ("Move").
  typedef enum logic {
    STORE_FXP   = 1'b0,
    STORE_POSIT = 1'b1
  } store_mode_e;

endpackage
