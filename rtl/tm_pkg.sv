`timescale 1ps/1ps
// tm_pkg: shared constants of the event-driven Coalesced Tsetlin Machine
// (CoTM) inference pipeline.
//
// The model sizes are those of the Iris configuration the design is
// demonstrated with: 16 Boolean features, 12 clauses and 3 classes. The
// 3-bit coarse index and 3-bit fine value of the logarithmic delay code
// follow the signal widths of the design's published waveforms. Everything
// else here (weight magnitude width, unit delays of the time-domain models)
// is a choice of this implementation, picked so that the largest possible
// class sum still fits the 8-bit sum that a 3-bit coarse index can address.
//
// All delays are in picoseconds (timescale 1 ps / 1 ps throughout).
package tm_pkg;

  // Model size (Iris configuration).
  localparam int NUM_FEATURE = 16;
  localparam int NUM_CLAUSE  = 12;
  localparam int NUM_CLASS   = 3;

  // Logarithmic delay code: coarse index k (K_BITS) and fine value f (E_BITS).
  localparam int E_BITS = 3;
  localparam int K_BITS = 3;
  localparam int SUM_W  = 1 << K_BITS;      // widest sum k can index

  // Clause weights: sign bit plus WMAG_W-bit magnitude (own choice).
  localparam int WMAG_W = 4;

  // Time-domain models (own choice).
  localparam int TAU_PS         = 80;       // coarse delay unit tau
  localparam int DCDE_UNIT_PS   = 5;        // DCDE delay per code step
  localparam int MATCH_DELAY_PS = 400;      // click-stage matched delay
  localparam int T_CQ_PS        = 50;       // phase-register clock-to-output
  localparam int T_CELL_PS      = 20;       // intrinsic delay of a delay line
  localparam int T_MUTEX_PS     = 2;        // mutex resolution delay
  localparam int HD_UNIT_PS     = 40;       // multi-class TM: delay per clause mismatch

  // Signed delay code from the TDC: spans +-(2**(K_BITS+E_BITS) - 1).
  localparam int DC_W = K_BITS + E_BITS + 1;

endpackage
