// pasm_pkg: constants and types shared by the Parallel-Accumulate-Shared-MAC
// (PASM) accelerator.
//
// The defaults describe the 16-PAS-4-MAC configuration: 32-bit image and
// weight values (w), a 4-bit bin index (wci) addressing b = 2**wci = 16 shared
// weights, 4 image lanes times 4 weight-index lanes feeding 16 PAS units, and
// 4 post-pass MACs. The widths w = 4..32 and bins b = 4..256 are the ranges the
// design is meant to be built for; w = 32, b = 16 is the point most discussed.
// The controller state type lives here so that testbenches can name states.
package pasm_pkg;

  localparam int unsigned W_DEF     = 32;  // image / weight bit width w
  localparam int unsigned WCI_DEF   = 4;   // bin index width wci, b = 2**wci
  localparam int unsigned N_IMG_DEF = 4;   // image inputs per cycle
  localparam int unsigned N_KER_DEF = 4;   // bin index (shared weight) inputs per cycle
  localparam int unsigned N_MAC_DEF = 4;   // post-pass MAC units

  // Controller phases: idle, phase 1 (accumulate into bins), phase 2
  // (multiply bins with weights on the shared MACs).
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_ACCUM = 2'd1,
    ST_MULT  = 2'd2
  } pasm_state_e;

endpackage
