// pim_pkg: sizes, number formats and helper functions shared by the
// trigger-word-detection processing-in-memory (PIM) GRU accelerator.
//
// Network sizes (40 MFCC inputs, 128-wide binary activations, two GRU layers,
// 12 classes) and the 7-level weight / 4-level cell format follow the
// published design. The fixed-point current scale (16 units per cell level),
// the MFCC word width and the hash used to give every analog element a fixed
// pseudo-random mismatch are choices of this implementation.
package pim_pkg;

  localparam int N_MFCC    = 40;   // MFCC coefficients per 8 ms timestep
  localparam int N_HID     = 128;  // width of H^0, H^1, H^2, G and C
  localparam int N_CLS     = 12;   // 10 keywords + silence + unknown
  localparam int W_BITS    = 3;    // signed weight code, -3..+3 = 7 levels
  localparam int CELL_BITS = 2;    // one 4-level MLC holds 0..3 x I_fs/3
  localparam int X_BITS    = 8;    // signed MFCC word

  // Bitline current is represented as a signed integer; one cell level
  // (I_fs/3) is LVL_UNITS units so that sub-level mismatch (offsets, cell
  // errors) can be expressed.
  localparam int LVL_UNITS = 16;
  localparam int BL_W      = 20;   // holds +-(256 rows x 3 levels x 16) + errors

  typedef logic signed [W_BITS-1:0]    wcode_t;
  typedef logic        [CELL_BITS-1:0] lvl_t;
  typedef logic signed [BL_W-1:0]      bl_t;

  // Programming targets of the top-level weight port.
  typedef enum logic [1:0] {
    PROG_WIN  = 2'd0,   // input FC, 40 rows of 128 codes
    PROG_L1   = 2'd1,   // GRU layer 1 array, 256 rows of 256 codes
    PROG_L2   = 2'd2,   // GRU layer 2 array, 256 rows of 256 codes
    PROG_WOUT = 2'd3    // output FC, 128 rows of 12 codes
  } prog_sel_e;

  // Fixed pseudo-random value in [-mag, mag] for analog element 'idx'
  // (mismatch frozen at fabrication). A multiplicative hash with one
  // xor-shift of mixing.
  function automatic int mismatch(input int idx, input int seed, input int mag);
    logic [31:0] h;
    if (mag <= 0) return 0;
    h = (32'(idx) + 32'(seed) * 32'd7919) * 32'h9E37_79B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    return int'(h % 32'(2 * mag + 1)) - mag;
  endfunction

endpackage
