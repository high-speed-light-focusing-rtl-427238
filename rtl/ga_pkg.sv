// ga_pkg: shared sizes, types and constants of the wavefront-shaping genetic
// algorithm (GA) engine.
//
// The mask shown on the 1024x768 digital micromirror device (DMD) is moved
// around in 128-bit words, eight words per DMD row, row after row
// (word address = row*8 + column_word). Bit i of a word is pixel column
// (column_word*128 + i). The 1024x768 pixels are grouped into 64x64
// modulation modes of 16 columns x 12 rows each, so one word holds eight
// whole modes side by side.
//
// The sizes (1024x768 mask, 128-bit transfer word, 64x64 modes, population
// of 16, mutation-rate constants of Eq. (4)) follow the paper. The fitness
// width, slot numbering and the enum encodings are this design's choices.
package ga_pkg;

  localparam int unsigned WORD_W        = 128;  // DMD / DDR transfer word
  localparam int unsigned MASK_ROWS     = 768;  // DMD rows
  localparam int unsigned WORDS_PER_ROW = 8;    // 1024 columns / 128
  localparam int unsigned SEG_ROWS      = 12;   // DMD rows per mode (768/64)
  localparam int unsigned MODE_PIX      = 16;   // DMD columns per mode (1024/64)
  localparam int unsigned POP           = 16;   // masks per population
  localparam int unsigned N_ITER        = 2000; // GA iterations per run
  localparam int unsigned FIT_W         = 24;   // accumulated ADC value
  localparam int unsigned TH_W          = 15;   // log2(epsilon), epsilon = 2^15

  // Eq. (4): R = (kappa_start - (k-1)*tau) / epsilon, floored at R_end.
  localparam int unsigned KAPPA_START   = 2000;
  localparam int unsigned TAU           = 12;
  localparam int unsigned R_END_NUM     = 393;  // 0.012 * 2^15, rounded down

  typedef logic [WORD_W-1:0] word_t;

  // What the GA engine writes into the mask buffer.
  typedef enum logic [1:0] {
    GEN_RANDOM = 2'd0,  // initial population: every mode random
    GEN_EVOLVE = 2'd1,  // offspring: uniform crossover of two parents + mutation
    GEN_COPY   = 2'd2   // copy of the best parent (final display)
  } gen_mode_e;

endpackage
