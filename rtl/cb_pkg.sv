// cb_pkg -- constants, types and geometry helpers shared by the Crystal Barrel
// timing-branch back-end (discriminator modules, cluster encoder, trigger sum).
//
// The digital logic runs at 200 MHz, so one clock cycle is 5 ns. All times
// below are given in clock cycles of that clock.
//
// Geometry. The calorimeter is handled as a hit matrix of 26 rings (theta,
// rows, growing downwards) by 60 columns (phi, growing to the right, the right
// end wrapping to the left end). Rings with 30 crystals ("wide" rings) place
// each crystal over two neighbouring columns; the crystal is represented by
// its left (even) column, its "primary cell". The matrix is split into two
// halves of 13 rings, each cut into 8 sections in phi: one of 4 columns and
// seven of 8 columns. A section of 8 columns holds 3 x 4 + 10 x 8 = 92
// crystals, the channel count of one discriminator module; the 4-column
// sections hold 46. 16 modules thus cover all 1380 crystal positions.
//
// The 200 MHz clock, the crystal counts, 92 channels per module and the timing
// values follow the readout description; the section layout is read off its
// topology drawings; the matrix representation of the 30-crystal rings, the
// channel numbering and the word formats are this design's choices.
package cb_pkg;

  // Clock: 200 MHz, 5 ns per cycle.
  localparam int unsigned CLK_PERIOD_NS = 5;

  // Calorimeter hit matrix.
  localparam int unsigned CB_ROWS      = 26;   // rings
  localparam int unsigned CB_COLS      = 60;   // phi columns of a 60-crystal ring
  localparam int unsigned HALF_ROWS    = 13;   // rings per module row (half)
  localparam int unsigned SECT_COLS    = 8;    // columns of a full section
  localparam int unsigned N_SECT       = 8;    // sections per half
  localparam int unsigned N_MODULES    = 16;   // discriminator modules
  localparam int unsigned MOD_CHANNELS = 92;   // channels of one module

  // Wide (30 crystal) rings: 0..2 (top of the matrix) and 23..25 (bottom).
  // Rings 24 and 25 are not installed in the present setup.
  localparam logic [CB_ROWS-1:0] WIDE_RINGS      = 26'b11_1000_0000_0000_0000_0000_0111;
  localparam logic [CB_ROWS-1:0] INSTALLED_RINGS = 26'b00_1111_1111_1111_1111_1111_1111;

  // Number of crystals in the full matrix and of installed crystals.
  localparam int unsigned N_CRYSTALS  = 1380;
  localparam int unsigned N_INSTALLED = 1320;

  // First column of section s (s = 0 is the narrow one at columns 0..3).
  function automatic int unsigned sect_col0(int unsigned s);
    return (s == 0) ? 0 : 4 + SECT_COLS * (s - 1);
  endfunction

  function automatic int unsigned sect_ncols(int unsigned s);
    return (s == 0) ? 4 : SECT_COLS;
  endfunction

  // Crystals of a section with 'ncols' columns whose local wide rows are 'wide'.
  function automatic int unsigned sect_channels(int unsigned ncols, logic [HALF_ROWS-1:0] wide);
    int unsigned n = 0;
    for (int r = 0; r < HALF_ROWS; r++) n += wide[r] ? ncols / 2 : ncols;
    return n;
  endfunction

  // Local channel number of cell (r, c) of a section; the cell's crystal.
  function automatic int unsigned cell_channel(int unsigned r, int unsigned c, int unsigned ncols,
                                               logic [HALF_ROWS-1:0] wide);
    int unsigned n = 0;
    for (int i = 0; i < HALF_ROWS; i++) if (i < r) n += wide[i] ? ncols / 2 : ncols;
    return n + (wide[r] ? c / 2 : c);
  endfunction

  // Wide-ring mask of the top (h = 0) or bottom (h = 1) half, local ring order.
  function automatic logic [HALF_ROWS-1:0] half_wide(int unsigned h);
    return h == 0 ? WIDE_RINGS[HALF_ROWS-1:0] : WIDE_RINGS[CB_ROWS-1:HALF_ROWS];
  endfunction

  function automatic logic [HALF_ROWS-1:0] half_installed(int unsigned h);
    return h == 0 ? INSTALLED_RINGS[HALF_ROWS-1:0] : INSTALLED_RINGS[CB_ROWS-1:HALF_ROWS];
  endfunction

  // Global crystal index of module m's local channel 0. Modules are ordered
  // half by half, section by section.
  function automatic int unsigned module_base(int unsigned m);
    int unsigned n = 0;
    for (int i = 0; i < N_MODULES; i++)
      if (i < m) n += sect_channels(sect_ncols(i % N_SECT), half_wide(i / N_SECT));
    return n;
  endfunction

  // Walk-correction timing (Sec. "Online Time-Walk Compensation").
  localparam int unsigned WALK_EVAL_CYC = 30;  // 150 ns high-threshold check
  localparam int unsigned HIT_LEN_CYC   = 24;  // 120 ns hit pulse
  // Cluster cell timing (Fig. 43, final configuration).
  localparam int unsigned CL_DELAY_CYC  = 12;  // 60 ns pattern-check delay D
  localparam int unsigned CL_PULSE_CYC  = 26;  // 130 ns output pulse P

  // Multi-hit TDC word: edge polarity, comparator number, time stamp.
  localparam int unsigned TDC_TS_W = 16;
  typedef struct packed {
    logic                falling;   // 1: trailing edge, 0: leading edge
    logic [7:0]          chan;      // comparator number within the module
    logic [TDC_TS_W-1:0] ts;        // time stamp in 5 ns steps
  } tdc_word_t;

  // Cluster count sampler word.
  typedef struct packed {
    logic [4:0]          count;
    logic [TDC_TS_W-1:0] ts;
  } ccount_word_t;

endpackage
