// lfm_pkg: sizes, data formats and helper functions shared by the
// LF-Monopix readout RTL.
//
// The matrix has 36 columns of 129 pixels. Each pixel stores two 8-bit
// Gray-coded time stamps, one for the leading edge (LE) and one for the
// trailing edge (TE) of its comparator output, and drives them together with
// its row address on a 24-bit column data bus. The end-of-column logic adds the
// column address, giving the 30-bit hit word that is serialised off-chip.
// Matrix size, time-stamp width, 4-bit trim DAC and 24-bit bus width follow the
// published chip; the order of the fields inside the words, the 6-bit column
// field and the widths of the global DAC codes are this design's choice.
package lfm_pkg;

  localparam int unsigned N_COLS  = 36;   // pixel columns
  localparam int unsigned N_ROWS  = 129;  // pixels per column
  localparam int unsigned TS_W    = 8;    // time stamp width (LE and TE)
  localparam int unsigned ROW_W   = 8;    // row address held in the pixel ROM
  localparam int unsigned COL_W   = 6;    // column address added at the end of column
  localparam int unsigned TDAC_W  = 4;    // in-pixel threshold trim DAC
  localparam int unsigned DAC_W   = 8;    // global DAC code width (assumed)
  localparam int unsigned N_FLAVOURS       = 9;  // pixel flavours
  localparam int unsigned COLS_PER_FLAVOUR = 4;  // adjacent columns per flavour

  // Data a pixel drives on the column bus while it is being read (24 bits).
  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [TS_W-1:0]  le;   // Gray-coded time stamp of the leading edge
    logic [TS_W-1:0]  te;   // Gray-coded time stamp of the trailing edge
  } pix_data_t;

  localparam int unsigned PIX_DATA_W = $bits(pix_data_t);

  // Word leaving the chip: column address plus the pixel data (30 bits).
  typedef struct packed {
    logic [COL_W-1:0] col;
    pix_data_t        pix;
  } hit_word_t;

  localparam int unsigned WORD_W = $bits(hit_word_t);

  // Per-pixel configuration bits held in the configuration register.
  typedef struct packed {
    logic [TDAC_W-1:0] tdac;    // threshold trim, to the in-pixel DAC
    logic              inj_en;  // connect the injection capacitor
    logic              en;      // enable the pixel's readout logic
  } pix_cfg_t;

  localparam int unsigned PIX_CFG_W = $bits(pix_cfg_t);

  // Global configuration bits (codes for the periphery DACs).
  typedef struct packed {
    logic [DAC_W-1:0] th_dac;   // global comparator threshold
    logic [DAC_W-1:0] inj_dac;  // injection pulse amplitude
  } glob_cfg_t;

  localparam int unsigned GLOB_CFG_W = $bits(glob_cfg_t);

  function automatic logic [TS_W-1:0] bin2gray(input logic [TS_W-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [TS_W-1:0] gray2bin(input logic [TS_W-1:0] g);
    logic [TS_W-1:0] b;
    b[TS_W-1] = g[TS_W-1];
    for (int i = int'(TS_W) - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // Flavour index (0..8) of a column: four adjacent columns per flavour.
  function automatic int unsigned flavour_of(input int unsigned col);
    return col / COLS_PER_FLAVOUR;
  endfunction

endpackage
