// wagonn_pkg: constants and types shared by the WAGONN matrix-vector-multiply
// unit (MVMU).
//
// The array geometry (128x128 crossbars) and the word-line grouping used with
// partial word-line activation (two groups of 64 rows) are the paper's main
// configuration. The input precision, the number of crossbars in one MVMU and
// the ADC resolution are not given there; the values below are this design's
// choice (8-bit unsigned activations, four crossbars, an 8-bit ADC that can
// represent every count 0..128 of a 128-row column).
package wagonn_pkg;

  // Crossbar geometry (paper: 128x128 8T-SRAM arrays).
  localparam int unsigned XBAR_ROWS = 128;
  localparam int unsigned XBAR_COLS = 128;

  // Input activation precision, applied bit-serially (assumed).
  localparam int unsigned IN_BITS = 8;

  // Crossbars per MVMU, each with its own LUT and re-mapped register (assumed).
  localparam int unsigned NUM_XBAR = 4;

  // ADCs per crossbar (paper's main overhead figure: 1; also evaluates 16).
  localparam int unsigned ADCS_PER_XBAR = 1;

  // ADC resolution (assumed: lossless for a fully activated 128-row column).
  localparam int unsigned ADC_BITS = 8;

  // Word-line groups for PWA / DPWA (paper: 64 WLs per cycle on 128 rows).
  localparam int unsigned WL_GROUPS = 2;

  // Word-line activation scheme of one MVM.
  //   WL_ALL  : every row asserted in one cycle
  //   WL_PWA  : partial activation, group g = consecutive rows
  //   WL_DPWA : distributed partial activation, group g = rows r with r mod G == g
  typedef enum logic [1:0] {
    WL_ALL  = 2'd0,
    WL_PWA  = 2'd1,
    WL_DPWA = 2'd2
  } wl_mode_e;

endpackage
