// Shared constants and types of the streaming distortion corrector.
//
// The defaults describe the configuration whose resource figures are
// reported for the map-subsampling corrector: a VGA stream (640x480), a
// circular buffer of 50 image lines, and one map sample every 8 pixels on
// both axes (81 x 61 = 4941 samples). The map samples are fixed-point
// relative displacements with an 8-bit fractional part. The pixel width,
// the sample word width, the suggested line delay and the fill value are this
// design's own choices.
package dc_pkg;

  localparam int unsigned DEF_IMG_W       = 640;  // VGA width
  localparam int unsigned DEF_IMG_H       = 480;  // VGA height
  localparam int unsigned DEF_BUF_LINES   = 50;   // circular buffer depth in lines
  localparam int unsigned DEF_DELAY_LINES = 25;   // suggested output lag in lines: half the buffer (own choice)
  localparam int unsigned DEF_PIX_W       = 8;    // grey-level pixel width (own choice)
  localparam int unsigned DEF_SUB_LOG2    = 3;    // map sample every 2**3 = 8 pixels
  localparam int unsigned DEF_MAP_W       = 16;   // width of one displacement sample (own choice)
  localparam int unsigned DEF_MAP_FRAC    = 8;    // fractional bits of a displacement sample

  // The four buffer memories of the interleaved line buffer. A pixel at
  // column x, row y lives in bank {y[0], x[0]}: even rows use banks 0/1,
  // odd rows banks 2/3, even columns banks 0/2, odd columns banks 1/3.
  typedef enum logic [1:0] {
    BANK_EVEN_ROW_EVEN_COL = 2'd0,
    BANK_EVEN_ROW_ODD_COL  = 2'd1,
    BANK_ODD_ROW_EVEN_COL  = 2'd2,
    BANK_ODD_ROW_ODD_COL   = 2'd3
  } bank_e;

  function automatic bank_e bank_of(input logic row_lsb, input logic col_lsb);
    return bank_e'({row_lsb, col_lsb});
  endfunction

  // Number of map samples along an axis of SIZE pixels sampled every
  // 2**SUB_LOG2 pixels: every pixel p in [0, SIZE-1] needs grid nodes
  // p>>SUB_LOG2 and (p>>SUB_LOG2)+1.
  function automatic int unsigned grid_len(input int unsigned size, input int unsigned sub_log2);
    return ((size - 1) >> sub_log2) + 2;
  endfunction

endpackage
