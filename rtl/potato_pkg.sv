// potato_pkg: types and constants shared by the potato greening pipeline.
//
// A frame is a 640 x 480 RGB photograph of one potato on a white background,
// streamed one pixel per clock. rgb_t is the pixel as it travels between
// blocks (8 bits per colour). The frame size follows the photographs the
// method was developed on; the 8-bit sample width, the fixed-point scale of
// the percentage (thousandths of a percent) and the two colour thresholds are
// this design's own choices, the thresholds being set per block by parameter.
package potato_pkg;

  localparam int unsigned PIX_W  = 8;                  // bits per colour sample
  localparam int unsigned FRAME_W  = 640;                // pixels per line
  localparam int unsigned FRAME_H  = 480;                // lines per frame
  localparam int unsigned FRAME_NPIX = FRAME_W * FRAME_H; // 307200 pixels
  localparam int unsigned FRAME_CNT_W = $clog2(FRAME_NPIX + 1); // 19-bit pixel counters

  // Percentage is reported as an integer number of 1/PCT_SCALE percent.
  localparam int unsigned DEF_PCT_SCALE = 1000;
  localparam int unsigned PCT_MAX   = 100 * DEF_PCT_SCALE;         // 100 %
  localparam int unsigned DEF_PCT_W = $clog2(PCT_MAX + 1);      // 17 bits

  // Default colour thresholds (see green_detect and roi_counter).
  localparam int unsigned DEF_ROI_B_MAX    = 160;  // ROI when B < this
  localparam int          DEF_GREEN_RG_MAX = 20;   // green when R - G < this

  typedef struct packed {
    logic [PIX_W-1:0] r;
    logic [PIX_W-1:0] g;
    logic [PIX_W-1:0] b;
  } rgb_t;

  localparam rgb_t RGB_WHITE = '{r: '1, g: '1, b: '1};
  localparam rgb_t RGB_BLACK = '{r: '0, g: '0, b: '0};

  // Region of interest: the potato is darker in blue than the white background.
  function automatic logic in_roi(rgb_t p, int unsigned b_max);
    return int'(p.b) < int'(b_max);
  endfunction

  // Greening: on a green patch red and green are close; on healthy skin red
  // is well above green. The difference is signed.
  function automatic logic rg_green(rgb_t p, int rg_max);
    return (int'(p.r) - int'(p.g)) < rg_max;
  endfunction

endpackage
