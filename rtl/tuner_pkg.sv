// tuner_pkg: sizes and types shared by the face-tuning datapath.
//
// The tuning engine works on 8-bit grayscale images of IMG_HEIGHT rows by
// IMG_WIDTH columns, stored row-major (address = row*IMG_WIDTH + col).
// The 23 x 28 image size is the reduced face size used for the hardware;
// the 8-bit pixel width is this design's choice (the source only says
// "gray scale").  A 3x3 neighbourhood sum needs PIX_W+4 bits (9*255 = 2295).
package tuner_pkg;

  localparam int unsigned PIX_W      = 8;
  localparam int unsigned IMG_WIDTH  = 23;
  localparam int unsigned IMG_HEIGHT = 28;
  localparam int unsigned TAPS       = 9;
  localparam int unsigned SUM_W      = PIX_W + $clog2(TAPS);

  typedef logic [PIX_W-1:0] pixel_t;
  typedef logic [SUM_W-1:0] nsum_t;

  // Phases of one tuning run (see tuning_controller).
  typedef enum logic [2:0] {
    ST_IDLE,     // waiting for start
    ST_COPY,     // I3 <= I1, one pixel per cycle
    ST_CENTER,   // read I1(x,y) and I2(x,y)
    ST_TEST,     // compare I2(x,y) with T
    ST_WINDOW,   // read the 3x3 windows of I1 and I2, accumulate FI and CI
    ST_BLEND,    // wait for the intensity blend
    ST_NEXT,     // advance to the next interior pixel
    ST_DONE      // end-of-run pulse
  } tune_state_t;

endpackage
