// wpu_pkg: types and default sizes shared by the wavefront processing unit
// (WPU), the Shack-Hartmann slope computer.
//
// The defaults are the four-channel configuration: each CCD quadrant of
// 256 x 256 pixels is read through its own channel as N = 64 subapertures of
// P x P = 4 x 4 pixels per row, with ITER = 16 slopes computed per slow-clock
// cycle. Pixels are 16 bit. Slopes are signed fixed point with FRAC_BITS = 8
// fractional bits, as the design specifies; the 16-bit slope word (Q7.8) and
// the clock ratio of 16 between the pixel and the slope clock are carried as
// named constants here.
package wpu_pkg;

  localparam int unsigned DEF_N      = 64;   // subapertures along a row, per channel
  localparam int unsigned DEF_P      = 4;    // pixels along a subaperture side
  localparam int unsigned DEF_ITER   = 16;   // slopes per slow-clock cycle
  localparam int unsigned DEF_NUM_CH = 4;    // CCD channels (quadrants)

  localparam int unsigned PIX_W      = 16;   // bits per pixel
  localparam int unsigned FRAC_BITS  = 8;    // fractional bits of a slope
  localparam int unsigned SLOPE_W    = 16;   // signed slope word, Q7.8
  localparam int unsigned CLK_RATIO  = 16;   // pixel clock / slope clock

  typedef logic [PIX_W-1:0]          pixel_t;
  typedef logic signed [SLOPE_W-1:0] slope_t;

  // States of the slope state machine.
  typedef enum logic [0:0] {
    ST_INIT     = 1'b0,   // waiting for a complete row of subapertures
    ST_CENTROID = 1'b1    // reading the row out and computing slopes
  } slope_state_t;

endpackage
