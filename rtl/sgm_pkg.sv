// sgm_pkg: types and default sizes shared by the SGM stereo pipeline.
//
// The pipeline takes a rectified stereo pair as a 4-pixel-per-clock (4ppc)
// video stream and produces one disparity per pixel, four per clock.
// Sizes that come from the design point of the pipeline: a 3840x2160
// frame, 4 pixels per clock, 5x5 census windows and a 64-level disparity
// range. Sizes this implementation chose itself: 8-bit grey pixels, 8-bit
// path costs (enough for a census cost of at most 24 plus a penalty P2 of
// at most 231) and 10-bit summed costs (four path costs).
package sgm_pkg;

  localparam int PPC         = 4;             // pixels per clock (4ppc format)
  localparam int PW          = 8;             // pixel width, bits
  localparam int WIN         = 5;             // census window side
  localparam int CENSUS_BITS = WIN*WIN - 1;   // 24 neighbour bits
  localparam int CW          = $clog2(CENSUS_BITS + 1); // matching cost width, 5
  localparam int LW          = 8;             // path cost L_r width
  localparam int NPATH       = 4;             // 0, 45, 90, 135 degrees
  localparam int SW          = LW + $clog2(NPATH); // summed cost S width, 10
  localparam int DEF_DISP    = 64;            // disparity range
  localparam int DEF_WIDTH   = 3840;          // frame width, pixels
  localparam int DEF_HEIGHT  = 2160;          // frame height, lines

  typedef logic [PW-1:0]          pixel_t;
  typedef logic [CENSUS_BITS-1:0] census_t;
  typedef logic [CW-1:0]          cost_t;
  typedef logic [LW-1:0]          lcost_t;
  typedef logic [SW-1:0]          scost_t;

  // One 5x5 neighbourhood: [row][col], row 0 is the oldest (top) line,
  // col 0 the leftmost pixel; the centre is [WIN/2][WIN/2].
  typedef pixel_t [WIN-1:0][WIN-1:0] context_t;

endpackage
