// fuzzy_edge_pkg
// Types and constants shared by the colour fuzzy edge detector.
// A pixel channel is 8 bits (images are 8-bit RGB). A 3x3 window holds the
// nine entries P1..P9 in the order the window generator produces them: P1 is
// the newest pixel, P1-P2-P3 are the current row (P3 two columns back),
// P4-P5-P6 the row above and P7-P8-P9 the row two above. P5 is the centre.
// The gradient |Gx|+|Gy| of 8-bit data is at most 2*4*255 = 2040, so it fits
// the 11-bit GRAD_W chosen here; the Sobel threshold has the same width.
package fuzzy_edge_pkg;

  localparam int unsigned PIX_W  = 8;
  localparam int unsigned GRAD_W = 11;
  localparam int unsigned NUM_CH = 3;   // R, G, B

  typedef logic [PIX_W-1:0]  pixel_t;
  typedef logic [GRAD_W-1:0] grad_t;

  // win[1] = P1 ... win[9] = P9
  typedef pixel_t [9:1] window_t;

  // Channel indices of per-channel vectors
  localparam int unsigned CH_R = 0;
  localparam int unsigned CH_G = 1;
  localparam int unsigned CH_B = 2;

endpackage
