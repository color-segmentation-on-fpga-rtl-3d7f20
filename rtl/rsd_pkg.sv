// rsd_pkg -- shared constants of the road sign detection pipeline.
//
// The image size (1000 x 630), the pixel resolution of the Cb and Cr channels
// (8 bits), the two feature dimensions (Cb, Cr), the four class centres of the
// colour classifier and the road-sign rule (yellow, area above 200 pixels,
// width/height ratio between 0.7 and 3) are the numbers of the published
// design. The size of the component label table (1024 labels) is this
// design's own choice: about four hundred components per frame remain after
// the two filters in the published measurements, and single-pass labeling
// allocates more labels than it finally keeps.
package rsd_pkg;

  // Frame geometry.
  localparam int unsigned IMG_W = 1000;
  localparam int unsigned IMG_H = 630;

  // Colour classifier: resolution R of one dimension, D dimensions, C classes.
  localparam int unsigned PIX_R = 8;
  localparam int unsigned MDC_D = 2;   // Cb, Cr
  localparam int unsigned MDC_C = 4;   // background, yellow, red, red

  // Class centres (index 0 = Cb, index 1 = Cr), in class order.
  typedef logic [PIX_R-1:0] centre_t [MDC_C][MDC_D];
  localparam centre_t CLASS_CENTRES = '{
    '{8'd127, 8'd128},   // 0 background
    '{8'd88,  8'd151},   // 1 yellow
    '{8'd116, 8'd157},   // 2 red
    '{8'd109, 8'd180}    // 3 red (second illumination)
  };

  localparam int unsigned CLASS_BACKGROUND = 0;
  localparam int unsigned CLASS_YELLOW     = 1;

  // Component labeling.
  localparam int unsigned LABELS = 1024;

  // Road-sign rule: area > MIN_AREA, RATIO_LO_NUM/RATIO_LO_DEN < w/h < RATIO_HI.
  localparam int unsigned MIN_AREA     = 200;
  localparam int unsigned RATIO_LO_NUM = 7;
  localparam int unsigned RATIO_LO_DEN = 10;
  localparam int unsigned RATIO_HI     = 3;

  // Latency of the classifier in clock cycles: 3 per dimension plus one per
  // level of the pairwise minimum tree.
  function automatic int unsigned mdc_latency(int unsigned d, int unsigned c);
    return 3 * d + $clog2(c);
  endfunction

endpackage
