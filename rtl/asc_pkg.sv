// asc_pkg: constants shared by the ASC-CBR encoder and decoder.
//
// An ASC block is compressed to one or two endpoints plus one 3-bit index per
// value, which selects one of eight interpolation points (v0..v7) on either the
// revised linear scale or the log-linear scale. The index width and point count
// follow the paper ("The index bit number will be 3 for eight interpolation
// points"); the scale encoding below is this design's naming of the paper's two
// scales. (Linted on its own, the package's constants look unused; the
// encoder and decoder use them.)
package asc_pkg;

  // Index width and number of interpolation points.
  localparam int unsigned IDX_W = 3;
  localparam int unsigned NPTS  = 8;

  // Scale of a block. LINEAR is the revised linear scale (denominator 8),
  // LOGLIN the log-linear scale.
  typedef enum logic {
    SCALE_LINEAR = 1'b0,
    SCALE_LOGLIN = 1'b1
  } scale_e;

endpackage
