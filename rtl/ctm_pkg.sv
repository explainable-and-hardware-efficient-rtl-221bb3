// ctm_pkg: sizes and small helpers shared by the Convolutional Tsetlin
// Machine (CTM) jamming detector.
//
// The detector classifies a 100x100 Boolean spectrogram of the 5G primary
// synchronisation signal as "pure" or "jammed". The CTM slides a 10x10
// window over the image with stride 1, appends the window position as
// thermometer-coded features, and evaluates 200 clauses per class on every
// window. The image size, window size, clause count and the
// max_included_literals bound are the published model configuration;
// the TA state width, pixel width, clause parallelism and class numbering
// are choices of this implementation (see each module's header).
package ctm_pkg;

  // Published model configuration.
  localparam int unsigned IMG_H        = 100;  // spectrogram rows
  localparam int unsigned IMG_W        = 100;  // spectrogram columns
  localparam int unsigned PATCH        = 10;   // patch_dim = (10, 10)
  localparam int unsigned CLASSES      = 2;    // pure (H0) and jammed (H1)
  localparam int unsigned CLAUSES      = 200;  // number_of_clauses, per class
  localparam int unsigned MAX_INCLUDED = 22;   // max_included_literals (training bound)

  // Implementation choices.
  localparam int unsigned TA_BITS      = 8;    // TA state 0..255, 2N = 256 states
  localparam int unsigned PIX_BITS     = 8;    // greyscale spectrogram pixel
  localparam int unsigned CLAUSE_PAR   = 100;  // clauses evaluated per cycle

  // Class numbering: index 0 is the jamming-free hypothesis H0, index 1 is H1.
  localparam int unsigned CLASS_PURE   = 0;
  localparam int unsigned CLASS_JAM    = 1;

  // Number of CTM features for an image of h x w pixels and a p x p patch:
  // the p*p patch pixels plus (h-p) + (w-p) thermometer bits for the patch
  // position. The literal vector holds these features and their negations.
  function automatic int unsigned ctm_features(int unsigned h, int unsigned w, int unsigned p);
    return p * p + (h - p) + (w - p);
  endfunction

  // Width needed to count 0..n inclusive.
  function automatic int unsigned cnt_w(int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

endpackage
