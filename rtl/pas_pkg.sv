// pas_pkg: widths and small helpers shared by the Polygonal Approximation
// Sampler (PAS) modules.
//
// The sample width of 16 bits is the one the PAS is specified for. The
// OUTPUT_INDEX width, the threshold width and the rate-divider width are this
// implementation's own choices: 16-bit index differences, a 32-bit threshold
// (room for the square of a 16-bit amplitude step, which is the suggested
// order of magnitude for the threshold) and a 16-bit clock divider.
package pas_pkg;

  // Default widths, used as the parameter defaults of every PAS module.
  localparam int unsigned SAMPLE_W_DEF = 16;  // ADC sample width (two's complement)
  localparam int unsigned INDEX_W_DEF  = 16;  // OUTPUT_INDEX width
  localparam int unsigned THRESH_W_DEF = 32;  // THRESHOLD (epsilon) width, unsigned
  localparam int unsigned DIV_W_DEF    = 16;  // sampling-rate divider width

  // Form of the integral-error update (dx = 1).
  //   ERR_PRINTED: f += x - y*dy   (the update as the PAS procedure prints it)
  //   ERR_AREA:    f += x*dy - y   (the signed-area update of the original
  //                                 Wall-Danielsson method)
  typedef enum logic {ERR_PRINTED = 1'b0, ERR_AREA = 1'b1} err_form_e;

  // Width of the signed integral-error accumulator f. Between two updates
  // |f| <= threshold (< 2^THRESH_W). One update adds at most
  // x + |y*dy| < 2^INDEX_W + 2^(2*SAMPLE_W) or |x*dy| + |y| < 2^(INDEX_W+SAMPLE_W)
  // + 2^SAMPLE_W, so |f| < 3 * 2^m with m the largest exponent: two guard bits
  // plus a sign bit are enough.
  function automatic int unsigned f_width(int unsigned sample_w,
                                          int unsigned index_w,
                                          int unsigned thresh_w);
    int unsigned m;
    m = 2 * sample_w;
    if (index_w + sample_w > m) m = index_w + sample_w;
    if (thresh_w > m)           m = thresh_w;
    return m + 3;
  endfunction

  // Width of the unsigned displacement |y| + x (|y| < 2^SAMPLE_W, x < 2^INDEX_W).
  function automatic int unsigned len_width(int unsigned sample_w,
                                            int unsigned index_w);
    return ((sample_w > index_w) ? sample_w : index_w) + 1;
  endfunction

endpackage
