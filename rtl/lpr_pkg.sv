// lpr_pkg: shared constants, layer tables and arithmetic helpers of the
// license plate recognition accelerators.
//
// The two networks are described here as tables indexed by layer number:
// output channels, kernel size, weight bit width, and the folding (SIMD
// inputs and PE outputs processed per clock) that sets how many clock cycles
// each layer spends on one pixel.  Channel counts, kernel sizes, pooling
// positions and weight bit widths follow the published network diagrams and
// text; the folding factors and requantisation shifts are this design's own
// choices (the original folding came from a configuration file that was not
// published).
package lpr_pkg;

  // ---------------------------------------------------------------------
  // Common quantisation
  // ---------------------------------------------------------------------
  localparam int ABITS     = 4;   // activation width of every hidden layer
  localparam int PIXBITS   = 8;   // camera / plate pixel width
  localparam int ACCBITS   = 32;  // accumulator width of every MVAU

  // ---------------------------------------------------------------------
  // Plate detection network (LPYOLO-style), 576x576x3 -> 18x18x18
  // 10 convolution layers; a 2x2 max pool follows layers 0..4.
  // ---------------------------------------------------------------------
  localparam int LPD_IMG     = 576;
  localparam int LPD_IN_CH   = 3;
  localparam int LPD_NL      = 10;
  localparam int LPD_OUT_CH  = 18;   // 3 anchors x (x, y, w, h, class, conf)
  localparam int LPD_GRID    = 18;
  typedef int lpd_tab_t [LPD_NL];
  localparam lpd_tab_t LPD_COUT  = '{8, 8, 16, 32, 56, 104, 208, 56, 104, 18};
  localparam lpd_tab_t LPD_K     = '{3, 3, 3, 3, 3, 3, 3, 1, 3, 3};
  localparam lpd_tab_t LPD_POOL  = '{1, 1, 1, 1, 1, 0, 0, 0, 0, 0};
  localparam lpd_tab_t LPD_SIMD  = '{9, 8, 8, 8, 8, 8, 8, 8, 8, 8};
  localparam lpd_tab_t LPD_PE    = '{8, 4, 2, 2, 2, 2, 8, 2, 2, 2};
  localparam int LPD_WBITS = 4;      // all LPD weights are 4 bit

  // ---------------------------------------------------------------------
  // Character recognition network (fast-plate-ocr derived), 64x128x1 -> 296
  // A 2x2 max pool precedes layer 0 and follows layers 1, 3 and 6; a global
  // max pool follows layer 10.
  // ---------------------------------------------------------------------
  localparam int LPCR_H      = 64;
  localparam int LPCR_W      = 128;
  localparam int LPCR_NL     = 11;
  localparam int LPCR_OUT_CH = 296;
  localparam int NPOS        = 8;    // character positions   (8 x 37 = 296)
  localparam int NCLS        = 37;   // 0-9, A-Z, space
  typedef int lpcr_tab_t [LPCR_NL];
  localparam lpcr_tab_t LPCR_COUT  = '{16, 32, 64, 128, 128, 128, 256, 256, 512, 1024, 296};
  localparam lpcr_tab_t LPCR_K     = '{3, 3, 3, 3, 3, 3, 1, 3, 1, 1, 3};
  localparam lpcr_tab_t LPCR_WBITS = '{4, 4, 4, 2, 2, 2, 2, 2, 2, 2, 1};
  localparam lpcr_tab_t LPCR_POOL  = '{0, 1, 0, 1, 0, 0, 1, 0, 0, 0, 0};
  localparam lpcr_tab_t LPCR_SIMD  = '{9, 16, 16, 32, 32, 32, 16, 32, 16, 32, 64};
  localparam lpcr_tab_t LPCR_PE    = '{1, 2, 2, 4, 2, 2, 1, 2, 1, 2, 4};

  // Requantisation shift of a ReLU layer.  A sum of KDIM products of an
  // IBITS activation and a WBITS weight is scaled by 2^-SHIFT so that for
  // typical data its spread fills the 4-bit output range:
  //   SHIFT ~ log2(sqrt(KDIM) * rms(activation) * rms(weight) / 4).
  // In a trained network these scales come from training; here they are
  // derived from the layer shape and can be overridden per layer.
  function automatic int relu_shift(int kdim, int wbits, int ibits);
    int s;
    s = $clog2(kdim) / 2 + ((ibits > 4) ? 7 : 2) + ((wbits >= 4) ? 2 : 0) - 2;
    return (s < 0) ? 0 : s;
  endfunction

  // Signed value of a WBITS weight.  1-bit weights are bipolar (+1 / -1).
  function automatic int wval(logic [3:0] w, int wbits);
    int v;
    if (wbits == 1) return w[0] ? 1 : -1;
    v = int'(w) & ((1 << wbits) - 1);
    if (v >= (1 << (wbits - 1))) v -= (1 << wbits);
    return v;
  endfunction

  // Character set of the recogniser output classes.
  function automatic logic [7:0] class_ascii(int cls);
    if (cls < 10) return 8'(48 + cls);        // '0'..'9'
    if (cls < 36) return 8'(65 + cls - 10);   // 'A'..'Z'
    return 8'h20;                               // space (padding)
  endfunction

endpackage
