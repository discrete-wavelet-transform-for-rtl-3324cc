// dwt_pkg: constants and types shared by the Haar DWT segmentation pipeline.
//
// The pipeline works on fixed-point integers. Pixels enter as signed PIX_W-bit
// photon counts (dark offset and gain already removed upstream). The Haar
// analysis uses the un-normalised integer filters [1, 1] and [1, -1]; the
// 1/sqrt(2) normalisation of each 1D pass is never applied. Coefficients of
// level j therefore carry a scale of 2^j relative to the orthonormal Haar
// transform and grow by two bits per level. The reconstruction is exact in
// this integer arithmetic: its result equals 4^J times the reconstructed
// pixel, i.e. a fixed-point value with 2*J fraction bits.
//
// The default sizes are those of one ePixUHR output stream: 24 columns by
// 168 rows, four decomposition levels and a global threshold of 170 photons.
// The pixel width (16 bits) is this design's choice.
package dwt_pkg;

  // Paper defaults.
  localparam int unsigned DEF_TILE_W    = 24;   // columns per ASIC output stream
  localparam int unsigned DEF_TILE_H    = 168;  // rows of the ePixUHR ASIC
  localparam int unsigned DEF_LEVELS    = 4;    // decomposition depth J
  localparam int unsigned DEF_THRESHOLD = 170;  // global threshold, photons
  localparam int unsigned DEF_ASICS     = 6;    // ASICs per detector
  localparam int unsigned DEF_STREAMS   = 8;    // output streams (cores) per ASIC

  // Own choice.
  localparam int unsigned DEF_PIX_W     = 16;   // signed input pixel width

  // Reconstruction modes: the diffraction and background estimates of the
  // method (Fig. 3 and Fig. 4) and the full reconstruction it shows next to
  // them (Fig. 10c). The unused code 2'b11 behaves as MODE_FULL.
  typedef enum logic [1:0] {
    MODE_SIGNAL     = 2'b00,  // zero the level-J approximation, keep all details
    MODE_BACKGROUND = 2'b01,  // keep the level-J approximation, zero all details
    MODE_FULL       = 2'b10   // keep everything: the input image, reconstructed
  } recon_mode_e;

  // Number of samples of a dimension of size n after one stride-2 Haar step
  // with symmetric extension of an odd last sample.
  function automatic int unsigned half_up(int unsigned n);
    return (n + 1) / 2;
  endfunction

  // Size of a dimension n after lvl stride-2 Haar steps.
  function automatic int unsigned level_dim(int unsigned n, int unsigned lvl);
    int unsigned d;
    d = n;
    for (int unsigned i = 0; i < lvl; i++) d = half_up(d);
    return d;
  endfunction

  // Bits needed to index 0 .. n-1 (at least 1).
  function automatic int unsigned idx_w(int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
