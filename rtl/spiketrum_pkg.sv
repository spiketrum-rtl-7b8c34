// spiketrum_pkg: constants and types shared by the Spiketrum cochlea.
//
// All datapath values use one 34-bit signed fixed-point word. 34 bits is the
// precision the design is built around; the split into integer and fraction
// bits is this design's own choice: FRAC_BITS = 26 gives a range of +/-128,
// enough for the largest channel intensity (25.8744) and for correlations of
// unit-energy kernels with full-scale audio, at a resolution of 1.5e-8.
// The three channel intensities per kernel, the 40 kernels, the 2048-point
// transform, the 696-sample segment and the 1353-tap kernel are the design's
// published numbers. A code is the triple (m, tau, s): kernel index, time
// position and convolution intensity.
package spiketrum_pkg;

  localparam int DATA_W      = 34;     // fixed-point word width
  localparam int FRAC_BITS   = 26;     // fraction bits of every data word
  localparam int NUM_KERNELS = 40;     // Gammatone kernels in the dictionary
  localparam int CH_PER_K    = 3;      // output channels (intensity levels) per kernel
  localparam int NUM_CH      = NUM_KERNELS * CH_PER_K;  // 120 output fibres
  localparam int FFT_N       = 2048;   // transform size S + L - 1
  localparam int SEG_LEN     = 696;    // samples per segment (43.5 ms at 16 kHz)
  localparam int KERNEL_LEN  = 1353;   // taps per kernel

  typedef logic signed [DATA_W-1:0] word_t;

  // Fixed-point conversion of a real constant (elaboration time only).
  function automatic word_t to_fixed(real v);
    real x;
    x = v * (2.0 ** FRAC_BITS);
    return word_t'(longint'(x));   // rounds to nearest
  endfunction

  // Channel centre intensities C1..C3, logarithmically spaced.
  localparam word_t C1 = to_fixed(0.0065);
  localparam word_t C2 = to_fixed(0.4115);
  localparam word_t C3 = to_fixed(25.8744);

  // Stop threshold of the feedback unit used in the classification runs.
  localparam word_t STOP_THRESHOLD_DEFAULT = to_fixed(0.01);

endpackage
