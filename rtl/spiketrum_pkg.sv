// spiketrum_pkg: constants and types shared by the Spiketrum encoder.
//
// All signal samples, kernel samples, convolution intensities and residuals
// are 34-bit two's-complement fixed-point numbers (the word width the design
// is built around). The split of those 34 bits into integer and fraction is
// this design's choice: FRAC_W = 24 fraction bits, i.e. Q9.24, range +-512.
// A code is the triple (m, tau, s): kernel index, time position and signed
// intensity of one matched kernel. tau is carried as an unsigned position
// 0..2*HALF inside the segment; the signed time shift is tau - HALF
// (HALF = 1024 for the 2048-sample segment).
package spiketrum_pkg;

  localparam int DATA_W   = 34;    // fixed-point word
  localparam int FRAC_W   = 24;    // fraction bits of every word
  localparam int SEG_LEN  = 2048;  // samples per segment
  localparam int N_KERN   = 40;    // Gammatone kernels in the dictionary
  localparam int N_LEVEL  = 3;     // output channels (intensity levels) per kernel
  localparam int N_CHAN   = N_KERN * N_LEVEL;  // 120 spike channels

  // Field widths of a code, sized for the default configuration.
  localparam int M_W      = 6;     // kernel index, up to 64 kernels
  localparam int TAU_W    = 12;    // tau position 0..4095 (0..2048 used)
  localparam int CNT_W    = 10;    // codes per segment, up to 1023

  typedef logic signed [DATA_W-1:0] word_t;

  typedef struct packed {
    logic [M_W-1:0]   m;    // kernel index
    logic [TAU_W-1:0] tau;  // time position, shift = tau - SEG_LEN/2
    word_t            s;    // signed convolution intensity
  } code_t;

  // Centre intensities of the three channels of every kernel:
  // 0.0065, 0.4115 and 25.8744, each as round(C * 2**FRAC_W).
  localparam word_t C_LEVEL0 = 34'sd109052;
  localparam word_t C_LEVEL1 = 34'sd6903824;
  localparam word_t C_LEVEL2 = 34'sd434100398;

  localparam word_t WORD_MAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam word_t WORD_MIN = {1'b1, {(DATA_W-1){1'b0}}};

  // Magnitude of a word as an unsigned number; -2**33 maps to 2**33-1.
  function automatic logic [DATA_W-1:0] word_abs(word_t v);
    if (v == WORD_MIN) return WORD_MAX;
    return v[DATA_W-1] ? DATA_W'(-v) : DATA_W'(v);
  endfunction

  // Arithmetic shift right by FRAC_W and saturation to a word.
  function automatic word_t scale_sat(logic signed [95:0] v);
    logic signed [95:0] sh;
    sh = v >>> FRAC_W;
    if (sh > 96'(WORD_MAX)) return WORD_MAX;
    if (sh < 96'(WORD_MIN)) return WORD_MIN;
    return word_t'(sh);
  endfunction

endpackage
