// fft_pkg: types and constants shared by the FFT/IFFT-over-the-ring processor.
//
// A coefficient of the transform is a complex number made of two IEEE-754
// binary64 values; the datapath moves it as one 128-bit word (cplx_t).  The
// processor is built for two processing elements (butterflies), four
// coefficient banks and a largest transform of 1024 points, the
// configuration the design is evaluated in.  With n_PE = 2 each bank holds
// S_MAX/(2*M) = 128 complex words and each twiddle ROM holds
// S_MAX/(4*n_PE)+1 = 129 compressed entries.
package fft_pkg;

  // IEEE-754 binary64 word.
  typedef logic [63:0] fp64_t;

  // Complex number: real part in the upper half, imaginary part in the lower.
  typedef struct packed {
    fp64_t re;
    fp64_t im;
  } cplx_t;

  // Processor size (paper's configuration).
  localparam int unsigned N_PE       = 2;                    // butterflies
  localparam int unsigned N_BANK     = 2 * N_PE;             // M = 2 * n_PE
  localparam int unsigned LOGN_MAX   = 10;                   // S_max = 1024
  localparam int unsigned S_MAX      = 1 << LOGN_MAX;
  localparam int unsigned BANK_DEPTH = S_MAX / (2 * N_BANK); // 128 words
  localparam int unsigned ADDR_W     = $clog2(BANK_DEPTH);   // 7
  localparam int unsigned BANK_W     = $clog2(N_BANK);       // 2
  localparam int unsigned LOGN_W     = 4;                    // Logn port width
  // Uncompressed per-PE twiddle list: S_MAX/(2*N_PE) = 256 entries;
  // compressed: entries 0 and 1 plus one of each (w, w*(+-i)) pair.
  localparam int unsigned TW_DEPTH   = S_MAX / (4 * N_PE) + 1; // 129
  localparam int unsigned TW_ADDR_W  = $clog2(TW_DEPTH);      // 8

  // Operation select: forward transform (CT butterflies) or inverse (GS).
  typedef enum logic {
    OP_FFT  = 1'b0,
    OP_IFFT = 1'b1
  } op_e;

endpackage
