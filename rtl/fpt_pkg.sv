// fpt_pkg: constants and helper functions shared by the FPT bootstrapping kernel.
//
// The defaults are TFHE Parameter Set I (n = 586, k = 2, N = 512, beta = 8, l = 2) in the
// FFT-unrolled external-product configuration: a forward FFT with a streaming width of 128
// complex points per cycle and an inverse FFT with 64 points per cycle, which completes one
// CMUX every (N/2 / 128) * (k+1) * l = 12 cycles. The fixed-point formats are
// FixedPoint26(7,19) for the bootstrapping key, FixedPoint29(15,14) inside the forward FFT and
// FixedPoint29(23,6) inside the inverse FFT (before scaling by 1/(N/2)). Twiddle factors are
// four bits narrower than the data they multiply. All these numbers follow the paper; the
// unit conventions (digit units in the FFT, torus units in the key and the IFFT) are this
// design's own reading of them.
//
// The twiddle functions evaluate cos/sin at elaboration time, so every twiddle is a constant.
package fpt_pkg;

  // TFHE parameter set I
  localparam int NLWE     = 586;   // TLWE dimension n
  localparam int K        = 2;     // TGLWE dimension k
  localparam int N        = 512;   // polynomial size
  localparam int BETA     = 8;     // decomposition base log
  localparam int L        = 2;     // decomposition levels
  localparam int ACC_W    = L * BETA;          // native accumulator width (16 bits of torus)
  localparam int ROT_W    = $clog2(2 * N);     // width of a rounded 2N*a_i/q rotation
  localparam int M        = N / 2;             // folded FFT size

  // Streaming configuration (FFT-unrolled external product)
  localparam int SW_FFT   = 128;               // forward FFT complex points per cycle
  localparam int SW_IFFT  = SW_FFT / L;        // inverse FFT complex points per cycle (64)
  localparam int BEAT_COEF = 2 * SW_IFFT;      // real coefficients per accumulator beat
  localparam int CHUNK_W  = 4;                 // bit-chunk width of the bitwise stream
  localparam int BATCH    = 12;                // ciphertexts per batch (b)
  localparam int NUM_LUT  = 4;                 // test polynomials held on chip

  // Fixed-point formats
  localparam int BK_W     = 26, BK_FRAC   = 19;
  localparam int FFT_W    = 29, FFT_FRAC  = 14;
  localparam int IFFT_W   = 29, IFFT_FRAC = 6;

  localparam real PI = 3.14159265358979323846;

  // round(cos(2*pi*num/den) * 2^frac)
  function automatic longint cos_fix(longint num, longint den, int frac);
    real a;
    a = 2.0 * PI * real'(num) / real'(den);
    return longint'($floor($cos(a) * (2.0 ** frac) + 0.5));
  endfunction

  // round(sin(2*pi*num/den) * 2^frac)
  function automatic longint sin_fix(longint num, longint den, int frac);
    real a;
    a = 2.0 * PI * real'(num) / real'(den);
    return longint'($floor($sin(a) * (2.0 ** frac) + 0.5));
  endfunction

  // bit reversal of v over nbits bits
  function automatic int bitrev(int v, int nbits);
    int r;
    r = 0;
    for (int b = 0; b < nbits; b++) r |= ((v >> b) & 1) << (nbits - 1 - b);
    return r;
  endfunction

endpackage
