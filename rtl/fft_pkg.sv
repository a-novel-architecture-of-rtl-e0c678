// fft_pkg -- shared types, widths and index arithmetic of the area-efficient
// radix-2 FFT processor.
//
// Every sample in the datapath is a complex number held as two signed
// fixed-point components of DATA_W bits (integer samples, no implied binary
// point). Twiddle factors are signed TW_W-bit numbers with TW_FRAC fraction
// bits, so 1.0 is 2**TW_FRAC and fits without saturation.
//
// The 18-bit data width is inferred from the 8-point implementation's
// synthesis report, which lists 288 register bits for the feedback register
// array: 8 samples x 2 components x 18 bits. The twiddle format is this
// design's own choice (18 bits suits a 25x18 FPGA multiplier).
//
// The index functions describe the in-place radix-2 decimation-in-time
// schedule that the routing network, the twiddle ROM and the output selector
// all share. Positions p = 0..N-1 are the slots of the in-place FFT array;
// butterfly j of stage s (s = 0..log2N-1) works on positions
//   top(j,s) = ((j >> s) << (s+1)) | (j mod 2**s)   and   top(j,s) + 2**s,
// with twiddle W_N^k, k = (j mod 2**s) << (log2N-1-s).
package fft_pkg;

  localparam int DATA_W  = 18;
  localparam int TW_W    = 18;
  localparam int TW_FRAC = 16;

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [TW_W-1:0]   coef_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  typedef struct packed {
    coef_t re;
    coef_t im;
  } twid_t;

  // Bit-reverse the low m bits of v.
  function automatic int bitrev(input int v, input int m);
    int r;
    r = 0;
    for (int b = 0; b < m; b++) r = (r << 1) | ((v >> b) & 1);
    return r;
  endfunction

  // In-place array position of the top input of butterfly j in stage s.
  function automatic int top_pos(input int j, input int s);
    return ((j >> s) << (s + 1)) | (j & ((1 << s) - 1));
  endfunction

  // Register-array slot that holds in-place position p after stage s. The
  // register array stores butterfly outputs in butterfly order: slot 2j is
  // the top (sum) output of butterfly j, slot 2j+1 its bottom (difference).
  function automatic int slot_of_pos(input int p, input int s);
    int j;
    j = ((p >> (s + 1)) << s) | (p & ((1 << s) - 1));
    return 2 * j + ((p >> s) & 1);
  endfunction

  // Twiddle exponent k of butterfly j in stage s of an N = 2**m point FFT.
  function automatic int twiddle_exp(input int j, input int s, input int m);
    return (j & ((1 << s) - 1)) << (m - 1 - s);
  endfunction

endpackage
