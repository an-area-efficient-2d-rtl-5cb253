// fft_pkg: types and fixed-point constants shared by the 2D FFT processor.
//
// A sample is a complex number with signed DATA_W-bit real and imaginary
// parts (two's complement integers). Twiddle factors are signed TW_W-bit
// fixed-point values with TW_FRAC fractional bits (Q1.14: 1.0 = 16384).
// Neither format is given by the paper; 16-bit operands keep one complex
// product inside four FPGA DSP multipliers, the count the paper's device
// utilisation implies for each butterfly.
package fft_pkg;

  localparam int DATA_W  = 16;  // bits of each real/imaginary part of a sample
  localparam int TW_W    = 16;  // bits of each real/imaginary part of a twiddle
  localparam int TW_FRAC = 14;  // fractional bits of a twiddle (1.0 = 2**TW_FRAC)

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [TW_W-1:0]   coef_t;

  // Complex sample.
  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Complex twiddle factor W = re + j*im.
  typedef struct packed {
    coef_t re;
    coef_t im;
  } twiddle_t;

  // Width of the stage bus for an n-point FFT (log2(n) stages, at least 1 bit).
  function automatic int sb_width(int n);
    return ($clog2($clog2(n)) > 0) ? $clog2($clog2(n)) : 1;
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic int unsigned bit_reverse(int unsigned v, int bits);
    int unsigned r = 0;
    for (int i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

endpackage
