// butterfly: radix-2 butterfly unit (BU) of the 1D FFT processor.
//
// Computes y_add = (A + W*B)/2 and y_sub = (A - W*B)/2, where B is the input
// multiplied by the twiddle factor W. As in the paper, the multiply and the
// add/subtract both complete within one clock period: the unit is purely
// combinational, and whatever consumes its outputs (the register array, or
// the world outside the 1D FFT in the last stage) captures them at the end
// of that clock. It therefore has no clock port.
//
// Arithmetic (this design's choice; the paper gives no number format): the
// complex product uses four real multipliers; it is rounded to the nearest
// integer from the Q1.14 twiddle scale. Each output is halved with rounding
// and saturated to DATA_W bits, so an N-point FFT built from these units
// returns DFT/N and cannot overflow for inputs whose magnitude is below
// 2**(DATA_W-1).
module butterfly
  import fft_pkg::*;
(
  input  cplx_t    a,      // sample A
  input  cplx_t    b,      // sample B, multiplied by the twiddle
  input  twiddle_t w,      // twiddle factor W_N^k (Q1.14)
  output cplx_t    y_add,  // (A + W*B) / 2
  output cplx_t    y_sub   // (A - W*B) / 2
);

  localparam int PW = DATA_W + TW_W + 1;        // full product width
  localparam int WW = PW - TW_FRAC;             // product width after scaling
  localparam int SW = WW + 1;                   // sum width

  logic signed [PW-1:0] p_re, p_im;             // W*B at the Q1.14 scale
  logic signed [WW-1:0] wb_re, wb_im;           // W*B, integer scale
  logic signed [SW-1:0] s_re, s_im, d_re, d_im; // A +/- W*B

  // Halve with rounding and saturate to a sample.
  function automatic sample_t half_sat(logic signed [SW-1:0] v);
    logic signed [SW-1:0] h;
    h = (v + SW'(1)) >>> 1;
    if (h > SW'(2**(DATA_W-1) - 1))      return sample_t'(2**(DATA_W-1) - 1);
    else if (h < -SW'(2**(DATA_W-1)))    return sample_t'(-(2**(DATA_W-1)));
    else                                 return sample_t'(h);
  endfunction

  always_comb begin
    p_re  = PW'(b.re * w.re) - PW'(b.im * w.im);
    p_im  = PW'(b.re * w.im) + PW'(b.im * w.re);
    wb_re = WW'((p_re + PW'(2**(TW_FRAC-1))) >>> TW_FRAC);
    wb_im = WW'((p_im + PW'(2**(TW_FRAC-1))) >>> TW_FRAC);
    s_re  = SW'(a.re) + SW'(wb_re);
    s_im  = SW'(a.im) + SW'(wb_im);
    d_re  = SW'(a.re) - SW'(wb_re);
    d_im  = SW'(a.im) - SW'(wb_im);
    y_add = '{re: half_sat(s_re), im: half_sat(s_im)};
    y_sub = '{re: half_sat(d_re), im: half_sat(d_im)};
  end

endmodule
