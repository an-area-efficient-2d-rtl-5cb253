// tb_butterfly: self-checking test of the radix-2 butterfly.
//
// Drives random samples and twiddles (plus corner cases that saturate) and
// compares both outputs with (A +/- W*B)/2 computed in floating point from
// the Q1.14 twiddle, allowing 1 LSB for the two roundings; saturated
// results must clip to the 16-bit range.
module tb_butterfly;
  import fft_pkg::*;

  cplx_t    a, b, y_add, y_sub;
  twiddle_t w;
  int checks = 0, failures = 0;

  butterfly dut (.a(a), .b(b), .w(w), .y_add(y_add), .y_sub(y_sub));

  function automatic real clip(real v);
    if (v > 32767.0)  return 32767.0;
    if (v < -32768.0) return -32768.0;
    return v;
  endfunction

  task automatic check(string what, sample_t got, real exp);
    real e = clip(exp);
    checks++;
    if ((real'(got) - e) > 1.0 || (e - real'(got)) > 1.0) begin
      failures++;
      $display("FAIL %s: got %0d expected %f", what, got, e);
    end
  endtask

  task automatic apply();
    real wr, wi, pr, pi;
    #1;
    wr = real'(w.re) / 16384.0;
    wi = real'(w.im) / 16384.0;
    pr = real'(b.re) * wr - real'(b.im) * wi;
    pi = real'(b.re) * wi + real'(b.im) * wr;
    check("add.re", y_add.re, (real'(a.re) + pr) / 2.0);
    check("add.im", y_add.im, (real'(a.im) + pi) / 2.0);
    check("sub.re", y_sub.re, (real'(a.re) - pr) / 2.0);
    check("sub.im", y_sub.im, (real'(a.im) - pi) / 2.0);
  endtask

  initial begin
    // Unit twiddle: exact sum and difference.
    a = '{re: 16'sd1000, im: -16'sd200};
    b = '{re: 16'sd300,  im: 16'sd50};
    w = '{re: 16'sd16384, im: 16'sd0};
    apply();
    // -j twiddle.
    w = '{re: 16'sd0, im: -16'sd16384};
    apply();
    // Saturation corner: (32767 + 1.414*32767)/2 exceeds the range.
    a = '{re: 16'sd32767, im: 16'sd32767};
    b = '{re: 16'sd32767, im: 16'sd32767};
    w = '{re: 16'sd11585, im: 16'sd11585};
    apply();
    a = '{re: -16'sd32768, im: -16'sd32768};
    b = '{re: 16'sd32767, im: 16'sd32767};
    w = '{re: -16'sd11585, im: -16'sd11585};
    apply();
    // Random magnitudes and twiddles of modulus <= 1.
    for (int i = 0; i < 2000; i++) begin
      real ang;
      a.re = sample_t'($urandom_range(0, 65535));
      a.im = sample_t'($urandom_range(0, 65535));
      b.re = sample_t'($urandom_range(0, 65535));
      b.im = sample_t'($urandom_range(0, 65535));
      ang  = 6.283185307179586 * real'($urandom_range(0, 9999)) / 10000.0;
      w.re = coef_t'($rtoi(16384.0 * $cos(ang)));
      w.im = coef_t'($rtoi(16384.0 * $sin(ang)));
      apply();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
