// tb_twiddle_rom: self-checking test of the twiddle factor ROM.
//
// For every stage s and butterfly b of an 8-point and a 16-point ROM the
// output must equal round(16384 * exp(-j*2*pi*k/N)) with
// k = (b mod 2^s) * N / 2^(s+1), within 1 LSB.
module tb_twiddle_rom;
  import fft_pkg::*;

  logic [sb_width(8)-1:0]  sb8;
  logic [sb_width(16)-1:0] sb16;
  twiddle_t w8 [4];
  twiddle_t w16 [8];
  int checks = 0, failures = 0;

  twiddle_rom #(.N(8))  dut8  (.sb(sb8),  .w(w8));
  twiddle_rom #(.N(16)) dut16 (.sb(sb16), .w(w16));

  task automatic check(int n, int s, int b, twiddle_t got);
    int  k   = (b % (1 << s)) * (n >> (s + 1));
    real ang = 6.283185307179586 * real'(k) / real'(n);
    real er  = 16384.0 * $cos(ang);
    real ei  = -16384.0 * $sin(ang);
    checks++;
    if ((real'(got.re) - er) > 1.0 || (er - real'(got.re)) > 1.0 ||
        (real'(got.im) - ei) > 1.0 || (ei - real'(got.im)) > 1.0) begin
      failures++;
      $display("FAIL N=%0d s=%0d b=%0d got (%0d,%0d) expected (%f,%f)",
               n, s, b, got.re, got.im, er, ei);
    end
  endtask

  initial begin
    for (int s = 0; s < 3; s++) begin
      sb8 = 2'(s);
      #1;
      for (int b = 0; b < 4; b++) check(8, s, b, w8[b]);
    end
    for (int s = 0; s < 4; s++) begin
      sb16 = 2'(s);
      #1;
      for (int b = 0; b < 8; b++) check(16, s, b, w16[b]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
