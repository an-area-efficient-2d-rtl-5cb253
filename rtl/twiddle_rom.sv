// twiddle_rom: twiddle factor ROM of the 1D FFT processor.
//
// For the stage on the stage bus it presents the twiddle factor of each of
// the N/2 butterflies at once. The table follows the iterative radix-2
// decimation-in-time FFT: in stage s (group span 2^(s+1)) butterfly b
// handles the j-th pair of its group, j = b mod 2^s, and needs
//   W_N^k = cos(2*pi*k/N) - j*sin(2*pi*k/N),  k = j * N / 2^(s+1).
// The values are computed during elaboration and rounded to Q1.14; the
// ROM itself is combinational. The paper names the ROM and shows it fed by
// the stage bus; its contents and format are this design's.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int N = 8  // FFT points, a power of two >= 4
) (
  input  logic [sb_width(N)-1:0] sb,        // current stage
  output twiddle_t               w [N/2]    // twiddle of butterfly 0..N/2-1
);

  localparam int    STAGES = $clog2(N);
  localparam real   PI     = 3.14159265358979323846;
  localparam real   ONE    = real'(2**TW_FRAC);

  typedef coef_t rom_t [STAGES*N/2];  // entry s*N/2 + b

  function automatic coef_t to_q(real v);
    real s = v * ONE;
    return coef_t'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5));
  endfunction

  // Real parts (imag = 0) or imaginary parts (imag = 1) of the table.
  function automatic rom_t make_rom(bit imag);
    rom_t r;
    for (int s = 0; s < STAGES; s++) begin
      for (int b = 0; b < N/2; b++) begin
        int  k   = (b % (1 << s)) * (N >> (s + 1));
        real ang = 2.0 * PI * real'(k) / real'(N);
        r[s*N/2 + b] = imag ? to_q(-$sin(ang)) : to_q($cos(ang));
      end
    end
    return r;
  endfunction

  localparam rom_t ROM_RE = make_rom(1'b0);
  localparam rom_t ROM_IM = make_rom(1'b1);

  always_comb begin
    for (int b = 0; b < N/2; b++) begin
      if (int'(sb) < STAGES) w[b] = '{re: ROM_RE[int'(sb)*N/2 + b], im: ROM_IM[int'(sb)*N/2 + b]};
      else                   w[b] = '{re: ROM_RE[b], im: ROM_IM[b]};
    end
  end

endmodule
