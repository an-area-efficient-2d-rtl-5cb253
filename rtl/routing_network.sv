// routing_network: stage-dependent shuffle in front of the butterflies.
//
// The N/2 butterflies are reused in every stage, and butterfly b always
// writes its two results to the same places: y_add to entry b and y_sub to
// entry b+N/2 of the register array (and, in the last stage, to Y(b) and
// Y(b+N/2)). The routing network brings, for each stage, the right pair
// (A, B) to every butterfly:
//   stage 0      - from the external frame X(0..N-1) in natural order, with
//                  the bit reversal of decimation in time folded in;
//   stage s > 0  - from the register array, undoing where stage s-1 left
//                  each element of the in-place radix-2 DIT algorithm.
// With this arrangement the last stage's butterfly b computes exactly Y(b)
// and Y(b+N/2), so the result leaves in natural order. Each butterfly input
// is an N:1 multiplexer steered by the stage bus; the select tables are
// computed during elaboration. The paper states only that this block
// shuffles the samples according to the stage; the permutation is this
// design's.
module routing_network
  import fft_pkg::*;
#(
  parameter int N = 8  // FFT points, a power of two >= 4
) (
  input  logic [sb_width(N)-1:0] sb,         // current stage
  input  cplx_t                  din  [N],   // stage input (after the ISL multiplexers)
  output cplx_t                  bf_a [N/2], // input A of each butterfly
  output cplx_t                  bf_b [N/2]  // input B of each butterfly
);

  localparam int STAGES = $clog2(N);

  typedef int unsigned tab_t [STAGES*N/2];  // entry s*N/2 + b

  // Register-array position of logical element l after stage s.
  function automatic int unsigned location(int s, int unsigned l);
    int unsigned h = 1 << s;
    int unsigned b = (l / (2 * h)) * h + (l % h);
    return ((l / h) % 2 == 1) ? b + N/2 : b;
  endfunction

  // Source index of input A (upper = 0) or B (upper = 1) of every butterfly.
  function automatic tab_t make_tab(bit upper);
    tab_t t;
    for (int s = 0; s < STAGES; s++) begin
      for (int b = 0; b < N/2; b++) begin
        int unsigned h = 1 << s;
        int unsigned l = (b / h) * 2 * h + (b % h) + (upper ? h : 0);
        t[s*N/2 + b] = (s == 0) ? bit_reverse(l, STAGES) : location(s - 1, l);
      end
    end
    return t;
  endfunction

  localparam tab_t SRC_A = make_tab(1'b0);
  localparam tab_t SRC_B = make_tab(1'b1);

  always_comb begin
    for (int b = 0; b < N/2; b++) begin
      if (int'(sb) < STAGES) begin
        bf_a[b] = din[SRC_A[int'(sb)*N/2 + b]];
        bf_b[b] = din[SRC_B[int'(sb)*N/2 + b]];
      end else begin
        bf_a[b] = din[SRC_A[b]];
        bf_b[b] = din[SRC_B[b]];
      end
    end
  end

endmodule
