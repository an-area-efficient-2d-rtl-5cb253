// fft1d: N-point radix-2 FFT processor that reuses N/2 butterflies.
//
// Instead of one column of N/2 butterflies per stage (N/2*log2(N) in all),
// a single column of N/2 butterflies computes every stage in turn, one
// stage per clock:
//
//   x ──► ISL muxes ──► routing network ──► N/2 butterflies ──► OSL demux ──► y
//            ▲                 ▲  SB              ▲ twiddles         │
//            └── register array ◄─────────────────┼───────────────────┘
//                                    control unit (SB, ISL, OSL)
//
// Stage 0 (ISL = 0) takes the frame x from outside; stages 1..log2(N)-1
// (ISL = 1) take the previous stage's results from the register array.
// In stages 0..log2(N)-2 (OSL = 0) the butterfly results are stored in the
// register array; in the last stage (OSL = 1) they are the FFT result.
//
// Interface and timing: the processor free-runs from reset. x is sampled
// combinationally in every cycle in which take = 1 (stage 0, once every
// log2(N) cycles); the transform of that frame appears on y, in natural
// order, during the cycle with done = 1, log2(N)-1 cycles later, and y is
// zero in all other cycles. y = DFT(x)/N because every butterfly halves
// its outputs. A new frame can be taken every log2(N) cycles, so frames
// overlap nothing and the throughput is N samples per log2(N) clocks.
//
// Follows the paper: one bank of N/2 butterflies, ISL/OSL/SB control, the
// register array feedback and the twiddle ROM. This design's own choices:
// the fixed-point format and per-stage scaling, the routing permutation,
// natural-order outputs (butterfly b drives Y(b) and Y(b+N/2)), the zero on
// y outside done, and the synchronous reset.
module fft1d
  import fft_pkg::*;
#(
  parameter int N = 8  // FFT points, a power of two >= 4
) (
  input  logic                   clk,
  input  logic                   rst,
  input  cplx_t                  x [N],  // input frame, sampled while take = 1
  output logic                   take,   // x is consumed in this cycle (stage 0)
  output cplx_t                  y [N],  // output frame, valid while done = 1
  output logic                   done,   // one-cycle pulse per frame (= OSL)
  output logic [sb_width(N)-1:0] sb      // current stage
);

  logic  isl, osl;
  cplx_t stage_in [N];   // after the input select multiplexers
  cplx_t reg_q    [N];   // register array contents
  cplx_t bf_a     [N/2];
  cplx_t bf_b     [N/2];
  cplx_t bf_out   [N];   // butterfly b: sum at b, difference at b + N/2
  twiddle_t w     [N/2];

  control_unit #(.N(N)) u_cu (
    .clk (clk),
    .rst (rst),
    .sb  (sb),
    .isl (isl),
    .osl (osl)
  );

  // Input select multiplexers: leg 0 external input, leg 1 register array.
  always_comb begin
    for (int i = 0; i < N; i++) stage_in[i] = isl ? reg_q[i] : x[i];
  end

  routing_network #(.N(N)) u_rn (
    .sb   (sb),
    .din  (stage_in),
    .bf_a (bf_a),
    .bf_b (bf_b)
  );

  twiddle_rom #(.N(N)) u_rom (
    .sb (sb),
    .w  (w)
  );

  for (genvar b = 0; b < N/2; b++) begin : g_bf
    butterfly u_bf (
      .a     (bf_a[b]),
      .b     (bf_b[b]),
      .w     (w[b]),
      .y_add (bf_out[b]),
      .y_sub (bf_out[b + N/2])
    );
  end

  // Output select demultiplexers: leg 1 to the outside, leg 0 to the
  // register array (which loads only while OSL = 0).
  always_comb begin
    for (int i = 0; i < N; i++) y[i] = osl ? bf_out[i] : '0;
  end

  register_array #(.N(N)) u_regs (
    .clk (clk),
    .we  (!osl),
    .d   (bf_out),
    .q   (reg_q)
  );

  assign take = !isl;
  assign done = osl;

endmodule
