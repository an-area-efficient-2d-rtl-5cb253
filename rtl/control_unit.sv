// control_unit: stage sequencer of the 1D FFT processor.
//
// A counter advances by one stage on every rising clock edge, counting
// 0, 1, ..., log2(N)-1 and wrapping back to 0, so one N-point frame passes
// through the shared butterflies every log2(N) clocks. From the stage it
// drives the three control lines of the paper's control unit:
//   sb  - stage bus, the number of the current stage;
//   isl - input select line: 0 in stage 0 (take samples from outside),
//         1 in every later stage (take the register array, feedback path);
//   osl - output select line: 1 only in the last stage (butterfly outputs
//         are the final FFT result), 0 otherwise (they go to the register
//         array).
// osl doubles as the DONE pulse of the 1D FFT: high for one clock per frame.
// The synchronous active-high reset (returning to stage 0) is this design's
// addition; the paper lists only the clock as input.
module control_unit
  import fft_pkg::*;
#(
  parameter int N = 8  // FFT points, a power of two >= 4
) (
  input  logic                   clk,
  input  logic                   rst,
  output logic [sb_width(N)-1:0] sb,
  output logic                   isl,
  output logic                   osl
);

  localparam int STAGES = $clog2(N);
  localparam int SBW    = sb_width(N);

  always_ff @(posedge clk) begin
    if (rst)                            sb <= '0;
    else if (sb == SBW'(STAGES - 1))    sb <= '0;
    else                                sb <= sb + SBW'(1);
  end

  assign isl = (sb != '0);
  assign osl = (sb == SBW'(STAGES - 1));

  initial begin
    assert (N >= 4 && (N & (N - 1)) == 0)
      else $fatal(1, "control_unit: N must be a power of two of at least 4");
  end

endmodule
