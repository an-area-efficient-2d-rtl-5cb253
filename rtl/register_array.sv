// register_array: feedback store of the 1D FFT processor.
//
// Holds the N butterfly outputs of one stage so that the next stage can
// read them back through the input multiplexers. On every rising clock
// edge with we = 1 (output select line low: not the last stage) all N
// entries load d; otherwise they hold. Entry b receives butterfly b's
// sum output and entry b+N/2 its difference output. There is no reset:
// stage 0 always writes the array before any later stage reads it.
module register_array
  import fft_pkg::*;
#(
  parameter int N = 8  // FFT points
) (
  input  logic  clk,
  input  logic  we,      // load enable
  input  cplx_t d [N],   // butterfly outputs of the current stage
  output cplx_t q [N]    // outputs of the previous stage
);

  always_ff @(posedge clk) begin
    if (we) q <= d;
  end

endmodule
