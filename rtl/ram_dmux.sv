// ram_dmux: 1:2 demultiplexer from the first 1D FFT to the frame RAMs.
//
// sel = 0 sends the column frame to RAM1 (dout1), sel = 1 to RAM2 (dout2);
// the output not selected is driven with zero. Purely combinational. The
// leg assignment follows the paper; the zero on the idle leg is this
// design's choice.
module ram_dmux
  import fft_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  sel,
  input  cplx_t din   [N],
  output cplx_t dout1 [N],
  output cplx_t dout2 [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      dout1[i] = sel ? '0 : din[i];
      dout2[i] = sel ? din[i] : '0;
    end
  end

endmodule
