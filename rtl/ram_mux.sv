// ram_mux: 2:1 multiplexer from the frame RAMs to the second 1D FFT.
//
// Steered by sel_n (the inverse of the RAM controller's sel): sel_n = 1
// (sel = 0, RAM1 being written) passes the row read from RAM2, sel_n = 0
// passes the row read from RAM1. Purely combinational; the leg assignment
// follows the paper.
module ram_mux
  import fft_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  sel_n,
  input  cplx_t din1 [N],  // row from RAM1
  input  cplx_t din2 [N],  // row from RAM2
  output cplx_t dout [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) dout[i] = sel_n ? din2[i] : din1[i];
  end

endmodule
