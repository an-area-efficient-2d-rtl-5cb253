// frame_ram: N x N complex frame buffer between the two 1D FFTs.
//
// The first 1D FFT transforms the image column by column; the second must
// transform rows. This RAM therefore stores a whole frame and is accessed
// along both dimensions: a write stores the N samples of one column at
// column `addr`, a read returns the N samples of row `addr`. The 2D FFT
// uses two of these (RAM1 and RAM2) as a ping-pong pair.
//
// Interface and timing: a write happens on the rising clock edge when
// rw_n = 0 (write mode) and wr_en = 1. The read is asynchronous: rdata
// always shows row `addr`, so the second FFT can take it in the same cycle.
// The paper gives the RAM's function and its Addr and R/W-bar lines; the
// column-write/row-read organisation, the write strobe and the
// asynchronous read are this design's. The contents are not reset.
module frame_ram
  import fft_pkg::*;
#(
  parameter int N = 8  // frame is N x N
) (
  input  logic                 clk,
  input  logic                 rw_n,       // 1 = read mode, 0 = write mode
  input  logic                 wr_en,      // write strobe
  input  logic [$clog2(N)-1:0] addr,       // column to write / row to read
  input  cplx_t                wdata [N],  // column: wdata[r] goes to row r
  output cplx_t                rdata [N]   // row: rdata[c] from column c
);

  cplx_t mem [N][N];  // mem[row][column]

  always_ff @(posedge clk) begin
    if (!rw_n && wr_en) begin
      for (int r = 0; r < N; r++) mem[r][addr] <= wdata[r];
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) rdata[c] = mem[addr][c];
  end

endmodule
