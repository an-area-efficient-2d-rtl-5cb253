// fft2d: area-efficient N x N two-dimensional FFT processor (top level).
//
// A 2D DFT is a 1D DFT along every column followed by a 1D DFT along every
// row. Two 1D FFT processors (fft1d), each with only N/2 reused
// butterflies, run side by side in lock step. The first transforms the
// image one column per frame and, steered by the RAM controller, writes
// the columns into one of two N x N frame RAMs; at the same time the second
// reads the other RAM one row per frame and transforms the rows:
//
//   x_col ─► fft1d ─► 1:2 DMUX ─► RAM1 / RAM2 ─► 2:1 MUX ─► fft1d ─► y_row
//              └─ done ─► RAM controller (addr, sel, R/W-bar) ─┘
//
// After N columns the RAMs swap roles, so images stream through without a
// pause: one N x N image enters and one leaves every N*log2(N) clocks.
//
// Interface and timing: both 1D FFTs free-run from reset with a period of
// log2(N) clocks. x_col (column c of the input image, x_col[r] = pixel
// (r, c)) is sampled in each cycle with col_take = 1; columns 0..N-1 of an
// image go in consecutive take cycles, starting with the first take after
// reset. Rows come out during cycles with row_valid = 1: y_row[v] =
// F(u, v)/N^2 for u = row_idx, rows 0..N-1 in order. Row 0 of an image
// appears N*log2(N) + log2(N) - 1 clocks after its column 0 was taken. The
// first image period after reset has no valid rows (the read RAM is still
// empty); row_valid is kept low then.
//
// Follows the paper: the block structure, the ping-pong RAMs, the sel
// protocol and the shared address. This design's choices: the column-write
// /row-read RAM organisation, the lock-step start of both FFTs, the
// row_valid/row_idx outputs and the number format (see fft_pkg).
module fft2d
  import fft_pkg::*;
#(
  parameter int N = 8  // image is N x N; N a power of two >= 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  cplx_t                x_col [N],  // one input column
  output logic                 col_take,   // x_col consumed this cycle
  output cplx_t                y_row [N],  // one output row
  output logic                 row_valid,  // y_row is a valid output row
  output logic [$clog2(N)-1:0] row_idx,    // its row index u
  output logic                 sel         // RAM selection (0: RAM1 written)
);

  cplx_t col_out [N];   // first FFT result
  cplx_t to_ram1 [N];
  cplx_t to_ram2 [N];
  cplx_t from_ram1 [N];
  cplx_t from_ram2 [N];
  cplx_t row_in  [N];   // second FFT input
  logic  done1, done2, take2;
  logic  sel_n, rw1, rw2, wr_en, primed;
  logic  [$clog2(N)-1:0]   addr;
  logic  [sb_width(N)-1:0] sb1, sb2;

  fft1d #(.N(N)) u_fft_col (
    .clk  (clk),
    .rst  (rst),
    .x    (x_col),
    .take (col_take),
    .y    (col_out),
    .done (done1),
    .sb   (sb1)
  );

  ram_controller #(.N(N)) u_ctrl (
    .clk    (clk),
    .rst    (rst),
    .done   (done1),
    .addr   (addr),
    .sel    (sel),
    .sel_n  (sel_n),
    .rw1    (rw1),
    .rw2    (rw2),
    .wr_en  (wr_en),
    .primed (primed)
  );

  ram_dmux #(.N(N)) u_dmux (
    .sel   (sel),
    .din   (col_out),
    .dout1 (to_ram1),
    .dout2 (to_ram2)
  );

  frame_ram #(.N(N)) u_ram1 (
    .clk   (clk),
    .rw_n  (rw1),
    .wr_en (wr_en),
    .addr  (addr),
    .wdata (to_ram1),
    .rdata (from_ram1)
  );

  frame_ram #(.N(N)) u_ram2 (
    .clk   (clk),
    .rw_n  (rw2),
    .wr_en (wr_en),
    .addr  (addr),
    .wdata (to_ram2),
    .rdata (from_ram2)
  );

  ram_mux #(.N(N)) u_mux (
    .sel_n (sel_n),
    .din1  (from_ram1),
    .din2  (from_ram2),
    .dout  (row_in)
  );

  fft1d #(.N(N)) u_fft_row (
    .clk  (clk),
    .rst  (rst),
    .x    (row_in),
    .take (take2),
    .y    (y_row),
    .done (done2),
    .sb   (sb2)
  );

  assign row_valid = done2 && primed;
  assign row_idx   = addr;

  // The two 1D FFTs must stay in lock step: the controller counts the
  // first one's DONE and addresses the row the second one is reading.
  always_ff @(posedge clk) begin
    if (!rst) begin
      a_lockstep : assert ((sb1 == sb2) && (done1 == done2) && (take2 == col_take))
        else $error("fft2d: 1D FFT processors out of step");
    end
  end

endmodule
