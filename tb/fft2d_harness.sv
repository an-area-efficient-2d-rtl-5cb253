// fft2d_harness: reusable self-checking driver for one fft2d of size N.
//
// Streams IMAGES random complex images (parts within +/-16000) into an
// fft2d #(N) without gaps, one column per col_take cycle, and checks every
// valid output row against a floating-point 2D DFT divided by N^2
// (tolerance TOL LSB), the row index order, the latency of row 0
// (N*log2(N) + log2(N) - 1 clocks after column 0 is taken) and the row
// spacing of log2(N) clocks. When all rows of IMAGES-1 images have been
// checked it raises `finished`; checks and failures count as it goes.
module fft2d_harness
  import fft_pkg::*;
#(
  parameter int N      = 16,
  parameter int IMAGES = 3,
  parameter int TOL    = 4
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic finished
);

  localparam int L = $clog2(N);

  cplx_t x_col [N];
  cplx_t y_row [N];
  logic  col_take, row_valid, sel;
  logic [$clog2(N)-1:0] row_idx;

  int cycle = 0;
  int cols_in = 0, rows_out = 0;
  int col0_cycle [IMAGES];
  int last_row_cycle = 0;
  real cos_t [N];
  real sin_t [N];
  cplx_t img [IMAGES][N][N];   // img[m][r][c]

  fft2d #(.N(N)) dut (.clk(clk), .rst(rst), .x_col(x_col), .col_take(col_take), .y_row(y_row),
                      .row_valid(row_valid), .row_idx(row_idx), .sel(sel));

  task automatic check_val(string what, int got, real exp, real tol);
    checks++;
    if ((real'(got) - exp) > tol || (exp - real'(got)) > tol) begin
      failures++;
      $display("FAIL N=%0d %s: got %0d expected %f", N, what, got, exp);
    end
  endtask

  task automatic check_row(int m, int u);
    for (int v = 0; v < N; v++) begin
      real er, ei;
      int  k;
      er = 0.0;
      ei = 0.0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          k = (u * r + v * c) % N;
          er += real'(img[m][r][c].re) * cos_t[k] + real'(img[m][r][c].im) * sin_t[k];
          ei += real'(img[m][r][c].im) * cos_t[k] - real'(img[m][r][c].re) * sin_t[k];
        end
      check_val($sformatf("image %0d F(%0d,%0d).re", m, u, v), int'(y_row[v].re), er / real'(N * N), real'(TOL));
      check_val($sformatf("image %0d F(%0d,%0d).im", m, u, v), int'(y_row[v].im), ei / real'(N * N), real'(TOL));
    end
  endtask

  always @(posedge clk) cycle++;

  initial begin
    checks   = 0;
    failures = 0;
    finished = 0;
    for (int k = 0; k < N; k++) begin
      cos_t[k] = $cos(6.283185307179586 * real'(k) / real'(N));
      sin_t[k] = $sin(6.283185307179586 * real'(k) / real'(N));
    end
    for (int m = 0; m < IMAGES; m++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          img[m][r][c] = '{re: sample_t'($urandom_range(0, 32000)) - 16'sd16000,
                           im: sample_t'($urandom_range(0, 32000)) - 16'sd16000};
    for (int i = 0; i < N; i++) x_col[i] = '0;
    @(negedge clk);
    while (rst) @(negedge clk);
    while (rows_out < (IMAGES - 1) * N) begin
      if (row_valid) begin
        int m, u;
        m = rows_out / N;
        u = rows_out % N;
        check_val("row_idx", int'(row_idx), real'(u), 0.0);
        if (u == 0) check_val("row 0 latency", int'(cycle - col0_cycle[m]), real'(N * L + L - 1), 0.0);
        else        check_val("row spacing", int'(cycle - last_row_cycle), real'(L), 0.0);
        last_row_cycle = cycle;
        check_row(m, u);
        rows_out++;
      end
      if (col_take) begin
        if (cols_in < IMAGES * N) begin
          int m, c;
          m = cols_in / N;
          c = cols_in % N;
          if (c == 0) col0_cycle[m] = cycle;
          for (int r = 0; r < N; r++) x_col[r] = img[m][r][c];
        end else begin
          for (int r = 0; r < N; r++) x_col[r] = '0;
        end
        cols_in++;
      end
      @(negedge clk);
    end
    finished = 1;
  end

endmodule
