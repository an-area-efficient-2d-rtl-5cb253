// tb_fft2d: self-checking end-to-end test of the N x N 2D FFT processor.
//
// Runs the top with its default parameters (N = 8). Images are streamed
// without gaps: in every cycle with col_take = 1 the next column of the
// current image is driven. Image 0 is real-valued, image 1 a single
// impulse, image 2 a constant, the rest random complex, all with parts
// within +/-16000. Every valid output row is compared with a floating-point
// 2D DFT of the matching image divided by N^2 (tolerance 4 LSB); row_idx
// must count 0..N-1 within each image. Timing: row 0 of each image must
// appear N*log2(N) + log2(N) - 1 clocks after its column 0 was taken, and
// the rows of one image must follow each other every log2(N) clocks.
//
// Mechanisms that must each happen at least once (otherwise a failure is
// counted): the RAM swap in both directions (sel 0->1 and 1->0), an image
// written to RAM1 and one to RAM2, feedback through the register array
// (ISL = 1), final outputs (OSL = 1), and the suppressed output of the
// first image period, while the read RAM is still empty.
module tb_fft2d;
  import fft_pkg::*;

  localparam int N = 8;
  localparam int L = $clog2(N);
  localparam int IMAGES = 6;

  logic  clk = 0, rst;
  cplx_t x_col [N];
  cplx_t y_row [N];
  logic  col_take, row_valid, sel;
  logic [$clog2(N)-1:0] row_idx;

  int checks = 0, failures = 0;
  int cycle = 0;
  int cols_in = 0, rows_out = 0;
  int col0_cycle [IMAGES];
  int last_row_cycle;
  int n_swap01 = 0, n_swap10 = 0, n_ram1_images = 0, n_ram2_images = 0;
  int n_feedback = 0, n_final = 0, n_suppressed = 0;

  cplx_t img [IMAGES][N][N];   // img[m][r][c]

  fft2d dut (.clk(clk), .rst(rst), .x_col(x_col), .col_take(col_take), .y_row(y_row),
             .row_valid(row_valid), .row_idx(row_idx), .sel(sel));

  always #5 clk = !clk;
  always @(posedge clk) cycle++;

  task automatic check_val(string what, int got, real exp, real tol);
    checks++;
    if ((real'(got) - exp) > tol || (exp - real'(got)) > tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %f", what, got, exp);
    end
  endtask

  task automatic make_images();
    for (int m = 0; m < IMAGES; m++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          case (m)
            0: img[m][r][c] = '{re: sample_t'($urandom_range(0, 32000)) - 16'sd16000, im: 16'sd0};
            1: img[m][r][c] = (r == 2 && c == 5) ? '{re: 16'sd16000, im: 16'sd0} : '0;
            2: img[m][r][c] = '{re: 16'sd16000, im: -16'sd16000};
            default: img[m][r][c] = '{re: sample_t'($urandom_range(0, 32000)) - 16'sd16000,
                                      im: sample_t'($urandom_range(0, 32000)) - 16'sd16000};
          endcase
        end
  endtask

  // Check one output row u of image m against the 2D DFT / N^2.
  task automatic check_row(int m, int u);
    for (int v = 0; v < N; v++) begin
      real er, ei, ang;
      er = 0.0;
      ei = 0.0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          ang = -6.283185307179586 * real'((u * r + v * c) % N) / real'(N);
          er += real'(img[m][r][c].re) * $cos(ang) - real'(img[m][r][c].im) * $sin(ang);
          ei += real'(img[m][r][c].re) * $sin(ang) + real'(img[m][r][c].im) * $cos(ang);
        end
      check_val($sformatf("image %0d F(%0d,%0d).re", m, u, v), int'(y_row[v].re), er / real'(N * N), 4.0);
      check_val($sformatf("image %0d F(%0d,%0d).im", m, u, v), int'(y_row[v].im), ei / real'(N * N), 4.0);
    end
  endtask

  initial begin
    logic prev_sel;
    make_images();
    for (int i = 0; i < N; i++) x_col[i] = '0;
    rst = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    prev_sel = sel;
    while (rows_out < (IMAGES - 1) * N) begin
      // Observe the current cycle.
      if (sel != prev_sel) begin
        if (sel) n_swap01++; else n_swap10++;
        if (sel) n_ram1_images++; else n_ram2_images++;   // the RAM just filled
      end
      prev_sel = sel;
      if (dut.u_fft_col.isl) n_feedback++;
      if (dut.u_fft_col.done) n_final++;
      if (dut.u_fft_row.done && !row_valid) n_suppressed++;
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
      // Drive the next column while the first FFT takes its input.
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
    $display("swaps 0->1 %0d, 1->0 %0d; images into RAM1 %0d, RAM2 %0d; feedback cycles %0d; final outputs %0d; suppressed rows %0d",
             n_swap01, n_swap10, n_ram1_images, n_ram2_images, n_feedback, n_final, n_suppressed);
    check_val("sel 0->1 swaps seen", int'(n_swap01 > 0), 1.0, 0.0);
    check_val("sel 1->0 swaps seen", int'(n_swap10 > 0), 1.0, 0.0);
    check_val("images through RAM1", int'(n_ram1_images > 0), 1.0, 0.0);
    check_val("images through RAM2", int'(n_ram2_images > 0), 1.0, 0.0);
    check_val("register-array feedback used", int'(n_feedback > 0), 1.0, 0.0);
    check_val("final outputs seen", int'(n_final > 0), 1.0, 0.0);
    check_val("first-period rows suppressed", int'(n_suppressed), real'(N), 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((IMAGES + 2) * N * L + 20) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
