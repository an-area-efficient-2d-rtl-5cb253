// tb_fft2d_sizes: the 2D FFT processor at other sizes than the default.
//
// Runs fft2d at N = 4, 16 and 32 side by side (one fft2d_harness each)
// on random complex images and checks every output row against a
// floating-point 2D DFT / N^2, the row order, the row-0 latency and the
// row spacing. Shows that the parameterised routing tables, twiddle ROM,
// stage counter and RAM control hold for other powers of two.
module tb_fft2d_sizes;

  logic clk = 0, rst;
  int   c4, f4, c16, f16, c32, f32;
  logic d4, d16, d32;

  fft2d_harness #(.N(4),  .IMAGES(4)) h4  (.clk(clk), .rst(rst), .checks(c4),  .failures(f4),  .finished(d4));
  fft2d_harness #(.N(16), .IMAGES(3)) h16 (.clk(clk), .rst(rst), .checks(c16), .failures(f16), .finished(d16));
  fft2d_harness #(.N(32), .IMAGES(3)) h32 (.clk(clk), .rst(rst), .checks(c32), .failures(f32), .finished(d32));

  always #5 clk = !clk;

  initial begin
    rst = 1;
    repeat (2) @(posedge clk);
    #1 rst = 0;  // released just after an edge, so every harness sees it by the next negedge
    wait (d4 && d16 && d32);
    $display("N=4: %0d checks, N=16: %0d, N=32: %0d", c4, c16, c32);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16 + c32, f4 + f16 + f32);
    $finish;
  end

  initial begin
    repeat (4 * 32 * 5 + 100) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16 + c32, f4 + f16 + f32 + 1);
    $finish;
  end
endmodule
