// tb_fft1d: self-checking end-to-end test of the 8-point 1D FFT processor.
//
// A new random complex frame (parts within +/-16000) is offered in every
// cycle with take = 1, so frames follow back to back. Every done pulse is
// checked against a floating-point DFT of the matching frame divided by N
// (tolerance 3 LSB), and its timing: done must come exactly log2(N)-1 = 2
// clocks after the take cycle, and y must be zero while done is low. A few
// frames are impulses and constants, whose spectra are exact.
module tb_fft1d;
  import fft_pkg::*;

  localparam int N = 8;
  localparam int L = 3;

  logic  clk = 0, rst;
  cplx_t x [N];
  cplx_t y [N];
  logic  take, done;
  logic [1:0] sb;
  int checks = 0, failures = 0, frames_in = 0, frames_out = 0;
  int cycle = 0;
  int first_done = 0, last_done = 0;

  real   exp_re [$];   // N entries per frame, Y(0) first
  real   exp_im [$];
  int    take_cycle [$];

  fft1d #(.N(N)) dut (.clk(clk), .rst(rst), .x(x), .take(take), .y(y), .done(done), .sb(sb));

  always #5 clk = !clk;
  always @(posedge clk) cycle++;

  task automatic check_val(string what, int got, real exp, real tol);
    checks++;
    if ((real'(got) - exp) > tol || (exp - real'(got)) > tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %f", what, got, exp);
    end
  endtask

  // Build the next input frame and its expected spectrum.
  task automatic new_frame();
    real er [N];
    real ei [N];
    int kind = frames_in % 7;
    for (int n = 0; n < N; n++) begin
      if (kind == 1)      x[n] = (n == 0) ? '{re: 16'sd16000, im: 16'sd0} : '0;    // impulse
      else if (kind == 2) x[n] = '{re: 16'sd12000, im: -16'sd8000};                // constant
      else                x[n] = '{re: sample_t'($urandom_range(0, 32000)) - 16'sd16000,
                                   im: sample_t'($urandom_range(0, 32000)) - 16'sd16000};
    end
    for (int k = 0; k < N; k++) begin
      er[k] = 0.0;
      ei[k] = 0.0;
      for (int n = 0; n < N; n++) begin
        real ang;
        ang = -6.283185307179586 * real'(n * k) / real'(N);
        er[k] += real'(x[n].re) * $cos(ang) - real'(x[n].im) * $sin(ang);
        ei[k] += real'(x[n].re) * $sin(ang) + real'(x[n].im) * $cos(ang);
      end
      er[k] /= real'(N);
      ei[k] /= real'(N);
    end
    for (int k = 0; k < N; k++) begin
      exp_re.push_back(er[k]);
      exp_im.push_back(ei[k]);
    end
    take_cycle.push_back(cycle);
    frames_in++;
  endtask

  initial begin
    for (int n = 0; n < N; n++) x[n] = '0;
    rst = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    while (frames_out < 60) begin
      if (done) begin
        real er [N];
        real ei [N];
        int  tc;
        checks++;
        if (exp_re.size() == 0) begin
          failures++;
          $display("FAIL done without a frame");
        end else begin
          for (int k = 0; k < N; k++) begin
            er[k] = exp_re.pop_front();
            ei[k] = exp_im.pop_front();
          end
          tc = take_cycle.pop_front();
          check_val("latency", int'(cycle - tc), real'(L - 1), 0.0);
          for (int k = 0; k < N; k++) begin
            check_val($sformatf("frame %0d Y(%0d).re", frames_out, k), int'(y[k].re), er[k], 3.0);
            check_val($sformatf("frame %0d Y(%0d).im", frames_out, k), int'(y[k].im), ei[k], 3.0);
          end
        end
        if (frames_out == 0) first_done = cycle;
        last_done = cycle;
        frames_out++;
      end else begin
        for (int k = 0; k < N; k++) begin
          checks++;
          if (y[k] != '0) begin
            failures++;
            $display("FAIL y(%0d) not zero outside done", k);
          end
        end
      end
      if (take) new_frame();
      @(negedge clk);
    end
    // Throughput: one frame per L clocks, nothing lost or duplicated.
    check_val("frames taken", int'(frames_in), real'(frames_out), 0.0);
    check_val("cycles for all frames", int'(last_done - first_done), real'((frames_out - 1) * L), 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
