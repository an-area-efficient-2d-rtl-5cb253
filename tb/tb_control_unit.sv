// tb_control_unit: self-checking test of the 1D FFT stage sequencer.
//
// For N = 8 (3 stages) and N = 16 (4 stages): after reset the stage bus
// must run 0, 1, ..., log2(N)-1, 0, ... one step per clock; ISL must be
// low exactly in stage 0 and OSL high exactly in the last stage, so OSL
// (DONE) pulses once every log2(N) clocks. A reset in mid-count must
// return to stage 0.
module tb_control_unit;
  import fft_pkg::*;

  logic clk = 0, rst;
  logic [1:0] sb8, sb16;
  logic isl8, osl8, isl16, osl16;
  int checks = 0, failures = 0;

  control_unit #(.N(8))  dut8  (.clk(clk), .rst(rst), .sb(sb8),  .isl(isl8),  .osl(osl8));
  control_unit #(.N(16)) dut16 (.clk(clk), .rst(rst), .sb(sb16), .isl(isl16), .osl(osl16));

  always #5 clk = !clk;

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    int last_done8;
    last_done8 = -1;
    rst = 1;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 50; t++) begin
      expect_eq("sb8", int'(sb8), int'(t % 3));
      expect_eq("isl8", int'(isl8), int'((t % 3) != 0));
      expect_eq("osl8", int'(osl8), int'((t % 3) == 2));
      expect_eq("sb16", int'(sb16), int'(t % 4));
      expect_eq("isl16", int'(isl16), int'((t % 4) != 0));
      expect_eq("osl16", int'(osl16), int'((t % 4) == 3));
      if (osl8) begin
        if (last_done8 >= 0) expect_eq("done8 period", int'(t - last_done8), int'(3));
        last_done8 = t;
      end
      @(posedge clk);
      #1;
    end
    // Reset in the middle of a frame.
    while (sb8 != 2'd1) begin @(posedge clk); #1; end
    rst = 1;
    @(posedge clk);
    #1 rst = 0;
    expect_eq("sb8 after reset", int'(sb8), int'(0));
    expect_eq("sb16 after reset", int'(sb16), int'(0));
    expect_eq("isl8 after reset", int'(isl8), int'(0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
