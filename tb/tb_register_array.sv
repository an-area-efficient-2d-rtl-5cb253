// tb_register_array: self-checking test of the feedback register array.
//
// Random data is presented every clock with a random load enable; a model
// copy updated only when enabled must match q after every edge.
module tb_register_array;
  import fft_pkg::*;

  logic  clk = 0;
  logic  we;
  cplx_t d [8];
  cplx_t q [8];
  cplx_t model [8];
  int checks = 0, failures = 0;

  register_array #(.N(8)) dut (.clk(clk), .we(we), .d(d), .q(q));

  always #5 clk = !clk;

  initial begin
    // First load everything so the model is defined.
    for (int i = 0; i < 8; i++) d[i] = cplx_t'($urandom);
    we = 1;
    @(posedge clk);
    model = d;
    #1;
    for (int cyc = 0; cyc < 200; cyc++) begin
      for (int i = 0; i < 8; i++) d[i] = cplx_t'($urandom);
      we = ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (we) model = d;
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (q[i] != model[i]) begin
          failures++;
          $display("FAIL cycle %0d entry %0d", cyc, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
