// tb_ram_controller: self-checking test of the ping-pong RAM controller.
//
// DONE pulses arrive at random intervals. A counter of pulses gives the
// expected state after each edge: addr = count mod N, sel = (count / N)
// mod 2, primed once count >= N; R/W-bar of RAM1 must equal sel and that
// of RAM2 its inverse; wr_en must follow done. Reset must return to sel = 0
// and address 0.
module tb_ram_controller;

  localparam int N = 8;

  logic clk = 0, rst, done;
  logic [2:0] addr;
  logic sel, sel_n, rw1, rw2, wr_en, primed;
  int checks = 0, failures = 0, count = 0, swaps = 0;

  ram_controller #(.N(N)) dut (.clk(clk), .rst(rst), .done(done), .addr(addr), .sel(sel),
                               .sel_n(sel_n), .rw1(rw1), .rw2(rw2), .wr_en(wr_en),
                               .primed(primed));

  always #5 clk = !clk;

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (count %0d)", what, got, exp, count);
    end
  endtask

  task automatic check_state();
    expect_eq("addr", int'(addr), int'(count % N));
    expect_eq("sel", int'(sel), int'((count / N) % 2));
    expect_eq("sel_n", int'(sel_n), int'(1 - (count / N) % 2));
    expect_eq("rw1", int'(rw1), int'((count / N) % 2));
    expect_eq("rw2", int'(rw2), int'(1 - (count / N) % 2));
    expect_eq("primed", int'(primed), int'(count >= N));
  endtask

  initial begin
    done = 0;
    rst = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    check_state();
    for (int i = 0; i < 300; i++) begin
      logic prev_sel;
      prev_sel = sel;
      done = ($urandom_range(0, 2) == 0);
      #1 expect_eq("wr_en", int'(wr_en), int'(done));
      @(posedge clk);
      if (done) count++;
      @(negedge clk);
      if (sel != prev_sel) swaps++;
      check_state();
    end
    expect_eq("swaps seen", int'(swaps >= 4), int'(1));
    // Reset in the middle.
    rst = 1;
    @(posedge clk);
    @(negedge clk) rst = 0;
    count = 0;
    check_state();
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
