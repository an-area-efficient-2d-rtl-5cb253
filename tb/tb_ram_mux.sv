// tb_ram_mux: self-checking test of the RAM demultiplexer and multiplexer.
//
// For random data and both select values: the demultiplexer must pass the
// frame to RAM1 when sel = 0 and to RAM2 when sel = 1, with zero on the
// other leg; the multiplexer must pass RAM2's row when sel_n = 1 and
// RAM1's when sel_n = 0.
module tb_ram_mux;
  import fft_pkg::*;

  localparam int N = 8;

  logic  sel, sel_n;
  cplx_t din [N];
  cplx_t dout1 [N];
  cplx_t dout2 [N];
  cplx_t r1 [N];
  cplx_t r2 [N];
  cplx_t mout [N];
  int checks = 0, failures = 0;

  ram_dmux #(.N(N)) u_dmux (.sel(sel), .din(din), .dout1(dout1), .dout2(dout2));
  ram_mux  #(.N(N)) u_mux  (.sel_n(sel_n), .din1(r1), .din2(r2), .dout(mout));

  task automatic expect_eq(string what, cplx_t got, cplx_t exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 50; i++) begin
      for (int k = 0; k < N; k++) begin
        din[k] = cplx_t'($urandom);
        r1[k]  = cplx_t'($urandom);
        r2[k]  = cplx_t'($urandom);
      end
      sel   = 1'(i % 2);
      sel_n = 1'((i / 2) % 2);
      #1;
      for (int k = 0; k < N; k++) begin
        expect_eq("dmux ram1", dout1[k], sel ? cplx_t'(0) : din[k]);
        expect_eq("dmux ram2", dout2[k], sel ? din[k] : cplx_t'(0));
        expect_eq("mux", mout[k], sel_n ? r2[k] : r1[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
