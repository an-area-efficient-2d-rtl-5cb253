// tb_routing_network: self-checking test of the 8-point routing network.
//
// Each input sample carries its own index, and every butterfly input is
// compared with a hand-derived table of the radix-2 DIT pairs:
//   stage 0 (from X, bit-reversed):  A = X0 X2 X1 X3,  B = X4 X6 X5 X7
//   stage 1 (from the registers):    A = r0 r4 r2 r6,  B = r1 r5 r3 r7
//   stage 2 (from the registers):    A = r0 r1 r4 r5,  B = r2 r3 r6 r7
// where register b holds butterfly b's sum and register b+4 its difference.
module tb_routing_network;
  import fft_pkg::*;

  logic [1:0] sb;
  cplx_t din [8];
  cplx_t bf_a [4];
  cplx_t bf_b [4];
  int checks = 0, failures = 0;

  localparam int EXP_A [3][4] = '{'{0, 2, 1, 3}, '{0, 4, 2, 6}, '{0, 1, 4, 5}};
  localparam int EXP_B [3][4] = '{'{4, 6, 5, 7}, '{1, 5, 3, 7}, '{2, 3, 6, 7}};

  routing_network #(.N(8)) dut (.sb(sb), .din(din), .bf_a(bf_a), .bf_b(bf_b));

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      int base;
      base = int'($urandom_range(0, 1000)) * 16;
      for (int i = 0; i < 8; i++)
        din[i] = '{re: sample_t'(base + i), im: sample_t'(-(base + i))};
      for (int s = 0; s < 3; s++) begin
        sb = 2'(s);
        #1;
        for (int b = 0; b < 4; b++) begin
          checks += 2;
          if (bf_a[b] != din[EXP_A[s][b]]) begin
            failures++;
            $display("FAIL stage %0d bf %0d A: got %0d", s, b, int'(bf_a[b].re) - base);
          end
          if (bf_b[b] != din[EXP_B[s][b]]) begin
            failures++;
            $display("FAIL stage %0d bf %0d B: got %0d", s, b, int'(bf_b[b].re) - base);
          end
        end
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
