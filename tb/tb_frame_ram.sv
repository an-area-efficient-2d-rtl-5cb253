// tb_frame_ram: self-checking test of the transposing frame RAM.
//
// Columns are written with random data, including attempts in read mode
// (rw_n = 1) and without the strobe, which must not write. A model N x N
// array must then match every row read back, so a column written at address
// c shows up as element c of every row.
module tb_frame_ram;
  import fft_pkg::*;

  localparam int N = 8;

  logic clk = 0, rw_n, wr_en;
  logic [2:0] addr;
  cplx_t wdata [N];
  cplx_t rdata [N];
  cplx_t model [N][N];
  int checks = 0, failures = 0;

  frame_ram #(.N(N)) dut (.clk(clk), .rw_n(rw_n), .wr_en(wr_en), .addr(addr),
                          .wdata(wdata), .rdata(rdata));

  always #5 clk = !clk;

  task automatic write_col(int c, logic mode, logic en);
    @(negedge clk);
    rw_n  = mode;
    wr_en = en;
    addr  = 3'(c);
    for (int r = 0; r < N; r++) wdata[r] = cplx_t'($urandom);
    @(posedge clk);
    if (!mode && en) for (int r = 0; r < N; r++) model[r][c] = wdata[r];
  endtask

  task automatic read_all();
    @(negedge clk);
    rw_n  = 1;
    wr_en = 0;
    for (int r = 0; r < N; r++) begin
      addr = 3'(r);
      #1;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (rdata[c] != model[r][c]) begin
          failures++;
          $display("FAIL row %0d col %0d", r, c);
        end
      end
    end
  endtask

  initial begin
    for (int c = 0; c < N; c++) write_col(c, 1'b0, 1'b1);
    read_all();
    for (int i = 0; i < 40; i++)
      write_col(int'($urandom_range(0, N - 1)), 1'($urandom_range(0, 1)), 1'($urandom_range(0, 1)));
    read_all();
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
