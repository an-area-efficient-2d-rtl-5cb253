// ram_controller: ping-pong control of the two frame RAMs of the 2D FFT.
//
// Every DONE pulse of the first 1D FFT marks one finished column. The
// controller stores it at the current address of the RAM in write mode and
// then advances the address shared by both RAMs. When the address wraps
// from N-1 to 0 - the written RAM is full and the read RAM fully read - it
// inverts sel, which swaps the roles of the two RAMs:
//   sel = 0: RAM1 in write mode (rw1 = 0), RAM2 in read mode (rw2 = 1);
//   sel = 1: RAM2 in write mode, RAM1 in read mode.
// rw1/rw2 are the RAMs' R/W-bar lines (1 = read, 0 = write); sel_n is the
// inverse of sel, used by the read multiplexer. Reset gives sel = 0 and
// address 0, as in the paper.
//
// Outputs beyond the paper's Addr, sel and R/W-bar lines: wr_en (the write
// strobe; it is a plain copy of done, kept as its own port so the RAM
// write enable has a named source) and primed, which rises at the first swap and
// tells that the RAM in read mode holds a complete frame.
//
// Timing: addr, sel and primed change on the clock edge that ends a cycle
// with done = 1; the write at that edge still uses the old address.
module ram_controller #(
  parameter int N = 8  // frame is N x N; N a power of two >= 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 done,    // DONE of the first 1D FFT
  output logic [$clog2(N)-1:0] addr,    // shared RAM address
  output logic                 sel,
  output logic                 sel_n,
  output logic                 rw1,     // R/W-bar of RAM1
  output logic                 rw2,     // R/W-bar of RAM2
  output logic                 wr_en,   // write strobe
  output logic                 primed   // read RAM holds a whole frame
);

  localparam int AW = $clog2(N);

  always_ff @(posedge clk) begin
    if (rst) begin
      addr   <= '0;
      sel    <= 1'b0;
      primed <= 1'b0;
    end else if (done) begin
      if (addr == AW'(N - 1)) begin
        addr   <= '0;
        sel    <= !sel;
        primed <= 1'b1;
      end else begin
        addr   <= addr + AW'(1);
      end
    end
  end

  assign sel_n = !sel;
  assign rw1   = sel;
  assign rw2   = !sel;
  assign wr_en = done;

endmodule
