// plram_buffer: the small on-chip RAM that carries the tridiagonal matrix T
// from the Lanczos core to the Jacobi core.
//
// One write port (Lanczos side) and one read port (Jacobi side) with a
// registered read: data for rd_addr appears on rd_data one cycle after the
// address. DEPTH words of 32 bits; the default 3*24-2 = 70 words hold T for
// the largest K of 24 (alpha at 0..K-1, upper beta at K..2K-2, lower beta at
// 2K-1..3K-3). A write and a read of the same word in one cycle returns the
// old value.
//
// From the paper: "The Lanczos Core ... transfers only the 3K - 2 values of
// T to the Jacobi cores ... through PLRAM". Own choices: port widths, read
// timing, the layout.
module plram_buffer
  import eig_pkg::*;
#(
  parameter int unsigned DEPTH = 3 * 24 - 2
) (
  input  logic       clk,
  input  logic       wr_valid,
  input  logic [7:0] wr_addr,
  input  fx_t        wr_data,
  input  logic [7:0] rd_addr,
  output fx_t        rd_data
);
  fx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_valid && 32'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end
endmodule
