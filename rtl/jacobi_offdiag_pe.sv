// jacobi_offdiag_pe: an off-diagonal processing element p_ij (i != j) of
// the Jacobi systolic array.
//
// Holds one 2x2 block [alpha beta; gamma delta] of the matrix being
// diagonalised. On `rot` it applies the rotations of its row pair (ci, si,
// from diagonal PE p_ii) and its column pair (cj, sj, from p_jj):
//   B <- R_i B R_j^T,  R = [c s; -s c].
// On `ld` it takes a new block (initial load or the row/column interchange
// routed by the core). Both take one clock cycle; `ld` wins over `rot`.
// Numbers are Q2.30.
//
// From the paper: off-diagonal PEs receive c_i, s_i, c_j, s_j from the
// diagonal PEs and rotate their four values in constant time, fully
// unrolled (Fig. 6 b, Alg. 2 line 13). Own choice: Q2.30 numbers.
module jacobi_offdiag_pe
  import eig_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic ld,
  input  blk_t ld_blk,
  input  logic rot,
  input  fx_t  ci,
  input  fx_t  si,
  input  fx_t  cj,
  input  fx_t  sj,
  output blk_t blk
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   blk <= '0;
    else if (ld)  blk <= ld_blk;
    else if (rot) blk <= rot_right(rot_left(blk, ci, si), cj, sj);
  end
endmodule
