// jacobi_eigvec_pe: an eigenvector processing element v_ij of the Jacobi
// systolic array.
//
// Holds one 2x2 block of the eigenvector matrix V (rows 2i, 2i+1, columns
// 2j, 2j+1). On `rot` it applies the column rotation of diagonal PE p_jj:
//   V <- V R_j^T,  R = [c s; -s c].
// On `ld` it takes a new block (identity at start, or the column
// interchange routed by the core). One clock cycle each; `ld` wins.
// Numbers are Q2.30.
//
// From the paper: eigenvector PEs apply the same rotations to a matrix
// that starts as the identity, in parallel with the off-diagonal PEs
// (Fig. 6 c, Alg. 2 lines 14-19). Own choice: Q2.30 numbers.
module jacobi_eigvec_pe
  import eig_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic ld,
  input  blk_t ld_blk,
  input  logic rot,
  input  fx_t  cj,
  input  fx_t  sj,
  output blk_t blk
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   blk <= '0;
    else if (ld)  blk <= ld_blk;
    else if (rot) blk <= rot_right(blk, cj, sj);
  end
endmodule
