// topk_eigensolver: the complete Top-K sparse eigensolver.
//
// Lanczos core (SpMV compute units, merge unit, vector operations) ->
// PLRAM buffer -> Jacobi systolic array. A pulse on `start` runs K Lanczos
// iterations on the matrix described by `parts` (one COO partition per
// compute unit, already placed in HBM together with the dense-vector
// replica and result regions) starting from the vector v1 in DDR. When the
// Lanczos core has written T (3K-2 values) into the PLRAM, the Jacobi core
// is started on it without host involvement. `done` rises when the Jacobi
// core has finished and stays until the next start.
//
// Results: the K Lanczos vectors stay in DDR (V[i] at v_base + (i-1)*n,
// Q1.31); eigenvalues of T and its eigenvectors are read through
// res_rd_addr/res_rd_data (see jacobi_core, Q2.30). The eigenvectors of M
// are the Lanczos vectors times those of T, which the host forms from the
// two outputs. `beta_zero` flags a Lanczos breakdown, `converged` and
// `jacobi_steps` report the Jacobi run.
//
// Memory ports: per compute unit one burst read port (matrix), ENTRIES word
// read ports (vector replicas) and one 512-bit write port (results); one
// word read port for the merge unit; the NCU*NREP replica write ports (one
// shared data word); two word read ports and one word write port on DDR.
//
// From the paper: the split Lanczos core (SLR0, HBM + DDR) / PLRAM / Jacobi
// core (SLR1/2), K up to 24 at default, 5 CUs with 5 replicas each, no host
// work between iterations. Own choices: port shapes, fixed-point formats.
module topk_eigensolver
  import eig_pkg::*;
#(
  parameter int unsigned NC        = NCU,
  parameter int unsigned NR        = NREP,
  parameter int unsigned K_MAX     = 24,
  parameter int unsigned RD_LAT    = 8,
  parameter int unsigned BURST     = BURST_LEN,
  parameter int unsigned MAX_STEPS = 12 * (K_MAX - 1),
  parameter int unsigned TOL       = 256,
  parameter int unsigned RA_W      = $clog2(K_MAX + K_MAX * K_MAX)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [WORD_W-1:0]            n,
  input  logic [7:0]                   k,
  input  logic [1:0]                   reorth,
  input  part_t [NC-1:0]               parts,
  input  addr_t                        v1_base,
  input  addr_t                        v_base,
  input  addr_t                        wp_base,
  output logic                         done,
  output logic                         beta_zero,
  output logic                         converged,
  output logic [15:0]                  jacobi_steps,
  output logic [K_MAX-1:0]             eig_valid,
  input  logic [RA_W-1:0]              res_rd_addr,
  output fx_t                          res_rd_data,
  // SpMV CU memory ports
  output logic  [NC-1:0]               cu_ar_valid,
  input  logic  [NC-1:0]               cu_ar_ready,
  output addr_t [NC-1:0]               cu_ar_addr,
  output logic  [NC-1:0][8:0]          cu_ar_len,
  input  logic  [NC-1:0]               cu_r_valid,
  output logic  [NC-1:0]               cu_r_ready,
  input  beat_t [NC-1:0]               cu_r_data,
  input  logic  [NC-1:0]               cu_r_last,
  output logic  [NC-1:0][ENTRIES-1:0]  cu_vrd_req_valid,
  output addr_t [NC-1:0][ENTRIES-1:0]  cu_vrd_req_addr,
  input  logic  [NC-1:0][ENTRIES-1:0]  cu_vrd_rsp_valid,
  input  fx_t   [NC-1:0][ENTRIES-1:0]  cu_vrd_rsp_data,
  output logic  [NC-1:0]               cu_wr_valid,
  input  logic  [NC-1:0]               cu_wr_ready,
  output addr_t [NC-1:0]               cu_wr_addr,
  output beat_t [NC-1:0]               cu_wr_data,
  output logic  [NC-1:0][BEAT_WORDS-1:0] cu_wr_strb,
  // merge unit read port (HBM)
  output logic                         mg_rd_req_valid,
  output addr_t                        mg_rd_req_addr,
  input  logic                         mg_rd_rsp_valid,
  input  fx_t                          mg_rd_rsp_data,
  // DDR ports
  output logic                         rd0_req_valid,
  output addr_t                        rd0_req_addr,
  input  fx_t                          rd0_rsp_data,
  output logic                         rd1_req_valid,
  output addr_t                        rd1_req_addr,
  input  fx_t                          rd1_rsp_data,
  output logic                         wr0_valid,
  output addr_t                        wr0_addr,
  output fx_t                          wr0_data,
  // replica writes (HBM)
  output logic  [NC*NR-1:0]            rep_valid,
  output addr_t [NC*NR-1:0]            rep_addr,
  output fx_t                          rep_data
);
  logic       lz_done, lz_done_q, jc_start, jc_done;
  logic       pl_wr_valid;
  logic [7:0] pl_wr_addr, pl_rd_addr;
  fx_t        pl_wr_data, pl_rd_data;
  logic       running;

  lanczos_core #(.NC(NC), .NR(NR), .K_MAX(K_MAX), .RD_LAT(RD_LAT), .BURST(BURST)) u_lanczos (
    .clk, .rst_n, .start, .n, .k, .reorth, .parts, .v1_base, .v_base, .wp_base,
    .done(lz_done), .beta_zero,
    .cu_ar_valid, .cu_ar_ready, .cu_ar_addr, .cu_ar_len, .cu_r_valid, .cu_r_ready, .cu_r_data, .cu_r_last,
    .cu_vrd_req_valid, .cu_vrd_req_addr, .cu_vrd_rsp_valid, .cu_vrd_rsp_data,
    .cu_wr_valid, .cu_wr_ready, .cu_wr_addr, .cu_wr_data, .cu_wr_strb,
    .mg_rd_req_valid, .mg_rd_req_addr, .mg_rd_rsp_valid, .mg_rd_rsp_data,
    .rd0_req_valid, .rd0_req_addr, .rd0_rsp_data, .rd1_req_valid, .rd1_req_addr, .rd1_rsp_data,
    .wr0_valid, .wr0_addr, .wr0_data, .rep_valid, .rep_addr, .rep_data,
    .pl_wr_valid, .pl_wr_addr, .pl_wr_data);

  plram_buffer #(.DEPTH(3 * K_MAX - 2)) u_plram (
    .clk, .wr_valid(pl_wr_valid), .wr_addr(pl_wr_addr), .wr_data(pl_wr_data),
    .rd_addr(pl_rd_addr), .rd_data(pl_rd_data));

  jacobi_core #(.K_MAX(K_MAX), .MAX_STEPS(MAX_STEPS), .TOL(TOL)) u_jacobi (
    .clk, .rst_n, .start(jc_start), .k, .pl_rd_addr, .pl_rd_data, .done(jc_done), .converged,
    .steps(jacobi_steps), .eig_valid, .res_rd_addr, .res_rd_data);

  // hand-over: start the Jacobi core on the rising edge of the Lanczos done
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin lz_done_q <= 1'b0; jc_start <= 1'b0; running <= 1'b0; end
    else begin
      lz_done_q <= lz_done;
      jc_start  <= running && lz_done && !lz_done_q;
      if (start)         running <= 1'b1;
      else if (jc_start) running <= 1'b0;
    end
  end
  assign done = jc_done && !running && !jc_start;
endmodule
