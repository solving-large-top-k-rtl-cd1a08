// tb_topk_eigensolver_full: the solver at its default parameters (5 compute
// units x 5 replicas, K_MAX = 24, read latency 8, bursts of 256 beats) on a
// random symmetric sparse 240 x 240 matrix of unit Frobenius norm, split
// into 5 partitions of 48 rows. One run with K = 24 and
// re-orthogonalisation in every iteration; the checks are those of
// topk_tb_body (eigenvalues of the 24 x 24 T against a double-precision
// Lanczos + Jacobi within 1e-3, residuals, mechanism counts, cycle bound).
module tb_topk_eigensolver_full;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NC = 5, NR = 5, N = 240, LAT = 8, KM = 24, KK = 24;
  localparam real EV_TOL = 1e-3;
  localparam int MB = 0, MSTR = 2048, VB = 12288, RSTR = 256, RB = 20480, RESSTR = 256;
  localparam int V1 = 0, VBASE = 512, WP = 256, HBM_DEPTH = 32768, DDR_DEPTH = 8192;
  localparam int RA = $clog2(KM + KM*KM);

  `include "lanczos_tb_harness.svh"
  `include "eig_ref.svh"

  logic converged;
  logic [15:0] jacobi_steps;
  logic [KM-1:0] eig_valid;
  logic [RA-1:0] res_rd_addr;
  fx_t res_rd_data;

  topk_eigensolver dut (
    .clk, .rst_n, .start, .n(N), .k(8'(KK)), .reorth, .parts, .v1_base(V1), .v_base(VBASE), .wp_base(WP),
    .done, .beta_zero, .converged, .jacobi_steps, .eig_valid, .res_rd_addr, .res_rd_data,
    .cu_ar_valid, .cu_ar_ready, .cu_ar_addr, .cu_ar_len, .cu_r_valid, .cu_r_ready, .cu_r_data, .cu_r_last,
    .cu_vrd_req_valid, .cu_vrd_req_addr, .cu_vrd_rsp_valid, .cu_vrd_rsp_data,
    .cu_wr_valid, .cu_wr_ready, .cu_wr_addr, .cu_wr_data, .cu_wr_strb,
    .mg_rd_req_valid, .mg_rd_req_addr, .mg_rd_rsp_valid, .mg_rd_rsp_data,
    .rd0_req_valid, .rd0_req_addr, .rd0_rsp_data, .rd1_req_valid, .rd1_req_addr, .rd1_rsp_data,
    .wr0_valid, .wr0_addr, .wr0_data, .rep_valid, .rep_addr, .rep_data);
  assign pl_wr_valid = 1'b0;
  assign pl_wr_addr  = '0;
  assign pl_wr_data  = '0;

  `include "topk_tb_body.svh"

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; reorth = 2'd1; res_rd_addr = '0;
    build_problem();
    repeat (3) @(posedge clk); rst_n = 1;
    run_solver(2'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
