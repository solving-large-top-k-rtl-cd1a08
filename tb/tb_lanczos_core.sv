// tb_lanczos_core: the Lanczos half on a small random symmetric sparse
// matrix (n = 60, 5 partitions of 12 rows, Frobenius norm 1), K = 8, with
// re-orthogonalisation every iteration and, in a second run, every second
// iteration. A double-precision Lanczos with full re-orthogonalisation,
// written in the testbench from the quantised matrix, gives the reference
// alpha and beta; the PLRAM image must match within 1e-4 (Q1.31 rounding),
// and the Lanczos vectors left in DDR must be orthonormal within 1e-4.
module tb_lanczos_core;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NC = 5, NR = 5, N = 60, K = 8, LAT = 6;
  localparam int MB = 0, MSTR = 2048, VB = 16384, RSTR = 128, RB = 20480, RESSTR = 128;
  localparam int V1 = 0, VBASE = 256, WP = 128, HBM_DEPTH = 32768, DDR_DEPTH = 2048;

  `include "lanczos_tb_harness.svh"

  lanczos_core #(.NC(NC), .NR(NR), .K_MAX(K), .RD_LAT(LAT), .BURST(16)) dut (
    .clk, .rst_n, .start, .n(N), .k(8'(K)), .reorth, .parts, .v1_base(V1), .v_base(VBASE), .wp_base(WP),
    .done, .beta_zero,
    .cu_ar_valid, .cu_ar_ready, .cu_ar_addr, .cu_ar_len, .cu_r_valid, .cu_r_ready, .cu_r_data, .cu_r_last,
    .cu_vrd_req_valid, .cu_vrd_req_addr, .cu_vrd_rsp_valid, .cu_vrd_rsp_data,
    .cu_wr_valid, .cu_wr_ready, .cu_wr_addr, .cu_wr_data, .cu_wr_strb,
    .mg_rd_req_valid, .mg_rd_req_addr, .mg_rd_rsp_valid, .mg_rd_rsp_data,
    .rd0_req_valid, .rd0_req_addr, .rd0_rsp_data, .rd1_req_valid, .rd1_req_addr, .rd1_rsp_data,
    .wr0_valid, .wr0_addr, .wr0_data, .rep_valid, .rep_addr, .rep_data,
    .pl_wr_valid, .pl_wr_addr, .pl_wr_data);

  fx_t plram [3*K];
  always @(posedge clk) if (pl_wr_valid) plram[pl_wr_addr] <= pl_wr_data;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra [], rb [], d;
    int cyc [2];
    start = 0; reorth = 2'd1;
    build_problem();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      reorth = (run == 0) ? 2'd1 : 2'd2;
      @(posedge clk); start <= 1; @(posedge clk); start <= 0; @(posedge clk);
      cyc[run] = 0;
      while (!done) begin @(posedge clk); cyc[run]++; end
      @(posedge clk);
      $display("run %0d (reorth mode %0d): %0d cycles", run, reorth, cyc[run]);
      ref_lanczos(K, ra, rb);
      for (int i = 0; i < K; i++) begin
        checks++;
        if (abs_r(q2r(plram[i]) - ra[i]) > 1e-4) begin failures++; $display("alpha%0d %f vs %f", i+1, q2r(plram[i]), ra[i]); end
      end
      for (int i = 0; i < K - 1; i++) begin
        checks += 2;
        if (abs_r(q2r(plram[K + i]) - rb[i]) > 1e-4) begin failures++; $display("beta%0d %f vs %f", i+2, q2r(plram[K+i]), rb[i]); end
        if (plram[K + i] != plram[2*K - 1 + i]) failures++;
      end
      for (int a = 0; a < K; a++) for (int b = a; b < K; b++) begin
        d = 0;
        for (int x = 0; x < N; x++) d += q2r(ddr.m[VBASE + a*N + x]) * q2r(ddr.m[VBASE + b*N + x]);
        checks++;
        if (abs_r(d - (a == b ? 1.0 : 0.0)) > 1e-4) begin failures++; $display("V%0d.V%0d = %f", a, b, d); end
      end
      checks++; if (beta_zero) failures++;
    end
    // cycle budget: one pass costs about n + read latency + a few cycles;
    // mode 1 runs sum_i (4 + 2i) passes, mode 2 only half of the re-orth passes
    checks++; if (cyc[0] > 10000 || cyc[0] < 5000) begin failures++; $display("mode 1 cycles %0d", cyc[0]); end
    checks++; if (cyc[1] >= cyc[0]) begin failures++; $display("mode 2 not faster"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
