// tb_jacobi_core: the Jacobi systolic array on random symmetric tridiagonal
// matrices, with K_MAX = 8 (16 PEs + 16 eigenvector PEs). The PLRAM is a
// testbench array with a one-cycle read. Run 1 uses k = 8, run 2 k = 6
// (padding rows), run 3 a diagonal matrix (no rotation needed). Checks:
// convergence, sorted eigenvalues against a double-precision Jacobi
// (1e-5), T v = lambda v for every valid slot (2e-5), V orthonormal
// (2e-5), the valid mask, and the cycle count of each run against the
// fixed step cost (load + steps * (diagonal latency + 3)).
module tb_jacobi_core;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int KM = 8;
  localparam int RA = $clog2(KM + KM*KM);
  localparam int DIAG_LAT = 79;   // start to done of a diagonal PE

  logic start, done, converged;
  logic [7:0] k, pl_rd_addr;
  fx_t pl_rd_data, res_rd_data;
  logic [15:0] steps;
  logic [KM-1:0] eig_valid;
  logic [RA-1:0] res_rd_addr;
  fx_t plram [3*KM];

  jacobi_core #(.K_MAX(KM)) dut (
    .clk, .rst_n, .start, .k, .pl_rd_addr, .pl_rd_data, .done, .converged, .steps, .eig_valid,
    .res_rd_addr, .res_rd_data);
  always @(posedge clk) pl_rd_data <= plram[pl_rd_addr];

  `include "eig_ref.svh"
  function automatic real q31(fx_t x); return real'(x) / 2147483648.0; endfunction
  function automatic real q30(fx_t x); return real'(x) / 1073741824.0; endfunction
  function automatic real abs_r(real x); return x < 0 ? -x : x; endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int a, output real v);
    @(negedge clk); res_rd_addr = RA'(a); @(posedge clk); #1 v = q30(res_rd_data);
  endtask

  initial begin
    start = 0; k = 8; res_rd_addr = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      automatic int kk = (run == 1) ? 6 : 8;
      automatic real T [][];
      automatic real ev [], hw [], lam [], V [][];
      automatic int cyc = 0, nvalid = 0;
      T = new[kk];
      for (int i = 0; i < kk; i++) begin T[i] = new[kk]; for (int j = 0; j < kk; j++) T[i][j] = 0; end
      for (int i = 0; i < 3*KM; i++) plram[i] = '0;
      for (int i = 0; i < kk; i++) begin
        plram[i] = fx_t'($urandom % 32'h6000_0000) - 32'sh3000_0000;
        T[i][i] = q31(plram[i] >>> 1) * 2.0;
      end
      for (int i = 0; i < kk - 1; i++) begin
        automatic fx_t b = (run == 2) ? '0 : fx_t'($urandom % 32'h4000_0000);
        plram[kk + i] = b; plram[2*kk - 1 + i] = b;
        T[i][i+1] = q31(b >>> 1) * 2.0; T[i+1][i] = T[i][i+1];
      end
      ref_eig(kk, T, ev);
      k = 8'(kk);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin @(posedge clk); cyc++; end
      $display("run %0d: k=%0d steps=%0d cycles=%0d converged=%0d", run, kk, steps, cyc, converged);
      checks++; if (!converged) failures++;
      // fixed cost per step: CHECK + diagonal latency + ROT + PERM
      checks++;
      if (cyc < (3*kk - 2) + int'(steps) * (DIAG_LAT + 3) || cyc > (3*kk - 2) + int'(steps) * (DIAG_LAT + 3) + 8) begin
        failures++; $display("cycle count %0d for %0d steps", cyc, steps);
      end
      if (run == 2) begin checks++; if (steps != 0) failures++; end
      else          begin checks++; if (steps == 0) failures++; end
      for (int s = 0; s < KM; s++) nvalid += eig_valid[s];
      checks++; if (nvalid != kk) begin failures++; $display("valid mask %b", eig_valid); end
      // read eigenvalues and vectors of the valid slots
      V = new[KM];
      for (int s = 0; s < KM; s++) begin
        real v;
        V[s] = new[KM];
        rd(s, v);
        if (eig_valid[s]) begin hw = new[hw.size() + 1](hw); hw[hw.size() - 1] = v; lam = new[lam.size() + 1](lam); lam[lam.size() - 1] = v; end
        for (int r = 0; r < KM; r++) rd(KM + r*KM + s, V[s][r]);
      end
      hw.sort();
      for (int i = 0; i < kk; i++) begin
        checks++;
        if (abs_r(hw[i] - ev[i]) > 1e-5) begin failures++; $display("eig %0d: %f vs %f", i, hw[i], ev[i]); end
      end
      begin
        automatic int vi = 0;
        for (int s = 0; s < KM; s++) if (eig_valid[s]) begin
          automatic real err = 0;
          for (int r = 0; r < kk; r++) begin
            automatic real tv = 0;
            for (int c = 0; c < kk; c++) tv += T[r][c] * V[s][c];
            if (abs_r(tv - lam[vi] * V[s][r]) > err) err = abs_r(tv - lam[vi] * V[s][r]);
          end
          for (int r = kk; r < KM; r++) if (abs_r(V[s][r]) > err) err = abs_r(V[s][r]);
          checks++; if (err > 2e-5) begin failures++; $display("slot %0d residual %g", s, err); end
          vi++;
        end
      end
      for (int a = 0; a < KM; a++) for (int b = a; b < KM; b++) begin
        automatic real d = 0;
        for (int r = 0; r < KM; r++) d += V[a][r] * V[b][r];
        checks++; if (abs_r(d - (a == b ? 1.0 : 0.0)) > 2e-5) begin failures++; $display("V%0d.V%0d = %f", a, b, d); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
