// topk_tb_body.svh: the end-to-end test shared by the solver testbenches.
// Included after lanczos_tb_harness.svh and eig_ref.svh in a module that
// defines KM (K_MAX of the DUT), KK (k of the run), EV_TOL, and the DUT
// instance `dut`. It runs the solver once per re-orthogonalisation mode in
// MODES, and checks:
//   - the eigenvalues of the valid Jacobi slots against the eigenvalues of
//     the double-precision Lanczos T (EV_TOL),
//   - T v = lambda v for the eigenvectors read back (10 * EV_TOL),
//   - no breakdown, Jacobi converged, k valid slots,
//   - the mechanism counts: KK SpMV rounds of NC units, KK merge passes,
//     the number of re-orthogonalisation passes for the mode, one Jacobi
//     start per run, PLRAM writes 3KK-2,
//   - the total cycle count against a bound built from the pass costs.

  int n_cu_start, n_merge, n_rdot, n_jstart, n_plw, n_rot;
  always @(posedge clk) begin
    if (dut.u_lanczos.cu_start) n_cu_start++;
    if (dut.u_lanczos.mg_start) n_merge++;
    if (dut.u_lanczos.vu_start && dut.u_lanczos.vu_op == 2'd0 && dut.u_lanczos.vu_a != dut.u_lanczos.vu_b) n_rdot++;
    if (dut.jc_start) n_jstart++;
    if (dut.pl_wr_valid) n_plw++;
    if (dut.u_jacobi.rot) n_rot++;
  end

  task automatic rd_res(int a, output real v);
    @(negedge clk); res_rd_addr = RA'(a); @(posedge clk); #1 v = real'(res_rd_data) / 1073741824.0;
  endtask

  task automatic run_solver(logic [1:0] mode);
    real ra [], rb [], ev [], hw [], lam [], T [][], V [][];
    int cyc = 0, exp_rdot = 0, nvalid = 0, vi = 0;
    int pass_cost = N + LAT + 8;
    n_cu_start = 0; n_merge = 0; n_rdot = 0; n_jstart = 0; n_plw = 0; n_rot = 0;
    reorth = mode;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(posedge clk); cyc++; end
    $display("mode %0d: %0d cycles, jacobi steps %0d, cu starts %0d, merges %0d, reorth dots %0d, plram writes %0d",
             mode, cyc, jacobi_steps, n_cu_start, n_merge, n_rdot, n_plw);
    for (int i = 1; i <= KK; i++) if (mode == 2'd1 || (mode == 2'd2 && i % 2 == 0)) exp_rdot += i;
    checks++; if (n_cu_start != KK) failures++;
    checks++; if (n_merge != KK) failures++;
    checks++; if (n_rdot != exp_rdot) begin failures++; $display("reorth dots %0d, want %0d", n_rdot, exp_rdot); end
    checks++; if (n_jstart != 1) failures++;
    checks++; if (n_plw != 3*KK - 2) failures++;
    checks++; if (n_rot != int'(jacobi_steps)) failures++;
    checks++; if (beta_zero) failures++;
    checks++; if (!converged) failures++;
    // Lanczos: per iteration 4 passes + the SpMV (+ 2 per re-orth), Jacobi: 82 per step
    checks++;
    if (cyc > KK * (4 * pass_cost + 4 * pass_cost) + 2 * exp_rdot * pass_cost + int'(jacobi_steps) * 82 + 400) begin
      failures++; $display("too slow: %0d cycles", cyc);
    end
    // reference: T from the double-precision Lanczos, then its eigenvalues
    ref_lanczos(KK, ra, rb);
    T = new[KK];
    for (int i = 0; i < KK; i++) begin
      T[i] = new[KK];
      for (int j = 0; j < KK; j++) T[i][j] = (i == j) ? ra[i] : (j == i + 1) ? rb[i] : (i == j + 1) ? rb[j] : 0.0;
    end
    ref_eig(KK, T, ev);
    V = new[KM];
    for (int s = 0; s < KM; s++) begin
      real v;
      V[s] = new[KM];
      rd_res(s, v);
      if (eig_valid[s]) begin
        hw = new[hw.size() + 1](hw); hw[hw.size() - 1] = v;
        lam = new[lam.size() + 1](lam); lam[lam.size() - 1] = v;
        nvalid++;
      end
      for (int r = 0; r < KM; r++) rd_res(KM + r*KM + s, V[s][r]);
    end
    checks++; if (nvalid != KK) failures++;
    hw.sort();
    for (int i = 0; i < KK && i < hw.size(); i++) begin
      checks++;
      if (abs_r(hw[i] - ev[i]) > EV_TOL) begin failures++; $display("eig %0d: %f vs %f", i, hw[i], ev[i]); end
    end
    for (int s = 0; s < KM; s++) if (eig_valid[s]) begin
      real err = 0;
      for (int r = 0; r < KK; r++) begin
        real tv = 0;
        for (int c = 0; c < KK; c++) tv += T[r][c] * V[s][c];
        if (abs_r(tv - lam[vi] * V[s][r]) > err) err = abs_r(tv - lam[vi] * V[s][r]);
      end
      checks++; if (err > 10 * EV_TOL) begin failures++; $display("slot %0d residual %g", s, err); end
      vi++;
    end
  endtask
