// eig_ref.svh: double-precision reference for the testbenches. ref_eig
// returns the eigenvalues of a small symmetric matrix (cyclic Jacobi,
// sweeps until the off-diagonal norm is below 1e-14), sorted ascending.
  task automatic ref_eig(int nn, real a_in [][], output real ev []);
    real a [][];
    a = new[nn];
    for (int i = 0; i < nn; i++) begin a[i] = new[nn]; for (int j = 0; j < nn; j++) a[i][j] = a_in[i][j]; end
    for (int sweep = 0; sweep < 60; sweep++) begin
      real off = 0;
      for (int i = 0; i < nn; i++) for (int j = 0; j < nn; j++) if (i != j) off += a[i][j] * a[i][j];
      if (off < 1e-28) break;
      for (int p = 0; p < nn - 1; p++) for (int q = p + 1; q < nn; q++) if (a[p][q] != 0) begin
        real th, c, s, app, aqq, apq;
        th = 0.5 * $atan2(2.0 * a[p][q], a[q][q] - a[p][p]);
        c = $cos(th); s = $sin(th);
        for (int r = 0; r < nn; r++) begin
          real arp = a[r][p], arq = a[r][q];
          a[r][p] = c * arp - s * arq; a[r][q] = s * arp + c * arq;
        end
        for (int r = 0; r < nn; r++) begin
          real apr = a[p][r], aqr = a[q][r];
          a[p][r] = c * apr - s * aqr; a[q][r] = s * apr + c * aqr;
        end
      end
    end
    ev = new[nn];
    for (int i = 0; i < nn; i++) ev[i] = a[i][i];
    ev.sort();
  endtask
