// tb_jacobi_eigvec_pe: 500 random 2x2 blocks and random column rotations.
// After `rot` the block must equal V R_j^T computed in double precision
// within 4e-9 (Q2.30 truncation); `ld` must win over `rot`; the block must
// change exactly one cycle after the pulse and hold otherwise.
module tb_jacobi_eigvec_pe;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld, rot; blk_t ld_blk, blk, prev_blk; fx_t ci, si, cj, sj;
  jacobi_eigvec_pe dut (.clk, .rst_n, .ld, .ld_blk, .rot, .cj, .sj, .blk);

  function automatic real q(fx_t x); return real'(x) / 1073741824.0; endfunction
  function automatic fx_t r(real x); return fx_t'($rtoi(x * 1073741824.0)); endfunction
  function automatic real abs_r(real x); return x < 0 ? -x : x; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    ld = 0; rot = 0; ld_blk = '0; ci = 0; si = 0; cj = 0; sj = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      automatic real a = (real'($urandom % 2000) - 1000.0) / 1001.0, b = (real'($urandom % 2000) - 1000.0) / 1001.0;
      automatic real g = (real'($urandom % 2000) - 1000.0) / 1001.0, d = (real'($urandom % 2000) - 1000.0) / 1001.0;
      automatic real t1 = real'($urandom % 1000) / 1000.0 * 1.5 - 0.75, t2 = real'($urandom % 1000) / 1000.0 * 1.5 - 0.75;
      automatic real c1, s1, c2, s2, e [4];

      @(negedge clk); ld = 1; ld_blk = '{alpha: r(a), beta: r(b), gamma: r(g), delta: r(d)};
      @(negedge clk); ld = 0;
      prev_blk = blk;
      checks++; if (blk != ld_blk) failures++;
      ci = r($cos(t1)); si = r($sin(t1)); cj = r($cos(t2)); sj = r($sin(t2));
      a = q(blk.alpha); b = q(blk.beta); g = q(blk.gamma); d = q(blk.delta);
      c1 = q(ci); s1 = q(si); c2 = q(cj); s2 = q(sj);
      // V
      e[0] = a; e[1] = b; e[2] = g; e[3] = d;   // no row rotation
      // V R_j^T
      a = e[0]*c2 + e[1]*s2; b = e[1]*c2 - e[0]*s2; g = e[2]*c2 + e[3]*s2; d = e[3]*c2 - e[2]*s2;
      @(negedge clk);
      checks++; if (blk != prev_blk) failures++;   // holds without a pulse
      rot = 1; @(negedge clk); rot = 0;
      checks++;
      if (abs_r(q(blk.alpha) - a) > 4e-9 || abs_r(q(blk.beta) - b) > 4e-9 ||
          abs_r(q(blk.gamma) - g) > 4e-9 || abs_r(q(blk.delta) - d) > 4e-9) begin
        failures++; $display("t%0d: %f %f %f %f vs %f %f %f %f", t, q(blk.alpha), q(blk.beta), q(blk.gamma), q(blk.delta), a, b, g, d);
      end
      // ld wins over rot
      @(negedge clk); ld = 1; rot = 1; ld_blk = prev_blk; @(negedge clk); ld = 0; rot = 0;
      checks++; if (blk != prev_blk) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
