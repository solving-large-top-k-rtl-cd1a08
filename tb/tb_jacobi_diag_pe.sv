// tb_jacobi_diag_pe: the diagonal PE on 400 random symmetric 2x2 blocks
// (values in (-1, 1) as Q2.30) plus corner cases (beta = 0, alpha = delta,
// |2 beta| = |alpha - delta|). For each block: the start-to-done latency is
// the fixed LAT cycles, c and s match cos/sin of 1/2 atan(2b/(a-d)) within
// 2e-6, c^2 + s^2 = 1 within 4e-6, and after `rot` the off-diagonal values
// are below 4e-6 while the trace is kept within 1e-6.
module tb_jacobi_diag_pe;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int LAT = 79;

  logic ld, start, done, rot;
  blk_t ld_blk, blk;
  fx_t c, s;
  jacobi_diag_pe dut (.clk, .rst_n, .ld, .ld_blk, .start, .done, .rot, .c, .s, .blk);

  function automatic real q30(fx_t x); return real'(x) / 1073741824.0; endfunction
  function automatic fx_t r30(real x); return fx_t'($rtoi(x * 1073741824.0)); endfunction
  function automatic real abs_r(real x); return x < 0 ? -x : x; endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld = 0; start = 0; rot = 0; ld_blk = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 404; t++) begin
      automatic real a, b, d, th, tr;
      automatic int lat = 0;
      a = (real'($urandom % 2000) - 1000.0) / 1001.0;
      b = (real'($urandom % 2000) - 1000.0) / 1001.0;
      d = (real'($urandom % 2000) - 1000.0) / 1001.0;
      if (t == 400) b = 0;
      if (t == 401) d = a;
      if (t == 402) begin a = 0.5; d = -0.1; b = 0.3; end
      if (t == 403) begin a = 0.5; d = -0.1; b = -0.3; end
      @(negedge clk); ld = 1; ld_blk = '{alpha: r30(a), beta: r30(b), gamma: r30(b), delta: r30(d)};
      @(negedge clk); ld = 0; start = 1;
      @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      a = q30(ld_blk.alpha); b = q30(ld_blk.beta); d = q30(ld_blk.delta);
      th = (b == 0) ? 0.0 : 0.5 * $atan(2.0 * b / (a - d));
      if (a == d && b != 0) th = (b > 0) ? 0.7853981634 : -0.7853981634;
      checks++; if (lat != LAT) begin failures++; $display("latency %0d", lat); end
      checks++; if (abs_r(q30(c) - $cos(th)) > 2e-6 || abs_r(q30(s) - $sin(th)) > 2e-6) begin
        failures++; $display("t%0d a=%f b=%f d=%f: c=%f s=%f want %f %f sw%0d red%0d t0=%f u=%f th=%f", t, a, b, d, q30(c), q30(s), $cos(th), $sin(th), dut.swap, dut.red, q30(dut.t0), q30(dut.u), q30(dut.th)); end
      checks++; if (abs_r(q30(c)*q30(c) + q30(s)*q30(s) - 1.0) > 4e-6) failures++;
      rot = 1; @(negedge clk); rot = 0;
      checks++; if (abs_r(q30(blk.beta)) > 4e-6 || abs_r(q30(blk.gamma)) > 4e-6) begin failures++; $display("t%0d off %g %g", t, q30(blk.beta), q30(blk.gamma)); end
      checks++; if (abs_r(q30(blk.alpha) + q30(blk.delta) - a - d) > 1e-6) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
