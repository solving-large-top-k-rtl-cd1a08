// tb_lanczos_vector_unit: runs each pass type of the Lanczos vector
// datapath on random vectors held in a memory model and compares against
// values computed in the testbench:
//   DOT (including a norm, a.a), SCALE by 1/beta (checked against the
//   written vector and all four replicas, and the saturation at +-1),
//   PAIGE (u = w - beta*a from a stream with random gaps, alpha = u.b) and
//   in-place AXPY. It also checks that a pass over n elements ends within
//   n + RD_LAT + 3 cycles (one element per cycle).
module tb_lanczos_vector_unit;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 37, LAT = 5, NR = 4;
  localparam int A = 100, B = 200, D = 300, R0 = 1000;

  logic start, done; logic [1:0] op; logic [31:0] n; addr_t a_base, b_base, d_base; fx_t s;
  logic signed [63:0] scale, acc;
  addr_t [NR-1:0] rep_base;
  logic w_valid, w_ready; fx_t w_data;
  logic rd0_req_valid, rd1_req_valid, wr0_valid; addr_t rd0_req_addr, rd1_req_addr, wr0_addr;
  fx_t rd0_rsp_data, rd1_rsp_data, wr0_data;
  logic [NR-1:0] rep_valid; addr_t [NR-1:0] rep_addr; fx_t rep_data;

  lanczos_vector_unit #(.NREPW(NR), .RD_LAT(LAT)) dut (.*);

  logic [NR:0] wv; logic [NR:0][31:0] wa; logic [NR:0][511:0] wd; logic [NR:0][15:0] ws;
  always_comb begin
    wv[0] = wr0_valid; wa[0] = wr0_addr; wd[0] = 512'(wr0_data); ws[0] = 16'h1;
    for (int r = 0; r < NR; r++) begin wv[r+1] = rep_valid[r]; wa[r+1] = rep_addr[r]; wd[r+1] = 512'(rep_data); ws[r+1] = 16'h1; end
  end
  logic [1:0] rv; logic [1:0][31:0] rd;
  mem_model #(.DEPTH(2048), .NRD(2), .NWR(NR+1), .NBR(1), .RD_LAT(LAT)) mem (
    .clk, .rd_req_valid({rd1_req_valid, rd0_req_valid}), .rd_req_addr({rd1_req_addr, rd0_req_addr}),
    .rd_rsp_valid(rv), .rd_rsp_data(rd), .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_strb(ws),
    .ar_valid('0), .ar_ready(), .ar_addr('0), .ar_len('0), .r_valid(), .r_ready('0), .r_data(), .r_last());
  assign rd0_rsp_data = rd[0];
  assign rd1_rsp_data = rd[1];

  fx_t va [N], vb [N], vw [N];
  int wi, cyc, t0;
  logic gaps;
  always @(posedge clk) cyc <= cyc + 1;
  // stream source for PAIGE
  always @(posedge clk) begin
    if (w_valid && w_ready) wi <= wi + 1;
  end
  always_comb begin
    w_valid = (wi < N) && (!gaps || (cyc % 3 != 0));
    w_data  = vw[wi < N ? wi : 0];
  end

  function automatic fx_t q31(fx_t x, fx_t y); return fx_t'((longint'(x) * longint'(y)) >>> 31); endfunction

  task automatic pass(logic [1:0] o, addr_t pa, addr_t pb, addr_t pd, fx_t ps, longint psc);
    @(posedge clk);
    op <= o; a_base <= pa; b_base <= pb; d_base <= pd; s <= ps; scale <= psc; start <= 1; t0 = cyc;
    @(posedge clk); start <= 0;
    @(posedge clk); wait (done); @(posedge clk);
    if (o != 2) begin checks++; if (cyc - t0 > N + LAT + 4) begin failures++; $display("pass %0d took %0d", o, cyc - t0); end end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    cyc = 0; wi = N; gaps = 1; start = 0; n = N; op = 0; s = 0; scale = 0; a_base = 0; b_base = 0; d_base = 0;
    for (int r = 0; r < NR; r++) rep_base[r] = R0 + r * 64;
    for (int i = 0; i < N; i++) begin
      va[i] = fx_t'($signed($urandom) >>> 3); vb[i] = fx_t'($signed($urandom) >>> 3); vw[i] = fx_t'($signed($urandom) >>> 2);
      mem.m[A + i] = va[i]; mem.m[B + i] = vb[i];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // DOT and norm
    pass(0, A, B, D, 0, 0);
    e = 0; for (int i = 0; i < N; i++) e += q31(va[i], vb[i]);
    checks++; if (acc != e) begin failures++; $display("dot %0d vs %0d", acc, e); end
    pass(0, A, A, D, 0, 0);
    e = 0; for (int i = 0; i < N; i++) e += q31(va[i], va[i]);
    checks++; if (acc != e) failures++;
    // SCALE by 3.0 (Q32.31): saturates large entries
    pass(1, A, B, D, 0, 64'sd3 <<< 31);
    for (int i = 0; i < N; i++) begin
      automatic longint x = (longint'(va[i]) * 3);
      automatic fx_t ex = (x > 64'sh7FFF_FFFF) ? 32'sh7FFF_FFFF : (x < -64'sh7FFF_FFFF) ? -32'sh7FFF_FFFF : fx_t'(x);
      checks++; if (mem.m[D + i] != ex) begin failures++; $display("scale %0d", i); end
      for (int r = 0; r < NR; r++) begin checks++; if (mem.m[R0 + r*64 + i] != ex) failures++; end
    end
    // PAIGE from the stream: d = w - s*a, acc = d.b
    wi = 0;
    pass(2, A, B, D, 32'sh2000_0000, 0);
    e = 0;
    for (int i = 0; i < N; i++) begin
      automatic fx_t u = vw[i] - q31(32'sh2000_0000, va[i]);
      checks++; if (mem.m[D + i] != u) failures++;
      e += q31(u, vb[i]);
    end
    checks++; if (acc != e) failures++;
    // AXPY in place: D = D - s*B
    for (int i = 0; i < N; i++) va[i] = mem.m[D + i];
    pass(3, D, B, D, -32'sh3000_0000, 0);
    for (int i = 0; i < N; i++) begin checks++; if (mem.m[D + i] != va[i] - q31(-32'sh3000_0000, vb[i])) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
