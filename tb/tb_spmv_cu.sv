// tb_spmv_cu: one compute unit end to end on a random sparse partition.
// The testbench builds rows [RS, RE) of a random matrix (0 to 6 non-zeros per
// row, some rows empty, sorted by row), stores it as COO beats, writes five
// identical replicas of a random vector, runs the CU and compares every
// result row with y = M*v computed in the testbench from the same Q1.31
// rules (product truncated, sums modulo 2^32). The run is repeated a second
// time, as the next Lanczos iteration would, with a new vector. It also
// checks that the run takes no more than the number of beats plus a fixed
// pipeline overhead (one beat per cycle).
module tb_spmv_cu;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N = 160, RS = 23, RE = 141, MB = 0, VB = 8192, STR = 256, RB = 12000, LAT = 8;
  logic start, done;
  part_t part;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last, wr_valid, wr_ready;
  addr_t ar_addr; logic [8:0] ar_len; beat_t r_data;
  logic [ENTRIES-1:0] vrd_req_valid, vrd_rsp_valid; addr_t [ENTRIES-1:0] vrd_req_addr; fx_t [ENTRIES-1:0] vrd_rsp_data;
  addr_t wr_addr; beat_t wr_data; logic [BEAT_WORDS-1:0] wr_strb;

  spmv_cu #(.RD_LAT(LAT), .BURST(16)) dut (.*);
  mem_model #(.DEPTH(16384), .NRD(ENTRIES), .NWR(1), .NBR(1), .RD_LAT(LAT)) mem (
    .clk, .rd_req_valid(vrd_req_valid), .rd_req_addr(vrd_req_addr), .rd_rsp_valid(vrd_rsp_valid), .rd_rsp_data(vrd_rsp_data),
    .wr_valid(wr_valid && wr_ready), .wr_addr, .wr_data, .wr_strb,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last);
  assign wr_ready = 1'b1;

  int xs[$], ys[$]; fx_t vs[$];
  fx_t v [N];
  int cyc, t0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(int it);
    longint y [N];
    for (int j = 0; j < N; j++) begin
      v[j] = fx_t'($signed($urandom) >>> 3);
      for (int r = 0; r < ENTRIES; r++) mem.m[VB + r*STR + j] = v[j];
    end
    for (int r = 0; r < N; r++) y[r] = 0;
    foreach (xs[i]) y[xs[i]] += (longint'(vs[i]) * longint'(v[ys[i]])) >>> 31;
    for (int r = 0; r < N; r++) mem.m[RB + r] = 32'hbad0_0000;
    @(posedge clk); start <= 1; t0 = cyc; @(posedge clk); start <= 0; @(posedge clk);
    wait (done); @(posedge clk);
    for (int r = RS; r < RE; r++) begin
      checks++;
      if (mem.m[RB + r - RS] != 32'(y[r])) begin failures++; if (failures < 4) $display("it%0d row %0d %h vs %h", it, r, mem.m[RB + r - RS], 32'(y[r])); end
    end
    checks++;
    if (cyc - t0 > (xs.size() + 4) / 5 + 40) begin failures++; $display("slow: %0d cycles", cyc - t0); end
    $display("iteration %0d: %0d nnz in %0d cycles", it, xs.size(), cyc - t0);
  endtask

  initial begin
    cyc = 0; start = 0;
    for (int r = RS; r < RE; r++) begin
      automatic int cnt = ($urandom % 5 == 0) ? 0 : 1 + $urandom % 6;
      for (int c = 0; c < cnt; c++) begin xs.push_back(r); ys.push_back($urandom % N); vs.push_back(fx_t'($signed($urandom) >>> 3)); end
    end
    for (int i = 0; i < 16384; i++) mem.m[i] = 0;
    foreach (xs[i]) begin
      mem.m[MB + 16*(i/5) + 3*(i%5)] = xs[i]; mem.m[MB + 16*(i/5) + 3*(i%5) + 1] = ys[i]; mem.m[MB + 16*(i/5) + 3*(i%5) + 2] = vs[i];
    end
    part = '{mat_base: MB, nnz: xs.size(), row_start: RS, row_end: RE, vec_base: VB, rep_stride: STR, res_base: RB};
    repeat (3) @(posedge clk); rst_n = 1;
    run_and_check(0);
    run_and_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
