// tb_merge_unit: five partitions of unequal size (one of a single row) with
// their result regions scattered in a memory model holding random values.
// The merged stream must be w[0..n-1] in row order, each element once, with
// `w_last` only on the final one, under random consumer stalls; a second
// pass without stalls must deliver n elements in n consecutive cycles.
module tb_merge_unit;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 45, LAT = 6;
  localparam int RSTART [5] = '{0, 7, 20, 21, 40};
  localparam int REND   [5] = '{7, 20, 21, 40, 45};
  localparam int RBASE  [5] = '{100, 300, 500, 700, 900};

  logic start, done, rd_req_valid, rd_rsp_valid, w_valid, w_ready, w_last;
  addr_t rd_req_addr; fx_t rd_rsp_data, w_data;
  part_t [4:0] parts;
  merge_unit #(.NPART(5), .RD_LAT(LAT), .FIFO_DEPTH(8)) dut (.*);
  mem_model #(.DEPTH(1024), .NRD(1), .NWR(1), .NBR(1), .RD_LAT(LAT)) mem (
    .clk, .rd_req_valid(rd_req_valid), .rd_req_addr(rd_req_addr), .rd_rsp_valid(rd_rsp_valid), .rd_rsp_data(rd_rsp_data),
    .wr_valid('0), .wr_addr('0), .wr_data('0), .wr_strb('0),
    .ar_valid('0), .ar_ready(), .ar_addr('0), .ar_len('0), .r_valid(), .r_ready('0), .r_data(), .r_last());

  fx_t w [N];
  int got, cyc, c0, c1;
  logic stall;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) w_ready <= stall ? ($urandom % 3 == 0) : 1'b1;
  always @(posedge clk) if (rst_n && w_valid && w_ready) begin
    checks++;
    if (got >= N || w_data != w[got] || w_last != (got == N-1)) begin failures++; $display("elem %0d", got); end
    if (got == 0) c0 = cyc;
    c1 = cyc;
    got++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; got = 0; start = 0; stall = 1;
    for (int i = 0; i < 1024; i++) mem.m[i] = $urandom;
    for (int c = 0; c < 5; c++) begin
      parts[c] = '0;
      parts[c].row_start = RSTART[c]; parts[c].row_end = REND[c]; parts[c].res_base = RBASE[c];
      for (int r = RSTART[c]; r < REND[c]; r++) w[r] = mem.m[RBASE[c] + r - RSTART[c]];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(posedge clk); start <= 1; @(posedge clk); start <= 0; @(posedge clk);
      wait (done); @(posedge clk);
      checks++; if (got != N) failures++;
      if (pass == 1) begin checks++; if (c1 - c0 != N - 1) begin failures++; $display("span %0d", c1 - c0); end end
      got = 0; stall = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
