// tb_matrix_fetch_unit: self-checking test of the COO matrix fetch stage.
// Loads a partition of 23 non-zeros (five beats, the last one partly filled)
// into a memory model, streams it twice and compares every lane and mask with
// the values the test wrote. Run 1 uses 2-beat bursts and a memory that idles
// 30% of the time plus random downstream stalls; run 2 uses full bursts and
// no stalls and checks the rate: five packets in five consecutive cycles.
module tb_matrix_fetch_unit;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NNZ = 23, BASE = 64;
  logic start, done;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  addr_t ar_addr; logic [8:0] ar_len; beat_t r_data;
  logic pkt_valid, pkt_ready, pkt_last;
  coo_t [ENTRIES-1:0] pkt; logic [ENTRIES-1:0] pkt_mask;
  logic [31:0] base_addr, nnz;

  matrix_fetch_unit #(.BURST(2)) dut (.*);

  mem_model #(.DEPTH(1024), .NRD(1), .NWR(1), .NBR(1), .RD_LAT(4), .STALL_PCT(30)) mem (
    .clk, .rd_req_valid('0), .rd_req_addr('0), .rd_rsp_valid(), .rd_rsp_data(),
    .wr_valid('0), .wr_addr('0), .wr_data('0), .wr_strb('0),
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last);

  matrix_fetch_unit #(.BURST(256)) dut2 (.clk, .rst_n, .start(start2), .base_addr, .nnz, .done(done2),
    .ar_valid(ar_valid2), .ar_ready(ar_ready2), .ar_addr(ar_addr2), .ar_len(ar_len2),
    .r_valid(r_valid2), .r_ready(r_ready2), .r_data(r_data2), .r_last(r_last2),
    .pkt_valid(pkt_valid2), .pkt_ready(1'b1), .pkt(pkt2), .pkt_mask(pkt_mask2), .pkt_last(pkt_last2));
  logic start2, done2, ar_valid2, ar_ready2, r_valid2, r_ready2, r_last2, pkt_valid2, pkt_last2;
  addr_t ar_addr2; logic [8:0] ar_len2; beat_t r_data2;
  coo_t [ENTRIES-1:0] pkt2; logic [ENTRIES-1:0] pkt_mask2;
  mem_model #(.DEPTH(1024), .NRD(1), .NWR(1), .NBR(1), .RD_LAT(4), .STALL_PCT(0)) mem2 (
    .clk, .rd_req_valid('0), .rd_req_addr('0), .rd_rsp_valid(), .rd_rsp_data(),
    .wr_valid('0), .wr_addr('0), .wr_data('0), .wr_strb('0),
    .ar_valid(ar_valid2), .ar_ready(ar_ready2), .ar_addr(ar_addr2), .ar_len(ar_len2),
    .r_valid(r_valid2), .r_ready(r_ready2), .r_data(r_data2), .r_last(r_last2));

  function automatic logic [31:0] ex(int i); return 32'(1000 + i); endfunction
  function automatic logic [31:0] ey(int i); return 32'(7 * i + 3); endfunction
  function automatic logic [31:0] ev(int i); return 32'(32'h0100_0000 * (i + 1)); endfunction

  int got, got2, first_cyc, last_cyc, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  // run 1 checker with random back-pressure
  always @(posedge clk) begin
    pkt_ready <= ($urandom % 4) != 0;
    if (pkt_valid && pkt_ready) begin
      for (int k = 0; k < ENTRIES; k++) begin
        automatic int i = got * ENTRIES + k;
        checks++;
        if (pkt_mask[k] != (i < NNZ)) begin failures++; $display("mask %0d %0d", got, k); end
        else if (i < NNZ && (pkt[k].x != ex(i) || pkt[k].y != ey(i) || pkt[k].val != ev(i))) begin failures++; $display("data got=%0d k=%0d x=%h", got, k, pkt[k].x); end
      end
      checks++;
      if (pkt_last != (got == 4)) failures++;
      got++;
    end
    if (pkt_valid2) begin
      for (int k = 0; k < ENTRIES; k++) begin
        automatic int i = got2 * ENTRIES + k;
        checks++;
        if (i < NNZ && pkt2[k].val != ev(i)) failures++;
      end
      if (got2 == 0) first_cyc = cyc;
      last_cyc = cyc;
      got2++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; got = 0; got2 = 0; start = 0; start2 = 0; pkt_ready = 0;
    base_addr = BASE; nnz = NNZ;
    for (int i = 0; i < 1024; i++) begin mem.m[i] = 32'hdead_0000 + i; mem2.m[i] = 0; end
    for (int i = 0; i < NNZ; i++) begin
      automatic int b = i / ENTRIES, k = i % ENTRIES;
      mem.m[BASE + 16*b + 3*k] = ex(i); mem.m[BASE + 16*b + 3*k + 1] = ey(i); mem.m[BASE + 16*b + 3*k + 2] = ev(i);
      mem2.m[BASE + 16*b + 3*k] = ex(i); mem2.m[BASE + 16*b + 3*k + 1] = ey(i); mem2.m[BASE + 16*b + 3*k + 2] = ev(i);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1; start2 <= 1;
    @(posedge clk); start <= 0; start2 <= 0;
    wait (done && done2);
    repeat (2) @(posedge clk);
    checks++; if (got != 5) failures++;
    checks++; if (got2 != 5) failures++;
    checks++; if (last_cyc - first_cyc != 4) begin failures++; $display("rate: %0d cycles for 5 beats", last_cyc - first_cyc + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
