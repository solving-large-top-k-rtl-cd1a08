// tb_writeback_fsm: feeds the write-back stage random packets of partial
// row sums whose rows rise in small steps with occasional long gaps (empty
// rows), the same row repeating across packets. The result region in a
// memory model is pre-filled with a marker; afterwards every row of the
// partition must hold the sum the testbench accumulated (zero for empty
// rows), the guard words around the region must be untouched, and the number
// of write transactions must be ceil(rows / 15).
module tb_writeback_fsm;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int RS = 37, RE = 437, RB = 1000, NPKT = 150;
  logic start, done, in_valid, in_ready, in_last, wr_valid, wr_ready;
  logic [31:0] row_start, row_end; addr_t res_base;
  rowsum_t [ENTRIES-1:0] in_rs; logic [ENTRIES-1:0] in_mask;
  addr_t wr_addr; beat_t wr_data; logic [BEAT_WORDS-1:0] wr_strb;

  writeback_fsm dut (.*);
  mem_model #(.DEPTH(2048), .NRD(1), .NWR(1), .NBR(1), .RD_LAT(2)) mem (
    .clk, .rd_req_valid('0), .rd_req_addr('0), .rd_rsp_valid(), .rd_rsp_data(),
    .wr_valid(wr_valid && wr_ready), .wr_addr, .wr_data, .wr_strb,
    .ar_valid('0), .ar_ready(), .ar_addr('0), .ar_len('0), .r_valid(), .r_ready('0), .r_data(), .r_last());

  rowsum_t [ENTRIES-1:0] P [NPKT];
  logic [ENTRIES-1:0] M [NPKT];
  longint expect_row [RE];
  int nwr;
  always @(posedge clk) begin
    wr_ready <= ($urandom % 5) != 0;
    if (rst_n && wr_valid && wr_ready) nwr++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int row = RS + 3;
    nwr = 0; in_valid = 0; start = 0; in_last = 0;
    row_start = RS; row_end = RE; res_base = RB;
    for (int i = 0; i < 2048; i++) mem.m[i] = 32'hbad0_bad0;
    for (int r = 0; r < RE; r++) expect_row[r] = 0;
    for (int p = 0; p < NPKT; p++) begin
      M[p] = '0;
      for (int k = 0; k < ENTRIES; k++) begin
        if (k > 0 || $urandom % 3 == 0) row += ($urandom % 23 == 0) ? 20 + $urandom % 30 : 1 + $urandom % 2;
        if (row < RE) begin
          M[p][k] = 1; P[p][k].row = row; P[p][k].sum = fx_t'($signed($urandom) >>> 4);
          expect_row[row] += P[p][k].sum;
        end else P[p][k] = '0;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    for (int p = 0; p < NPKT; p++) begin
      in_valid <= 1; in_rs <= P[p]; in_mask <= M[p]; in_last <= (p == NPKT-1);
      begin automatic bit ok; do begin @(negedge clk); ok = in_ready; @(posedge clk); end while (!ok); end
    end
    in_valid <= 0;
    wait (done);
    repeat (2) @(posedge clk);
    for (int r = RS; r < RE; r++) begin
      checks++;
      if (mem.m[RB + r - RS] != 32'(expect_row[r])) begin
        failures++; if (failures < 5) $display("row %0d got %h exp %h", r, mem.m[RB + r - RS], 32'(expect_row[r]));
      end
    end
    checks++; if (mem.m[RB - 1] != 32'hbad0_bad0 || mem.m[RB + RE - RS] != 32'hbad0_bad0) failures++;
    checks++; if (nwr != (RE - RS + 14) / 15) begin failures++; $display("writes %0d", nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
