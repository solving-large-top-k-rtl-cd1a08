// tb_aggregation_unit: random packets with rows in non-decreasing order
// (runs of equal rows of random length), random partial masks and random
// output stalls. The expected row sums are worked out in the testbench from
// the products truncated to Q1.31; the test also checks which lanes carry a
// result and that throughput is one packet per cycle without stalls.
module tb_aggregation_unit;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NPKT = 200;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  nzv_t [ENTRIES-1:0] in_pkt; logic [ENTRIES-1:0] in_mask, out_mask;
  rowsum_t [ENTRIES-1:0] out_rs;
  aggregation_unit dut (.*);

  nzv_t [ENTRIES-1:0] P [NPKT];
  logic [ENTRIES-1:0] M [NPKT];
  int nrecv, cyc, c0, c1;
  logic stall;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) out_ready <= stall ? ($urandom % 2) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int k = 0; k < ENTRIES; k++) begin
      automatic bit h = M[nrecv][k] && (k == 0 || !M[nrecv][k-1] || P[nrecv][k-1].x != P[nrecv][k].x);
      automatic longint s = 0;
      checks++;
      if (out_mask[k] != h) failures++;
      else if (h) begin
        for (int j = k; j < ENTRIES; j++) begin
          if (!M[nrecv][j] || P[nrecv][j].x != P[nrecv][k].x) break;
          s += (longint'(P[nrecv][j].val) * longint'(P[nrecv][j].vec)) >>> 31;
        end
        if (out_rs[k].row != P[nrecv][k].x || out_rs[k].sum != 32'(s)) failures++;
      end
    end
    if (nrecv == 100) c0 = cyc;
    if (nrecv == NPKT-1) c1 = cyc;
    nrecv++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int row = 0;
    cyc = 0; nrecv = 0; in_valid = 0; stall = 1; in_last = 0;
    for (int p = 0; p < NPKT; p++) begin
      for (int k = 0; k < ENTRIES; k++) begin
        if ($urandom % 2) row += 1 + $urandom % 3;
        P[p][k].x = row; P[p][k].val = fx_t'($signed($urandom) >>> 2); P[p][k].vec = fx_t'($signed($urandom) >>> 2);
      end
      M[p] = (p % 9 == 8) ? 5'(( 1 << (1 + $urandom % 4)) - 1) : 5'b11111;
    end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int p = 0; p < NPKT; p++) begin
      if (p == 100) stall = 0;
      in_valid <= 1; in_pkt <= P[p]; in_mask <= M[p]; in_last <= (p == NPKT-1);
      begin automatic bit ok; do begin @(negedge clk); ok = in_ready; @(posedge clk); end while (!ok); end
    end
    in_valid <= 0;
    wait (nrecv == NPKT);
    checks++; if (c1 - c0 != NPKT - 1 - 100) begin failures++; $display("span %0d", c1 - c0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
