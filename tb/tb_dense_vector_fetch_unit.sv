// tb_dense_vector_fetch_unit: drives random COO packets into the dense
// vector fetch stage against a five-port memory model in which each replica
// holds a distinct tag (replica number in the top byte, index below), so a
// read from the wrong replica or index shows. Phase 1 stalls the output at
// random; phase 2 never stalls and checks that 32 packets are accepted in
// 32 consecutive cycles (five random reads per cycle).
module tb_dense_vector_fetch_unit;
  import eig_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int VB = 256, STRIDE = 128, NPKT = 64, LAT = 8;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  coo_t [ENTRIES-1:0] in_pkt; logic [ENTRIES-1:0] in_mask, out_mask;
  logic [ENTRIES-1:0] vrd_req_valid, vrd_rsp_valid;
  addr_t [ENTRIES-1:0] vrd_req_addr; fx_t [ENTRIES-1:0] vrd_rsp_data;
  nzv_t [ENTRIES-1:0] out_pkt;
  addr_t vec_base, rep_stride;

  dense_vector_fetch_unit #(.RD_LAT(LAT), .FIFO_DEPTH(16)) dut (.*);
  mem_model #(.DEPTH(1024), .NRD(ENTRIES), .NWR(1), .NBR(1), .RD_LAT(LAT)) mem (
    .clk, .rd_req_valid(vrd_req_valid), .rd_req_addr(vrd_req_addr), .rd_rsp_valid(vrd_rsp_valid),
    .rd_rsp_data(vrd_rsp_data), .wr_valid('0), .wr_addr('0), .wr_data('0), .wr_strb('0),
    .ar_valid('0), .ar_ready(), .ar_addr('0), .ar_len('0), .r_valid(), .r_ready('0), .r_data(), .r_last());

  coo_t [ENTRIES-1:0] sent [NPKT];
  logic [ENTRIES-1:0] smask [NPKT];
  int nsent, nrecv, acc_first, acc_last, cyc;
  logic stall_out;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) out_ready <= stall_out ? (($urandom % 3) == 0) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int k = 0; k < ENTRIES; k++) begin
      checks++;
      if (out_mask[k] != smask[nrecv][k]) failures++;
      else if (smask[nrecv][k] && (out_pkt[k].x != sent[nrecv][k].x || out_pkt[k].val != sent[nrecv][k].val ||
               out_pkt[k].vec != ((32'(k) << 24) | sent[nrecv][k].y))) failures++;
    end
    nrecv++;
  end

  task automatic send(int first, int count, bit track);
    for (int p = first; p < first + count; p++) begin
      in_valid <= 1; in_pkt <= sent[p]; in_mask <= smask[p]; in_last <= (p == NPKT-1);
      begin automatic bit ok; do begin @(negedge clk); ok = in_ready; @(posedge clk); end while (!ok); end
      if (track) begin if (p == first) acc_first = cyc; acc_last = cyc; end
    end
    in_valid <= 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; nsent = 0; nrecv = 0; in_valid = 0; stall_out = 1; in_last = 0; in_mask = '0; in_pkt = '0;
    vec_base = VB; rep_stride = STRIDE;
    for (int r = 0; r < ENTRIES; r++) for (int j = 0; j < STRIDE; j++) mem.m[VB + r*STRIDE + j] = (32'(r) << 24) | 32'(j);
    for (int p = 0; p < NPKT; p++) begin
      for (int k = 0; k < ENTRIES; k++) begin
        sent[p][k].x = $urandom; sent[p][k].y = $urandom % STRIDE; sent[p][k].val = $urandom;
      end
      smask[p] = (p % 7 == 6) ? 5'b00111 : 5'b11111;
    end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    send(0, 32, 0);
    wait (nrecv == 32);
    stall_out = 0;
    @(posedge clk);
    send(32, 32, 1);
    wait (nrecv == NPKT);
    checks++; if (acc_last - acc_first != 31) begin failures++; $display("accept span %0d", acc_last - acc_first); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
