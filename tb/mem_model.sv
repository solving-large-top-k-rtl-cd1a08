// mem_model: behavioural stand-in for the board memories (HBM pseudo-channels
// behind the AXI switch, or DDR), used only by testbenches.
//
// One flat array of 32-bit words. Word read ports take a request every cycle
// and answer in order exactly RD_LAT cycles later. Write ports take a
// 512-bit packet with a 16-bit word strobe: word k goes to addr+k. Burst
// read ports follow a reduced AXI read channel: an accepted (addr, len) is
// answered by `len` beats of 16 words, one per cycle while r_ready is high,
// the first beat no earlier than RD_LAT cycles after acceptance. With
// STALL_PCT > 0 the burst data channel randomly idles to exercise
// back-pressure. Testbenches load and inspect `m` hierarchically.
module mem_model #(
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned NRD       = 1,
  parameter int unsigned NWR       = 1,
  parameter int unsigned NBR       = 1,
  parameter int unsigned RD_LAT    = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic               clk,
  input  logic [NRD-1:0]     rd_req_valid,
  input  logic [NRD-1:0][31:0] rd_req_addr,
  output logic [NRD-1:0]     rd_rsp_valid,
  output logic [NRD-1:0][31:0] rd_rsp_data,
  input  logic [NWR-1:0]     wr_valid,
  input  logic [NWR-1:0][31:0] wr_addr,
  input  logic [NWR-1:0][511:0] wr_data,
  input  logic [NWR-1:0][15:0] wr_strb,
  input  logic [NBR-1:0]     ar_valid,
  output logic [NBR-1:0]     ar_ready,
  input  logic [NBR-1:0][31:0] ar_addr,
  input  logic [NBR-1:0][8:0] ar_len,
  output logic [NBR-1:0]     r_valid,
  input  logic [NBR-1:0]     r_ready,
  output logic [NBR-1:0][511:0] r_data,
  output logic [NBR-1:0]     r_last
);
  logic [31:0] m [DEPTH];

  // fixed-latency word reads
  logic [NRD-1:0]       vpipe [RD_LAT];
  logic [NRD-1:0][31:0] dpipe [RD_LAT];
  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++) begin
      vpipe[0][p] <= rd_req_valid[p];
      dpipe[0][p] <= m[rd_req_addr[p] % DEPTH];
    end
    for (int s = 1; s < RD_LAT; s++) begin
      vpipe[s] <= vpipe[s-1];
      dpipe[s] <= dpipe[s-1];
    end
  end
  assign rd_rsp_valid = vpipe[RD_LAT-1];
  assign rd_rsp_data  = dpipe[RD_LAT-1];

  // writes
  always_ff @(posedge clk)
    for (int p = 0; p < NWR; p++)
      if (wr_valid[p])
        for (int k = 0; k < 16; k++)
          if (wr_strb[p][k]) m[(wr_addr[p] + k) % DEPTH] <= wr_data[p][32*k +: 32];

  // burst reads
  typedef struct { logic [31:0] addr; int len; longint t; } burst_t;
  burst_t q [NBR][$];
  int     beat [NBR];
  longint cyc;
  initial cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  assign ar_ready = '1;

  // registered beat output: a new beat is presented when the slot is empty
  // or the current beat is being taken
  initial for (int p = 0; p < NBR; p++) begin beat[p] = 0; r_valid[p] = 1'b0; r_last[p] = 1'b0; end
  always @(posedge clk) begin
    for (int p = 0; p < NBR; p++) begin
      if (ar_valid[p]) q[p].push_back('{addr: ar_addr[p], len: int'(ar_len[p]), t: cyc});
      if (!r_valid[p] || r_ready[p]) begin
        r_valid[p] <= 1'b0;
        if (q[p].size() > 0 && q[p][0].t + longint'(RD_LAT) <= cyc &&
            (STALL_PCT == 0 || ($urandom % 100) >= STALL_PCT)) begin
          r_valid[p] <= 1'b1;
          for (int k = 0; k < 16; k++) r_data[p][32*k +: 32] <= m[(q[p][0].addr + 16*beat[p] + k) % DEPTH];
          r_last[p] <= (beat[p] == q[p][0].len - 1);
          if (beat[p] == q[p][0].len - 1) begin beat[p] = 0; void'(q[p].pop_front()); end
          else beat[p] = beat[p] + 1;
        end
      end
    end
  end
endmodule
