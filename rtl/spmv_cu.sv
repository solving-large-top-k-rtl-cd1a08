// spmv_cu: one iterative SpMV compute unit, computing its share of
// y = M * v for the rows [row_start, row_end) of its COO partition.
//
// Four dataflow stages connected by valid/ready:
//   matrix_fetch_unit       -> 5 non-zeros per cycle from the CU's HBM channel
//   dense_vector_fetch_unit -> 5 random reads of v, one per replica channel
//   aggregation_unit        -> products, summed per row inside a packet
//   writeback_fsm           -> rows gathered into 15-value packets and written
// A pulse on `start` latches the partition descriptor and starts all
// stages; `done` rises when the write-back has written every row of the
// partition, and stays up until the next start. The unit can be started
// again for the next Lanczos iteration without host involvement.
//
// Memory ports: one burst read port (matrix), ENTRIES word read ports
// (replicas of v), one 512-bit write port (results). In steady state the CU
// consumes one 512-bit matrix beat per cycle.
//
// From the paper: the four stages, their order and widths (Fig. 5). Own
// choices: handshakes between stages and the descriptor format (part_t).
module spmv_cu
  import eig_pkg::*;
#(
  parameter int unsigned RD_LAT = 8,
  parameter int unsigned BURST  = BURST_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  part_t                part,
  output logic                 done,
  // matrix burst read
  output logic                 ar_valid,
  input  logic                 ar_ready,
  output addr_t                ar_addr,
  output logic [8:0]           ar_len,
  input  logic                 r_valid,
  output logic                 r_ready,
  input  beat_t                r_data,
  input  logic                 r_last,
  // dense vector reads
  output logic  [ENTRIES-1:0]  vrd_req_valid,
  output addr_t [ENTRIES-1:0]  vrd_req_addr,
  input  logic  [ENTRIES-1:0]  vrd_rsp_valid,
  input  fx_t   [ENTRIES-1:0]  vrd_rsp_data,
  // result writes
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output addr_t                wr_addr,
  output beat_t                wr_data,
  output logic [BEAT_WORDS-1:0] wr_strb
);
  part_t p;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p <= '0;
    else if (start) p <= part;
  end

  logic               mf_valid, mf_ready, mf_last, mf_done;
  coo_t [ENTRIES-1:0] mf_pkt;
  logic [ENTRIES-1:0] mf_mask;

  logic               dv_valid, dv_ready, dv_last;
  nzv_t [ENTRIES-1:0] dv_pkt;
  logic [ENTRIES-1:0] dv_mask;

  logic                  ag_valid, ag_ready, ag_last;
  rowsum_t [ENTRIES-1:0] ag_rs;
  logic [ENTRIES-1:0]    ag_mask;

  matrix_fetch_unit #(.BURST(BURST)) u_mf (
    .clk, .rst_n, .start, .base_addr(part.mat_base), .nnz(part.nnz), .done(mf_done),
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .pkt_valid(mf_valid), .pkt_ready(mf_ready), .pkt(mf_pkt), .pkt_mask(mf_mask), .pkt_last(mf_last));

  dense_vector_fetch_unit #(.RD_LAT(RD_LAT)) u_dv (
    .clk, .rst_n, .vec_base(p.vec_base), .rep_stride(p.rep_stride),
    .in_valid(mf_valid), .in_ready(mf_ready), .in_pkt(mf_pkt), .in_mask(mf_mask), .in_last(mf_last),
    .vrd_req_valid, .vrd_req_addr, .vrd_rsp_valid, .vrd_rsp_data,
    .out_valid(dv_valid), .out_ready(dv_ready), .out_pkt(dv_pkt), .out_mask(dv_mask), .out_last(dv_last));

  aggregation_unit u_ag (
    .clk, .rst_n, .in_valid(dv_valid), .in_ready(dv_ready), .in_pkt(dv_pkt), .in_mask(dv_mask), .in_last(dv_last),
    .out_valid(ag_valid), .out_ready(ag_ready), .out_rs(ag_rs), .out_mask(ag_mask), .out_last(ag_last));

  // A partition without non-zeros still owns rows that must be written as
  // zeros: feed the write-back one empty packet flagged last.
  logic empty_part, empty_sent, wb_valid, ag_ready_wb;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     begin empty_part <= 1'b0; empty_sent <= 1'b0; end
    else if (start) begin empty_part <= (part.nnz == '0); empty_sent <= 1'b0; end
    else if (empty_part && ag_ready_wb) empty_sent <= 1'b1;
  end
  assign wb_valid = empty_part ? !empty_sent : ag_valid;
  assign ag_ready = empty_part ? 1'b0 : ag_ready_wb;

  writeback_fsm u_wb (
    .clk, .rst_n, .start, .row_start(part.row_start), .row_end(part.row_end), .res_base(part.res_base), .done,
    .in_valid(wb_valid), .in_ready(ag_ready_wb), .in_rs(ag_rs), .in_mask(empty_part ? '0 : ag_mask),
    .in_last(empty_part ? 1'b1 : ag_last),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);
endmodule
