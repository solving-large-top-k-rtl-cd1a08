// dense_vector_fetch_unit: second stage of an SpMV compute unit.
//
// For every COO packet it performs ENTRIES random reads of the dense vector
// in the same cycle: lane k reads v[y_k] from replica r_k, which lives on an
// HBM channel of its own (replica k at vec_base + k*rep_stride). One read
// port per replica is what lets the CU sustain five random accesses per
// clock cycle even though each channel serves one read per cycle.
//
// The memory ports answer in order after a fixed RD_LAT cycles. The row
// index and the matrix value travel alongside in a delay line of the same
// length and are joined with the read data into an output FIFO. A credit
// count (in flight + queued) keeps the FIFO from overflowing, so the unit
// accepts a new packet only when its answer is sure to find room: with an
// output that never stalls it accepts one packet per cycle.
//
// Interface: in_* valid/ready packet of coo_t with lane mask and last flag;
// vrd_req_* / vrd_rsp_* one word read port per lane; out_* valid/ready
// packet of nzv_t (row, value, v[y]) with the same mask and last flag.
//
// From the paper: five replicas per CU, lane i reads replica i (Fig. 6).
// Own choices: fixed read latency, output FIFO depth, credit scheme.
module dense_vector_fetch_unit
  import eig_pkg::*;
#(
  parameter int unsigned RD_LAT     = 8,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  addr_t                   vec_base,
  input  addr_t                   rep_stride,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  coo_t  [ENTRIES-1:0]     in_pkt,
  input  logic  [ENTRIES-1:0]     in_mask,
  input  logic                    in_last,
  output logic  [ENTRIES-1:0]     vrd_req_valid,
  output addr_t [ENTRIES-1:0]     vrd_req_addr,
  input  logic  [ENTRIES-1:0]     vrd_rsp_valid,
  input  fx_t   [ENTRIES-1:0]     vrd_rsp_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output nzv_t  [ENTRIES-1:0]     out_pkt,
  output logic  [ENTRIES-1:0]     out_mask,
  output logic                    out_last
);
  typedef struct packed {
    logic [WORD_W-1:0] x;
    fx_t               val;
  } side_t;
  typedef struct packed {
    side_t [ENTRIES-1:0] side;
    logic  [ENTRIES-1:0] mask;
    logic                last;
  } tag_t;
  typedef struct packed {
    nzv_t [ENTRIES-1:0]  pkt;
    logic [ENTRIES-1:0]  mask;
    logic                last;
  } ent_t;

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [CW-1:0] in_flight, fifo_count;
  logic          accept, fifo_empty, pop;
  logic          dv [RD_LAT];
  tag_t          dt [RD_LAT];
  ent_t          joined, head;

  assign in_ready = (32'(in_flight) + 32'(fifo_count)) < FIFO_DEPTH;
  assign accept   = in_valid && in_ready;

  always_comb begin
    for (int k = 0; k < ENTRIES; k++) begin
      vrd_req_valid[k] = accept && in_mask[k];
      vrd_req_addr[k]  = vec_base + addr_t'(k) * rep_stride + addr_t'(in_pkt[k].y);
    end
  end

  // delay line for the side-band, matched to the read latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < RD_LAT; s++) dv[s] <= 1'b0;
    end else begin
      dv[0] <= accept;
      for (int s = 1; s < RD_LAT; s++) dv[s] <= dv[s-1];
    end
  end
  always_ff @(posedge clk) begin
    for (int k = 0; k < ENTRIES; k++) begin
      dt[0].side[k].x   <= in_pkt[k].x;
      dt[0].side[k].val <= in_pkt[k].val;
    end
    dt[0].mask <= in_mask;
    dt[0].last <= in_last;
    for (int s = 1; s < RD_LAT; s++) dt[s] <= dt[s-1];
  end

  always_comb begin
    for (int k = 0; k < ENTRIES; k++) begin
      joined.pkt[k].x   = dt[RD_LAT-1].side[k].x;
      joined.pkt[k].val = dt[RD_LAT-1].side[k].val;
      joined.pkt[k].vec = dt[RD_LAT-1].mask[k] ? vrd_rsp_data[k] : '0;
    end
    joined.mask = dt[RD_LAT-1].mask;
    joined.last = dt[RD_LAT-1].last;
  end

  // packets whose reads are still outstanding
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else        in_flight <= in_flight + (accept ? 1'b1 : 1'b0) - (dv[RD_LAT-1] ? 1'b1 : 1'b0);
  end

  assign pop = out_valid && out_ready;
  sync_fifo #(.WIDTH($bits(ent_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(dv[RD_LAT-1]), .wdata(joined), .pop, .rdata(head),
    .empty(fifo_empty), .count(fifo_count));

  assign out_valid = !fifo_empty;
  assign out_pkt   = head.pkt;
  assign out_mask  = head.mask;
  assign out_last  = head.last;

  // every masked lane's answer must arrive with its side-band
  assert property (@(posedge clk) disable iff (!rst_n)
                   dv[RD_LAT-1] |-> ((vrd_rsp_valid & dt[RD_LAT-1].mask) == dt[RD_LAT-1].mask));
endmodule
