// aggregation_unit: third stage of an SpMV compute unit.
//
// Multiplies each non-zero of a packet by the vector entry fetched for it
// and adds up the products that belong to the same matrix row, so that the
// write-back stage receives at most one partial sum per row and packet.
// Because the COO partition is sorted by row, equal rows form contiguous
// runs inside a packet; the sum of a run is reported in the run's first
// lane and the other lanes of the run are masked off.
//
// Arithmetic is Q1.31 fixed point: each product is truncated to Q1.31, sums
// wrap at 32 bits (all partial sums of a unit-Frobenius-norm matrix times a
// unit vector stay inside (-1, 1)).
//
// Interface: in_* and out_* are valid/ready; one register stage, so the
// latency is one cycle and the rate one packet per cycle.
//
// From the paper: "sums results within a single data-packet". The paper's
// text says the sum is over the same column, its Fig. 5 and the write-back
// description use the row; the row is what y = M*v needs and is used here.
module aggregation_unit
  import eig_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  nzv_t    [ENTRIES-1:0]    in_pkt,
  input  logic    [ENTRIES-1:0]    in_mask,
  input  logic                     in_last,
  output logic                     out_valid,
  input  logic                     out_ready,
  output rowsum_t [ENTRIES-1:0]    out_rs,
  output logic    [ENTRIES-1:0]    out_mask,
  output logic                     out_last
);
  fx_t     [ENTRIES-1:0] prod;
  rowsum_t [ENTRIES-1:0] rs;
  logic    [ENTRIES-1:0] head;   // lane opens a run of equal rows

  always_comb begin
    for (int k = 0; k < ENTRIES; k++) begin
      prod[k] = in_mask[k] ? mul_q31(in_pkt[k].val, in_pkt[k].vec) : '0;
      head[k] = in_mask[k] && (k == 0 || !in_mask[k-1] || in_pkt[k-1].x != in_pkt[k].x);
    end
    for (int k = 0; k < ENTRIES; k++) begin
      logic run;
      rs[k].row = in_pkt[k].x;
      rs[k].sum = prod[k];
      run = 1'b1;
      for (int j = k + 1; j < ENTRIES; j++) begin
        run = run && in_mask[j] && (in_pkt[j].x == in_pkt[k].x);
        if (run) rs[k].sum = rs[k].sum + prod[j];
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      out_rs   <= rs;
      out_mask <= head;
      out_last <= in_last;
    end
  end
endmodule
