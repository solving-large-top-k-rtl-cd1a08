// merge_unit: gathers the partial SpMV results of the compute units into
// the single vector w = M*v, in row order.
//
// Every CU owns a contiguous block of rows and has written its rows into
// its own result region. After all CUs are done, the merge unit walks the
// partitions in order (CU 0 first) and reads each result row once through
// one word read port, streaming w[0], w[1], ... to the Lanczos vector
// operations on w_* (valid/ready). The read port answers in order after a
// fixed RD_LAT cycles; a small FIFO and a credit count absorb back-pressure
// from the consumer, so the unit delivers one element per cycle when the
// consumer keeps up. `done` rises when the last element has been handed on.
//
// From the paper: a Merge Unit that aggregates the CUs' partial results
// into one vector (Fig. 4 C). Own choices: sequential walk over the
// partitions, the streaming interface. The replication of the next Lanczos
// vector into the dense-vector replicas is done by lanczos_vector_unit.
module merge_unit
  import eig_pkg::*;
#(
  parameter int unsigned NPART      = NCU,
  parameter int unsigned RD_LAT     = 8,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  part_t [NPART-1:0]  parts,
  output logic               done,
  output logic               rd_req_valid,
  output addr_t              rd_req_addr,
  input  logic               rd_rsp_valid,
  input  fx_t                rd_rsp_data,
  output logic               w_valid,
  input  logic               w_ready,
  output fx_t                w_data,
  output logic               w_last
);
  localparam int unsigned PW = (NPART > 1) ? $clog2(NPART) : 1;
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [PW-1:0]     pi;        // partition being read
  logic [WORD_W-1:0] row;       // row being read
  logic              reading, all_issued;
  logic [CW-1:0]     in_flight, fifo_count;
  logic              dv [RD_LAT];
  logic              dl [RD_LAT];
  logic              fifo_empty, last_row;
  logic [WORD_W:0]   head;

  assign last_row     = (32'(pi) == NPART - 1) && (row + 1'b1 >= parts[pi].row_end);
  assign rd_req_valid = reading && ((32'(in_flight) + 32'(fifo_count)) < FIFO_DEPTH);
  assign rd_req_addr  = parts[pi].res_base + addr_t'(row - parts[pi].row_start);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pi <= '0; row <= '0; reading <= 1'b0; all_issued <= 1'b0;
    end else if (start) begin
      pi <= '0; row <= parts[0].row_start; reading <= 1'b1; all_issued <= 1'b0;
    end else if (rd_req_valid) begin
      if (last_row) begin
        reading <= 1'b0; all_issued <= 1'b1;
      end else if (row + 1'b1 >= parts[pi].row_end) begin
        pi  <= pi + 1'b1;
        row <= parts[pi + 1'b1].row_start;
      end else begin
        row <= row + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < RD_LAT; s++) begin dv[s] <= 1'b0; dl[s] <= 1'b0; end
      in_flight <= '0;
    end else begin
      dv[0] <= rd_req_valid;
      dl[0] <= rd_req_valid && last_row;
      for (int s = 1; s < RD_LAT; s++) begin dv[s] <= dv[s-1]; dl[s] <= dl[s-1]; end
      in_flight <= in_flight + (rd_req_valid ? 1'b1 : 1'b0) - (dv[RD_LAT-1] ? 1'b1 : 1'b0);
    end
  end

  sync_fifo #(.WIDTH(WORD_W + 1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(dv[RD_LAT-1]), .wdata({dl[RD_LAT-1], rd_rsp_data}), .pop(w_valid && w_ready),
    .rdata(head), .empty(fifo_empty), .count(fifo_count));

  assign w_valid = !fifo_empty;
  assign w_data  = head[WORD_W-1:0];
  assign w_last  = head[WORD_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                            done <= 1'b0;
    else if (start)                        done <= 1'b0;
    else if (w_valid && w_ready && w_last) done <= 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) dv[RD_LAT-1] |-> rd_rsp_valid);
endmodule
