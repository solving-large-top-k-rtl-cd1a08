// matrix_fetch_unit: first stage of an SpMV compute unit.
//
// Streams one COO partition of the sparse matrix from the CU's own HBM
// channel. The partition is a run of 512-bit beats; each beat holds five
// non-zeros, lane k in words 3k (row x), 3k+1 (column y) and 3k+2 (value),
// word 15 unused. Reads are issued as AXI-style bursts of up to BURST_LEN
// beats, back to back, so the channel is kept busy; several bursts may be
// outstanding and the memory answers them in order.
//
// Interface: pulse `start` with `base_addr` (word address of the first
// beat) and `nnz`. Read channel: ar_* (address, length in beats) and r_*
// (data, last). Output: one packet of ENTRIES non-zeros per beat on pkt_*
// (valid/ready), with `pkt_mask` marking the real lanes (the last beat may
// be partly filled) and `pkt_last` on the final beat. `done` rises after the
// last beat has been handed on and stays high until the next start.
//
// Timing: r_ready follows pkt_ready combinationally, so with a memory that
// delivers a beat per cycle the unit passes one packet (5 non-zeros) per
// clock cycle, the rate the paper reports.
//
// From the paper: 5 non-zeros of 3x32 bit per 512-bit packet, bursts of the
// AXI4 maximum of 256 beats, one HBM channel per CU. Own choices: the word
// order inside a beat, the reduced AXI handshake, padding of the last beat.
module matrix_fetch_unit
  import eig_pkg::*;
#(
  parameter int unsigned BURST = BURST_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  addr_t                base_addr,
  input  logic [WORD_W-1:0]    nnz,
  output logic                 done,
  // burst read channel
  output logic                 ar_valid,
  input  logic                 ar_ready,
  output addr_t                ar_addr,
  output logic [8:0]           ar_len,     // beats in the burst, 1..256
  input  logic                 r_valid,
  output logic                 r_ready,
  input  beat_t                r_data,
  input  logic                 r_last,
  // packet stream
  output logic                 pkt_valid,
  input  logic                 pkt_ready,
  output coo_t [ENTRIES-1:0]   pkt,
  output logic [ENTRIES-1:0]   pkt_mask,
  output logic                 pkt_last
);

  localparam int unsigned NNZ_PER_BURST = BURST * ENTRIES;

  logic [WORD_W-1:0] req_left;   // non-zeros not yet requested
  logic [WORD_W-1:0] rx_left;    // non-zeros not yet delivered
  addr_t             req_addr;
  logic              active;

  // beats in the next burst: min(BURST, ceil(req_left / ENTRIES))
  logic [8:0]  next_len;
  logic [12:0] small_left;
  always_comb begin
    small_left = 13'(req_left);
    if (req_left >= WORD_W'(NNZ_PER_BURST)) next_len = 9'(BURST);
    else                                    next_len = 9'((small_left + 13'(ENTRIES - 1)) / 13'(ENTRIES));
  end

  assign ar_valid = active && (req_left != '0);
  assign ar_addr  = req_addr;
  assign ar_len   = next_len;

  assign pkt_valid = active && r_valid;
  assign r_ready   = active && pkt_ready;
  assign pkt_last  = (rx_left <= WORD_W'(ENTRIES));

  always_comb begin
    for (int k = 0; k < ENTRIES; k++) begin
      pkt[k].x   = r_data[(3*k)*WORD_W   +: WORD_W];
      pkt[k].y   = r_data[(3*k+1)*WORD_W +: WORD_W];
      pkt[k].val = r_data[(3*k+2)*WORD_W +: WORD_W];
      pkt_mask[k] = (rx_left > WORD_W'(k));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      done     <= 1'b0;
      req_left <= '0;
      rx_left  <= '0;
      req_addr <= '0;
    end else if (start) begin
      active   <= (nnz != '0);
      done     <= (nnz == '0);
      req_left <= nnz;
      rx_left  <= nnz;
      req_addr <= base_addr;
    end else if (active) begin
      if (ar_valid && ar_ready) begin
        req_addr <= req_addr + addr_t'(next_len) * addr_t'(BEAT_WORDS);
        if (req_left >= WORD_W'(NNZ_PER_BURST)) req_left <= req_left - WORD_W'(NNZ_PER_BURST);
        else                                    req_left <= '0;
      end
      if (pkt_valid && pkt_ready) begin
        if (pkt_last) begin
          rx_left <= '0;
          active  <= 1'b0;
          done    <= 1'b1;
        end else begin
          rx_left <= rx_left - WORD_W'(ENTRIES);
        end
      end
    end
  end

  // AXI rule: address must stay stable while it waits for acceptance
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n || start) ar_valid && !ar_ready |=> ar_valid && $stable(ar_addr);
  endproperty
  assert property (p_ar_stable);

endmodule
