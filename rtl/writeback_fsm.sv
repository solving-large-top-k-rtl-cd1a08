// writeback_fsm: last stage of an SpMV compute unit.
//
// Collects the per-row partial sums of the aggregation stage into whole
// rows of y = M*v and writes them to the CU's result region in 512-bit
// packets of WB_VALS (15) consecutive rows, so a result packet costs one
// write transaction instead of one per non-zero.
//
// Two row windows are kept: res1 holds rows [base, base+15) and res2 rows
// [base+15, base+30). An incoming partial sum is added to the slot of its row
// when the row is already in a window (the "+=" path) and otherwise opens
// it. When a packet starts beyond res1, res1 is complete: it is written,
// res2 moves into res1 and a cleared res2 follows, in the same cycle as the
// packet is taken. A packet that reaches even further first adds the lanes
// that fit, then stalls the input while windows are written out, so rows without non-zeros are written as zeros
// and every row of the partition is written exactly once. After the last
// packet the remaining windows up to row_end are flushed and `done` rises.
//
// Interface: `start` with row_start/row_end/res_base; in_* valid/ready
// from aggregation; wr_* write port (word address, 16 words, word strobe;
// row r goes to res_base + r - row_start; word 15 is unused).
// Timing: one packet per cycle while rows advance by less than two windows
// per packet; otherwise one extra cycle per skipped window.
//
// From the paper: 15 values per 512-bit write, two accumulation buffers
// with a row-equality test (Fig. 5 D). Own choices: window alignment to
// row_start, writing zeros for empty rows, the stall rule.
module writeback_fsm
  import eig_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic    [WORD_W-1:0]     row_start,
  input  logic    [WORD_W-1:0]     row_end,
  input  addr_t                    res_base,
  output logic                     done,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  rowsum_t [ENTRIES-1:0]    in_rs,
  input  logic    [ENTRIES-1:0]    in_mask,
  input  logic                     in_last,
  output logic                     wr_valid,
  input  logic                     wr_ready,
  output addr_t                    wr_addr,
  output beat_t                    wr_data,
  output logic    [BEAT_WORDS-1:0] wr_strb
);
  typedef enum logic [1:0] {IDLE, RUN, FLUSH, FIN} state_e;
  state_e state;

  fx_t [WB_VALS-1:0] res1, res2;
  logic [WORD_W-1:0] base, rstart, rend;
  addr_t             rbase;

  logic [WORD_W-1:0] off [ENTRIES];
  logic              any_lt1, all_lt2, all_lt3;
  logic              adv, take, part;
  logic [ENTRIES-1:0] used;     // lanes of the current packet already added
  logic [ENTRIES-1:0] emask;    // lanes still to add
  logic [ENTRIES-1:0] fit;      // lanes inside the two windows

  always_comb begin
    any_lt1 = 1'b0; all_lt2 = 1'b1; all_lt3 = 1'b1;
    emask = in_mask & ~used;
    for (int k = 0; k < ENTRIES; k++) begin
      off[k] = in_rs[k].row - base;
      fit[k] = emask[k] && (off[k] < WORD_W'(2*WB_VALS));
      if (emask[k]) begin
        if (off[k] <  WORD_W'(WB_VALS))   any_lt1 = 1'b1;
        if (off[k] >= WORD_W'(2*WB_VALS)) all_lt2 = 1'b0;
        if (off[k] >= WORD_W'(3*WB_VALS)) all_lt3 = 1'b0;
      end
    end
    // decide: take the packet, advance the windows, or both
    adv  = 1'b0;
    take = 1'b0;
    part = 1'b0;
    if (state == RUN && in_valid) begin
      if (emask != '0 && !any_lt1 && all_lt3) begin adv = 1'b1; take = 1'b1; end
      else if (all_lt2)                        begin take = 1'b1; end
      else if (any_lt1)                        begin part = 1'b1; end  // add what fits, keep the rest
      else                                     begin adv = 1'b1; end
    end else if (state == FLUSH) begin
      adv = 1'b1;
    end
    if (adv && !wr_ready) take = 1'b0;
  end

  assign in_ready = (state == RUN) && take;
  assign wr_valid = adv;
  assign wr_addr  = rbase + addr_t'(base - rstart);
  always_comb begin
    wr_data = '0;
    wr_strb = '0;
    for (int k = 0; k < WB_VALS; k++) begin
      wr_data[k*WORD_W +: WORD_W] = res1[k];
      wr_strb[k] = (base + WORD_W'(k)) < rend;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; done <= 1'b0; base <= '0; rstart <= '0; rend <= '0; rbase <= '0;
      res1 <= '0; res2 <= '0; used <= '0;
    end else begin
      case (state)
        IDLE, FIN: if (start) begin
          state  <= (row_end > row_start) ? RUN : FIN;
          done   <= !(row_end > row_start);
          base   <= row_start; rstart <= row_start; rend <= row_end; rbase <= res_base;
          res1   <= '0; res2 <= '0; used <= '0;
        end
        RUN, FLUSH: begin
          if (adv && wr_ready) begin
            fx_t [WB_VALS-1:0] n1, n2;
            n1 = res2; n2 = '0;
            if (take) begin
              for (int k = 0; k < ENTRIES; k++) if (emask[k]) begin
                if (off[k] < WORD_W'(2*WB_VALS)) n1[off[k] - WORD_W'(WB_VALS)] = n1[off[k] - WORD_W'(WB_VALS)] + in_rs[k].sum;
                else                             n2[off[k] - WORD_W'(2*WB_VALS)] = n2[off[k] - WORD_W'(2*WB_VALS)] + in_rs[k].sum;
              end
            end
            res1 <= n1; res2 <= n2;
            base <= base + WORD_W'(WB_VALS);
            if (state == FLUSH && base + WORD_W'(WB_VALS) >= rend) begin state <= FIN; done <= 1'b1; end
          end else if (take || part) begin
            for (int k = 0; k < ENTRIES; k++) if (fit[k]) begin
              if (off[k] < WORD_W'(WB_VALS)) res1[off[k]] <= res1[off[k]] + in_rs[k].sum;
              else                           res2[off[k] - WORD_W'(WB_VALS)] <= res2[off[k] - WORD_W'(WB_VALS)] + in_rs[k].sum;
            end
          end
          if (part)      used <= used | fit;
          else if (take) used <= '0;
          if (state == RUN && take && in_last) state <= FLUSH;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // rows reach the write-back in non-decreasing order
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == RUN) && in_valid && emask[0] |-> in_rs[0].row >= base);
endmodule
