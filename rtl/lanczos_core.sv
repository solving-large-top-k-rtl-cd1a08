// lanczos_core: the Lanczos half of the eigensolver (SLR0 of the device).
//
// Reduces the sparse n x n matrix M to a K x K symmetric tridiagonal
// matrix T (alpha on the diagonal, beta beside it) and the K Lanczos
// vectors V. One iteration i = 1..K runs these passes in order:
//   1. Ops 1:  beta_i = ||x||, with x = v1 (input) for i = 1 and x = w'_{i-1}
//              otherwise (a DOT pass, a bit-serial square root, one division
//              for 1/beta); v_i = x / beta_i is written to V[i] in DDR and,
//              in the same pass, to the NCU*NREP dense-vector replicas.
//   2. SpMV:   all NCU compute units compute their rows of w = M v_i from
//              the replicas and write them to their result regions.
//   3. Ops 2:  the merge unit streams w in row order into a PAIGE pass:
//              u = w - beta_i v_{i-1}, alpha_i = u.v_i; then an AXPY pass
//              w' = u - alpha_i v_i.
//   4. Re-orthogonalisation (mode 1: every iteration, mode 2: every second
//              iteration): for j = 1..i, gamma = w'.v_j (DOT), w' -= gamma v_j.
//   5. alpha_i and, for i > 1, beta_i go to the PLRAM for the Jacobi core.
// No host action is needed between iterations.
//
// PLRAM layout (3K-2 words, Q1.31): alpha_1..alpha_K at 0..K-1, the K-1
// off-diagonal values at K..2K-2 (upper) and again at 2K-1..3K-3 (lower).
// DDR layout: v1 at v1_base, V[i] at v_base + (i-1)*n, w' at wp_base.
// Each partition is described by a part_t (matrix, replicas, results);
// partitions must cover rows 0..n-1 in order, each with at least one row.
//
// Interface: `start` with n, k (2..K_MAX), reorth mode; `done` rises at the
// end and stays until the next start; `beta_zero` flags a breakdown (a zero
// norm; the next vector is then zero). Memory ports are passed through
// from the units below, as arrays indexed by CU.
//
// From the paper: Alg. 1, the 5 CUs, merge unit, Paige's reordering,
// optional re-orthogonalisation every 1 or 2 iterations, V in DDR, T to the
// Jacobi core through PLRAM. Own choices: pass sequencing, Q1.31 numbers,
// square root and reciprocal method, memory layout.
module lanczos_core
  import eig_pkg::*;
#(
  parameter int unsigned NC     = NCU,
  parameter int unsigned NR     = NREP,
  parameter int unsigned K_MAX  = 24,
  parameter int unsigned RD_LAT = 8,
  parameter int unsigned BURST  = BURST_LEN
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [WORD_W-1:0]            n,
  input  logic [7:0]                   k,
  input  logic [1:0]                   reorth,
  input  part_t [NC-1:0]               parts,
  input  addr_t                        v1_base,
  input  addr_t                        v_base,
  input  addr_t                        wp_base,
  output logic                         done,
  output logic                         beta_zero,
  // SpMV CU memory ports
  output logic  [NC-1:0]               cu_ar_valid,
  input  logic  [NC-1:0]               cu_ar_ready,
  output addr_t [NC-1:0]               cu_ar_addr,
  output logic  [NC-1:0][8:0]          cu_ar_len,
  input  logic  [NC-1:0]               cu_r_valid,
  output logic  [NC-1:0]               cu_r_ready,
  input  beat_t [NC-1:0]               cu_r_data,
  input  logic  [NC-1:0]               cu_r_last,
  output logic  [NC-1:0][ENTRIES-1:0]  cu_vrd_req_valid,
  output addr_t [NC-1:0][ENTRIES-1:0]  cu_vrd_req_addr,
  input  logic  [NC-1:0][ENTRIES-1:0]  cu_vrd_rsp_valid,
  input  fx_t   [NC-1:0][ENTRIES-1:0]  cu_vrd_rsp_data,
  output logic  [NC-1:0]               cu_wr_valid,
  input  logic  [NC-1:0]               cu_wr_ready,
  output addr_t [NC-1:0]               cu_wr_addr,
  output beat_t [NC-1:0]               cu_wr_data,
  output logic  [NC-1:0][BEAT_WORDS-1:0] cu_wr_strb,
  // merge unit read port (HBM)
  output logic                         mg_rd_req_valid,
  output addr_t                        mg_rd_req_addr,
  input  logic                         mg_rd_rsp_valid,
  input  fx_t                          mg_rd_rsp_data,
  // DDR ports
  output logic                         rd0_req_valid,
  output addr_t                        rd0_req_addr,
  input  fx_t                          rd0_rsp_data,
  output logic                         rd1_req_valid,
  output addr_t                        rd1_req_addr,
  input  fx_t                          rd1_rsp_data,
  output logic                         wr0_valid,
  output addr_t                        wr0_addr,
  output fx_t                          wr0_data,
  // replica writes (HBM)
  output logic  [NC*NR-1:0]            rep_valid,
  output addr_t [NC*NR-1:0]            rep_addr,
  output fx_t                          rep_data,
  // PLRAM write port
  output logic                         pl_wr_valid,
  output logic [7:0]                   pl_wr_addr,
  output fx_t                          pl_wr_data
);
  localparam logic [1:0] OP_DOT = 2'd0, OP_SCALE = 2'd1, OP_PAIGE = 2'd2, OP_AXPY = 2'd3;

  typedef enum logic [4:0] {
    S_IDLE, S_N1, S_N1W, S_SQRT, S_RECIP, S_N2, S_N2W, S_SPMV, S_SPMVW,
    S_PAIGE, S_PAIGEW, S_AXPY, S_AXPYW, S_RDOT, S_RDOTW, S_RAXPY, S_RAXPYW, S_STORE, S_FIN, S_DONE
  } state_e;
  state_e state;

  // ---------------- sub-units
  logic                cu_start;
  logic [NC-1:0]       cu_done;
  logic                mg_start, mg_done, w_valid, w_ready, w_last;
  fx_t                 w_data;
  logic                vu_start, vu_done;
  logic [1:0]          vu_op;
  addr_t               vu_a, vu_b, vu_d;
  fx_t                 vu_s;
  logic signed [63:0]  vu_scale, vu_acc;
  addr_t [NC*NR-1:0]   rep_base;

  for (genvar c = 0; c < NC; c++) begin : g_cu
    spmv_cu #(.RD_LAT(RD_LAT), .BURST(BURST)) u_cu (
      .clk, .rst_n, .start(cu_start), .part(parts[c]), .done(cu_done[c]),
      .ar_valid(cu_ar_valid[c]), .ar_ready(cu_ar_ready[c]), .ar_addr(cu_ar_addr[c]), .ar_len(cu_ar_len[c]),
      .r_valid(cu_r_valid[c]), .r_ready(cu_r_ready[c]), .r_data(cu_r_data[c]), .r_last(cu_r_last[c]),
      .vrd_req_valid(cu_vrd_req_valid[c]), .vrd_req_addr(cu_vrd_req_addr[c]),
      .vrd_rsp_valid(cu_vrd_rsp_valid[c]), .vrd_rsp_data(cu_vrd_rsp_data[c]),
      .wr_valid(cu_wr_valid[c]), .wr_ready(cu_wr_ready[c]), .wr_addr(cu_wr_addr[c]),
      .wr_data(cu_wr_data[c]), .wr_strb(cu_wr_strb[c]));
    for (genvar r = 0; r < NR; r++) begin : g_rep
      assign rep_base[c*NR + r] = parts[c].vec_base + addr_t'(r) * parts[c].rep_stride;
    end
  end

  merge_unit #(.NPART(NC), .RD_LAT(RD_LAT)) u_merge (
    .clk, .rst_n, .start(mg_start), .parts, .done(mg_done),
    .rd_req_valid(mg_rd_req_valid), .rd_req_addr(mg_rd_req_addr),
    .rd_rsp_valid(mg_rd_rsp_valid), .rd_rsp_data(mg_rd_rsp_data),
    .w_valid, .w_ready, .w_data, .w_last);

  lanczos_vector_unit #(.NREPW(NC*NR), .RD_LAT(RD_LAT)) u_vu (
    .clk, .rst_n, .start(vu_start), .op(vu_op), .n(n), .a_base(vu_a), .b_base(vu_b), .d_base(vu_d),
    .s(vu_s), .scale(vu_scale), .rep_base, .done(vu_done), .acc(vu_acc),
    .w_valid, .w_ready, .w_data,
    .rd0_req_valid, .rd0_req_addr, .rd0_rsp_data, .rd1_req_valid, .rd1_req_addr, .rd1_rsp_data,
    .wr0_valid, .wr0_addr, .wr0_data, .rep_valid, .rep_addr, .rep_data);

  // ---------------- controller
  logic [7:0]         it, j;        // iteration i (1-based) and re-orth index j
  addr_t              vcur, vprev, vj;
  fx_t                alpha, beta, gamma;
  logic [63:0]        sq_op, sq_one;
  logic [63:0]        sq_res;
  logic [5:0]         sq_cnt;
  logic               do_reorth;

  assign do_reorth = (reorth == 2'd1) || (reorth == 2'd2 && !it[0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; beta_zero <= 1'b0;
      it <= '0; j <= '0; vcur <= '0; vprev <= '0; vj <= '0;
      alpha <= '0; beta <= '0; gamma <= '0;
      sq_op <= '0; sq_one <= '0; sq_res <= '0; sq_cnt <= '0;
      cu_start <= 1'b0; mg_start <= 1'b0; vu_start <= 1'b0;
      vu_op <= OP_DOT; vu_a <= '0; vu_b <= '0; vu_d <= '0; vu_s <= '0; vu_scale <= '0;
      pl_wr_valid <= 1'b0; pl_wr_addr <= '0; pl_wr_data <= '0;
    end else begin
      cu_start <= 1'b0; mg_start <= 1'b0; vu_start <= 1'b0; pl_wr_valid <= 1'b0;
      case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_N1; done <= 1'b0; beta_zero <= 1'b0;
          it <= 8'd1; vcur <= v_base; vprev <= v_base; beta <= '0;
        end
        // Ops 1: norm of x
        S_N1: begin
          vu_op <= OP_DOT; vu_a <= (it == 8'd1) ? v1_base : wp_base; vu_b <= (it == 8'd1) ? v1_base : wp_base;
          vu_start <= 1'b1; state <= S_N1W;
        end
        S_N1W: if (vu_done) begin
          sq_op <= 64'(vu_acc) << 31; sq_one <= 64'd1 << 62; sq_res <= '0; sq_cnt <= 6'd32; state <= S_SQRT;
        end
        S_SQRT: begin   // one result bit per cycle
          if (sq_op >= sq_res + sq_one) begin
            sq_op  <= sq_op - (sq_res + sq_one);
            sq_res <= (sq_res >> 1) + sq_one;
          end else begin
            sq_res <= sq_res >> 1;
          end
          sq_one <= sq_one >> 2;
          sq_cnt <= sq_cnt - 1'b1;
          if (sq_cnt == 6'd1) state <= S_RECIP;
        end
        S_RECIP: begin
          if (sq_res == '0) begin vu_scale <= '0; beta_zero <= 1'b1; end
          else               vu_scale <= $signed((64'd1 << 62) / sq_res);
          if (it != 8'd1) begin
            beta <= fx_t'(sq_res[31:0]);
          end
          state <= S_N2;
        end
        S_N2: begin
          vu_op <= OP_SCALE; vu_a <= (it == 8'd1) ? v1_base : wp_base; vu_d <= vcur;
          vu_start <= 1'b1; state <= S_N2W;
        end
        S_N2W: if (vu_done) begin
          if (it != 8'd1) begin   // beta_i: upper and lower off-diagonal
            pl_wr_valid <= 1'b1; pl_wr_addr <= k + it - 8'd2; pl_wr_data <= beta;
          end
          state <= S_SPMV;
        end
        S_SPMV: begin
          if (it != 8'd1) begin
            pl_wr_valid <= 1'b1; pl_wr_addr <= 8'(2*k) + it - 8'd3; pl_wr_data <= beta;
          end
          cu_start <= 1'b1; state <= S_SPMVW;
        end
        S_SPMVW: if (&cu_done && !cu_start) begin   // done of the previous run is still up while start is seen
          mg_start <= 1'b1;
          vu_op <= OP_PAIGE; vu_a <= vprev; vu_b <= vcur; vu_d <= wp_base; vu_s <= beta;
          vu_start <= 1'b1; state <= S_PAIGEW;
        end
        S_PAIGEW: if (vu_done) begin
          alpha <= fx_t'(vu_acc); state <= S_AXPY;
        end
        S_AXPY: begin
          vu_op <= OP_AXPY; vu_a <= wp_base; vu_b <= vcur; vu_d <= wp_base; vu_s <= alpha;
          vu_start <= 1'b1; state <= S_AXPYW;
        end
        S_AXPYW: if (vu_done) begin
          j <= 8'd1; vj <= v_base;
          state <= do_reorth ? S_RDOT : S_STORE;
        end
        S_RDOT: begin
          vu_op <= OP_DOT; vu_a <= wp_base; vu_b <= vj; vu_start <= 1'b1; state <= S_RDOTW;
        end
        S_RDOTW: if (vu_done) begin gamma <= fx_t'(vu_acc); state <= S_RAXPY; end
        S_RAXPY: begin
          vu_op <= OP_AXPY; vu_a <= wp_base; vu_b <= vj; vu_d <= wp_base; vu_s <= gamma;
          vu_start <= 1'b1; state <= S_RAXPYW;
        end
        S_RAXPYW: if (vu_done) begin
          if (j == it) state <= S_STORE;
          else begin j <= j + 1'b1; vj <= vj + addr_t'(n); state <= S_RDOT; end
        end
        S_STORE: begin
          pl_wr_valid <= 1'b1; pl_wr_addr <= it - 8'd1; pl_wr_data <= alpha;
          if (it == k) state <= S_FIN;
          else begin
            it <= it + 1'b1; vprev <= vcur; vcur <= vcur + addr_t'(n); state <= S_N1;
          end
        end
        S_FIN: begin state <= S_DONE; done <= 1'b1; end   // after the last PLRAM write
        default: state <= S_IDLE;
      endcase
    end
  end

  // the merged stream is consumed only by the PAIGE pass
  assert property (@(posedge clk) disable iff (!rst_n) w_valid && w_ready |-> state == S_PAIGEW);
endmodule
