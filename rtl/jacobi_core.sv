// jacobi_core: the Jacobi eigenvalue systolic array for a K x K symmetric
// tridiagonal matrix T (K = K_MAX, default 24; any k <= K_MAX at run time).
//
// Structure: M = K/2 diagonal PEs, M*(M-1) off-diagonal PEs and M*M
// eigenvector PEs, each holding a 2x2 block. PE (p,q) holds rows 2p, 2p+1
// and columns 2q, 2q+1 of the working matrix B (or of V).
//
// Operation after `start`:
//   LOAD  read the 3k-2 values of T from the PLRAM (alpha at 0..k-1, upper
//         beta at k..2k-2, lower beta at 2k-1..3k-3; one-cycle read), then
//         load B = T padded with zeros to K_MAX, and V = identity.
//   STEP  repeated: if every off-diagonal |B| < TOL, or MAX_STEPS steps were
//         made, stop. Otherwise all diagonal PEs compute (c, s) together
//         (fixed latency), all PEs rotate in one cycle (diagonal:
//         R B R^T, off-diagonal: R_p B R_q^T, eigenvector: V R_q^T), and in
//         one more cycle rows and columns of B and columns of V are
//         interchanged between neighbouring PEs.
// Interchange (round robin, Brent-Luk ordering): the left slot of block 0
// never moves; the others rotate one position per step along
// L1 -> L2 -> ... -> L(M-1) -> R(M-1) -> ... -> R0 -> L1 (L = left/top slot,
// R = right/bottom slot), so every pair of indices meets in one diagonal
// block once every K-1 steps. A tag per slot follows the interchange.
//
// Outputs: `done` (level, until the next start), `converged`, `steps`.
// Results are read through res_rd_addr -> res_rd_data (registered, one
// cycle): address a < K gives the eigenvalue in slot a (diagonal of B),
// address K + r*K + s gives V[r][s], the r-th component of the eigenvector
// in slot s. eig_valid[s] is set for slots holding one of the k real rows
// (padding slots hold zero eigenvalues). Numbers are Q2.30; the PLRAM
// values are Q1.31 and are shifted right by one on load.
//
// From the paper: Alg. 2, the three PE kinds and their counts, c and s
// propagated from the diagonal PEs, rotations in constant time, eigenvector
// PEs in parallel with the off-diagonal PEs, row/column interchange in one
// clock cycle with flip-flops, T read from PLRAM (3K-2 values). The text's
// interchange rule ("p_ij passes alpha, gamma to p_i,j+1 and beta, delta to
// p_i,j-1") does not define a permutation on its own; the round robin above
// is an own choice with the same fixed first slot and nearest-neighbour
// moves. Own choices also: the convergence test, TOL, MAX_STEPS, Q2.30.
module jacobi_core
  import eig_pkg::*;
#(
  parameter int unsigned K_MAX     = 24,
  parameter int unsigned MAX_STEPS = 12 * (K_MAX - 1),
  parameter int unsigned TOL       = 256,        // 2^-22 in Q2.30
  parameter int unsigned RA_W      = $clog2(K_MAX + K_MAX * K_MAX)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [7:0]         k,
  output logic [7:0]         pl_rd_addr,
  input  fx_t                pl_rd_data,
  output logic               done,
  output logic               converged,
  output logic [15:0]        steps,
  output logic [K_MAX-1:0]   eig_valid,
  input  logic [RA_W-1:0]    res_rd_addr,
  output fx_t                res_rd_data
);
  localparam int unsigned M = K_MAX / 2;

  function automatic int src_slot(int s);
    int p = s / 2;
    if (s == 0)                    return 0;
    if (s % 2 == 0 && p == 1)      return 1;
    if (s % 2 == 0)                return 2 * (p - 1);
    if (p < int'(M) - 1)           return 2 * (p + 1) + 1;
    return 2 * (int'(M) - 1);
  endfunction

  function automatic fx_t get_el(blk_t b, int r, int c);
    case ({r[0], c[0]})
      2'b00: return b.alpha;
      2'b01: return b.beta;
      2'b10: return b.gamma;
      default: return b.delta;
    endcase
  endfunction

  typedef enum logic [2:0] { J_IDLE, J_LOAD, J_INIT, J_CHECK, J_ANGLE, J_ROT, J_PERM, J_DONE } jstate_e;
  jstate_e st;

  // ---- PE array
  blk_t cur [M][M];
  blk_t vcur [M][M];
  blk_t nxt [M][M];
  blk_t vnxt [M][M];
  blk_t init_b [M][M];
  blk_t init_v [M][M];
  fx_t  cs_c [M], cs_s [M];
  logic [M-1:0] dg_done;
  logic ld, ld_init, dg_start, rot;

  for (genvar p = 0; p < M; p++) begin : g_row
    for (genvar q = 0; q < M; q++) begin : g_col
      if (p == q) begin : g_diag
        jacobi_diag_pe u_pe (
          .clk, .rst_n, .ld, .ld_blk(ld_init ? init_b[p][q] : nxt[p][q]), .start(dg_start), .done(dg_done[p]),
          .rot, .c(cs_c[p]), .s(cs_s[p]), .blk(cur[p][q]));
      end else begin : g_off
        jacobi_offdiag_pe u_pe (
          .clk, .rst_n, .ld, .ld_blk(ld_init ? init_b[p][q] : nxt[p][q]), .rot,
          .ci(cs_c[p]), .si(cs_s[p]), .cj(cs_c[q]), .sj(cs_s[q]), .blk(cur[p][q]));
      end
      jacobi_eigvec_pe u_ev (
        .clk, .rst_n, .ld, .ld_blk(ld_init ? init_v[p][q] : vnxt[p][q]), .rot,
        .cj(cs_c[q]), .sj(cs_s[q]), .blk(vcur[p][q]));
    end
  end

  // ---- interchange network (pure wiring)
  always_comb
    for (int p = 0; p < int'(M); p++)
      for (int q = 0; q < int'(M); q++) begin
        int r0, r1, c0, c1;
        r0 = src_slot(2*p); r1 = src_slot(2*p + 1); c0 = src_slot(2*q); c1 = src_slot(2*q + 1);
        nxt[p][q].alpha  = get_el(cur[r0/2][c0/2], r0, c0);
        nxt[p][q].beta   = get_el(cur[r0/2][c1/2], r0, c1);
        nxt[p][q].gamma  = get_el(cur[r1/2][c0/2], r1, c0);
        nxt[p][q].delta  = get_el(cur[r1/2][c1/2], r1, c1);
        vnxt[p][q].alpha = get_el(vcur[p][c0/2], 2*p, c0);
        vnxt[p][q].beta  = get_el(vcur[p][c1/2], 2*p, c1);
        vnxt[p][q].gamma = get_el(vcur[p][c0/2], 2*p + 1, c0);
        vnxt[p][q].delta = get_el(vcur[p][c1/2], 2*p + 1, c1);
      end

  // ---- T staging and initial blocks
  fx_t alpha_r [K_MAX];
  fx_t bu_r [K_MAX];
  fx_t bl_r [K_MAX];
  logic [7:0] kk, cnt;
  logic       rd_v, rd_v2;
  logic [7:0] rd_a, rd_a2;

  function automatic fx_t t_el(int r, int c);
    if (r == c)     return alpha_r[r];
    if (c == r + 1) return bu_r[r];
    if (r == c + 1) return bl_r[c];
    return '0;
  endfunction

  always_comb
    for (int p = 0; p < int'(M); p++)
      for (int q = 0; q < int'(M); q++) begin
        init_b[p][q] = '{alpha: t_el(2*p, 2*q), beta: t_el(2*p, 2*q+1), gamma: t_el(2*p+1, 2*q), delta: t_el(2*p+1, 2*q+1)};
        init_v[p][q] = (p == q) ? '{alpha: Q30_ONE, beta: '0, gamma: '0, delta: Q30_ONE} : '0;
      end

  // ---- convergence test
  logic off_small;
  always_comb begin
    off_small = 1'b1;
    for (int p = 0; p < int'(M); p++)
      for (int q = 0; q < int'(M); q++) begin
        if (p != q && (cur[p][q].alpha > fx_t'(TOL) || cur[p][q].alpha < -fx_t'(TOL))) off_small = 1'b0;
        if (cur[p][q].beta  > fx_t'(TOL) || cur[p][q].beta  < -fx_t'(TOL)) off_small = 1'b0;
        if (cur[p][q].gamma > fx_t'(TOL) || cur[p][q].gamma < -fx_t'(TOL)) off_small = 1'b0;
        if (p != q && (cur[p][q].delta > fx_t'(TOL) || cur[p][q].delta < -fx_t'(TOL))) off_small = 1'b0;
      end
  end

  // ---- control
  logic [7:0] tag [K_MAX];
  assign ld       = (st == J_INIT) || (st == J_PERM);
  assign ld_init  = (st == J_INIT);
  assign rot      = (st == J_ROT);
  assign dg_start = (st == J_CHECK) && !off_small && (32'(steps) < MAX_STEPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= J_IDLE; done <= 1'b0; converged <= 1'b0; steps <= '0; kk <= '0; cnt <= '0;
      rd_v <= 1'b0; rd_a <= '0; rd_v2 <= 1'b0; rd_a2 <= '0; pl_rd_addr <= '0;
      for (int i = 0; i < int'(K_MAX); i++) begin alpha_r[i] <= '0; bu_r[i] <= '0; bl_r[i] <= '0; tag[i] <= 8'(i); end
    end else begin
      rd_v <= 1'b0; rd_v2 <= rd_v; rd_a2 <= rd_a;
      // capture the PLRAM word: address registered, then one read cycle
      if (rd_v2) begin
        if (rd_a2 < kk)               alpha_r[rd_a2] <= pl_rd_data >>> 1;
        else if (rd_a2 < 2*kk - 8'd1) bu_r[rd_a2 - kk] <= pl_rd_data >>> 1;
        else                          bl_r[rd_a2 - (2*kk - 8'd1)] <= pl_rd_data >>> 1;
      end
      case (st)
        J_IDLE, J_DONE: if (start) begin
          st <= J_LOAD; done <= 1'b0; converged <= 1'b0; steps <= '0;
          kk <= k; cnt <= '0;
          for (int i = 0; i < int'(K_MAX); i++) begin alpha_r[i] <= '0; bu_r[i] <= '0; bl_r[i] <= '0; end
        end
        J_LOAD: begin
          if (cnt < 3*kk - 8'd2) begin
            pl_rd_addr <= cnt; rd_v <= 1'b1; rd_a <= cnt; cnt <= cnt + 1'b1;
          end else if (!rd_v && !rd_v2) st <= J_INIT;
        end
        J_INIT: begin
          for (int i = 0; i < int'(K_MAX); i++) tag[i] <= 8'(i);
          st <= J_CHECK;
        end
        J_CHECK: begin
          if (off_small)                          begin st <= J_DONE; done <= 1'b1; converged <= 1'b1; end
          else if (32'(steps) >= MAX_STEPS)   begin st <= J_DONE; done <= 1'b1; end
          else                                 st <= J_ANGLE;
        end
        J_ANGLE: if (dg_done[0]) st <= J_ROT;
        J_ROT:   st <= J_PERM;
        J_PERM: begin
          for (int i = 0; i < int'(K_MAX); i++) tag[i] <= tag[src_slot(i)];
          steps <= steps + 1'b1;
          st <= J_CHECK;
        end
        default: st <= J_IDLE;
      endcase
    end
  end

  always_comb
    for (int i = 0; i < int'(K_MAX); i++) eig_valid[i] = tag[i] < kk;

  // ---- result read port: a registered multiplexer over all slots
  always_ff @(posedge clk) begin
    fx_t v;
    v = '0;
    for (int i = 0; i < int'(K_MAX); i++)
      if (res_rd_addr == RA_W'(i)) v = get_el(cur[i/2][i/2], i, i);
    for (int r = 0; r < int'(K_MAX); r++)
      for (int sl = 0; sl < int'(K_MAX); sl++)
        if (res_rd_addr == RA_W'(int'(K_MAX) + r * int'(K_MAX) + sl)) v = get_el(vcur[r/2][sl/2], r, sl);
    res_rd_data <= v;
  end

  // all diagonal PEs run in lock step
  assert property (@(posedge clk) disable iff (!rst_n) dg_done[0] |-> &dg_done);
endmodule
