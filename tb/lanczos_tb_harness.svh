// lanczos_tb_harness.svh: shared testbench scaffolding for the Lanczos core
// and the full solver. Included inside a testbench module that defines
// NC, NR, N, LAT and the memory layout constants MB, MSTR, VB, RSTR, RB,
// RESSTR, V1. It declares the memory-port signals, one memory model for the
// HBM side (matrix bursts, replica reads, result writes, merge reads,
// replica writes) and one for the DDR side, builds a random symmetric sparse
// matrix of unit Frobenius norm split into NC row partitions, and provides
// a double-precision reference Lanczos with full re-orthogonalisation.

  logic start, done, beta_zero;
  logic [1:0] reorth;
  part_t [NC-1:0] parts;
  logic  [NC-1:0] cu_ar_valid, cu_ar_ready, cu_r_valid, cu_r_ready, cu_r_last, cu_wr_valid, cu_wr_ready;
  addr_t [NC-1:0] cu_ar_addr, cu_wr_addr;
  logic  [NC-1:0][8:0] cu_ar_len;
  beat_t [NC-1:0] cu_r_data, cu_wr_data;
  logic  [NC-1:0][BEAT_WORDS-1:0] cu_wr_strb;
  logic  [NC-1:0][ENTRIES-1:0] cu_vrd_req_valid, cu_vrd_rsp_valid;
  addr_t [NC-1:0][ENTRIES-1:0] cu_vrd_req_addr;
  fx_t   [NC-1:0][ENTRIES-1:0] cu_vrd_rsp_data;
  logic mg_rd_req_valid, mg_rd_rsp_valid; addr_t mg_rd_req_addr; fx_t mg_rd_rsp_data;
  logic rd0_req_valid, rd1_req_valid, wr0_valid; addr_t rd0_req_addr, rd1_req_addr, wr0_addr;
  fx_t rd0_rsp_data, rd1_rsp_data, wr0_data;
  logic [NC*NR-1:0] rep_valid; addr_t [NC*NR-1:0] rep_addr; fx_t rep_data;
  logic pl_wr_valid; logic [7:0] pl_wr_addr; fx_t pl_wr_data;

  // ---- HBM side: read ports = CU replica reads then merge; write ports = CU results then replicas
  localparam int HRD = NC*ENTRIES + 1, HWR = NC + NC*NR;
  logic [HRD-1:0] h_rv, h_rsv; logic [HRD-1:0][31:0] h_ra, h_rd;
  logic [HWR-1:0] h_wv; logic [HWR-1:0][31:0] h_wa; logic [HWR-1:0][511:0] h_wd; logic [HWR-1:0][15:0] h_ws;
  always_comb begin
    for (int c = 0; c < NC; c++) for (int e = 0; e < ENTRIES; e++) begin
      h_rv[c*ENTRIES + e] = cu_vrd_req_valid[c][e]; h_ra[c*ENTRIES + e] = cu_vrd_req_addr[c][e];
      cu_vrd_rsp_valid[c][e] = h_rsv[c*ENTRIES + e]; cu_vrd_rsp_data[c][e] = h_rd[c*ENTRIES + e];
    end
    h_rv[NC*ENTRIES] = mg_rd_req_valid; h_ra[NC*ENTRIES] = mg_rd_req_addr;
    mg_rd_rsp_valid = h_rsv[NC*ENTRIES]; mg_rd_rsp_data = h_rd[NC*ENTRIES];
    for (int c = 0; c < NC; c++) begin
      h_wv[c] = cu_wr_valid[c]; h_wa[c] = cu_wr_addr[c]; h_wd[c] = cu_wr_data[c]; h_ws[c] = cu_wr_strb[c];
    end
    for (int r = 0; r < NC*NR; r++) begin
      h_wv[NC + r] = rep_valid[r]; h_wa[NC + r] = rep_addr[r]; h_wd[NC + r] = 512'(rep_data); h_ws[NC + r] = 16'h1;
    end
  end
  assign cu_wr_ready = '1;
  mem_model #(.DEPTH(HBM_DEPTH), .NRD(HRD), .NWR(HWR), .NBR(NC), .RD_LAT(LAT)) hbm (
    .clk, .rd_req_valid(h_rv), .rd_req_addr(h_ra), .rd_rsp_valid(h_rsv), .rd_rsp_data(h_rd),
    .wr_valid(h_wv), .wr_addr(h_wa), .wr_data(h_wd), .wr_strb(h_ws),
    .ar_valid(cu_ar_valid), .ar_ready(cu_ar_ready), .ar_addr(cu_ar_addr), .ar_len(cu_ar_len),
    .r_valid(cu_r_valid), .r_ready(cu_r_ready), .r_data(cu_r_data), .r_last(cu_r_last));

  // ---- DDR side
  logic [1:0] d_rsv; logic [1:0][31:0] d_rd;
  mem_model #(.DEPTH(DDR_DEPTH), .NRD(2), .NWR(1), .NBR(1), .RD_LAT(LAT)) ddr (
    .clk, .rd_req_valid({rd1_req_valid, rd0_req_valid}), .rd_req_addr({rd1_req_addr, rd0_req_addr}),
    .rd_rsp_valid(d_rsv), .rd_rsp_data(d_rd), .wr_valid(wr0_valid), .wr_addr(wr0_addr),
    .wr_data(512'(wr0_data)), .wr_strb(16'h1),
    .ar_valid(1'b0), .ar_ready(), .ar_addr('0), .ar_len('0), .r_valid(), .r_ready(1'b0), .r_data(), .r_last());
  assign rd0_rsp_data = d_rd[0];
  assign rd1_rsp_data = d_rd[1];

  // ---- problem
  real Mq [N][N];   // quantised matrix, for the reference
  real v1q [N];
  int  nnz_total;

  function automatic real q2r(fx_t x); return real'(x) / 2147483648.0; endfunction
  function automatic fx_t r2q(real x); return fx_t'($rtoi(x * 2147483648.0)); endfunction
  function automatic real abs_r(real x); return x < 0 ? -x : x; endfunction

  task automatic build_problem();
    real fro = 0;
    int rows_per = N / NC;
    for (int a = 0; a < N; a++) for (int b = 0; b < N; b++) Mq[a][b] = 0;
    for (int a = 0; a < N; a++) begin
      Mq[a][a] = real'($urandom % 1000) / 1000.0;
      for (int e = 0; e < 2; e++) begin
        int b = $urandom % N;
        real x = (real'($urandom % 2000) / 1000.0) - 1.0;
        Mq[a][b] = x; Mq[b][a] = x;
      end
    end
    for (int a = 0; a < N; a++) for (int b = 0; b < N; b++) fro += Mq[a][b] * Mq[a][b];
    fro = $sqrt(fro);
    for (int a = 0; a < N; a++) for (int b = 0; b < N; b++) Mq[a][b] = q2r(r2q(Mq[a][b] / fro));
    for (int i = 0; i < HBM_DEPTH; i++) hbm.m[i] = 0;
    for (int i = 0; i < DDR_DEPTH; i++) ddr.m[i] = 0;
    nnz_total = 0;
    for (int c = 0; c < NC; c++) begin
      int rs = c * rows_per, re = (c == NC-1) ? N : (c + 1) * rows_per, cnt = 0;
      for (int a = rs; a < re; a++) for (int b = 0; b < N; b++) if (Mq[a][b] != 0) begin
        int base = MB + c*MSTR + 16*(cnt/5) + 3*(cnt%5);
        hbm.m[base] = a; hbm.m[base+1] = b; hbm.m[base+2] = r2q(Mq[a][b]);
        cnt++;
      end
      nnz_total += cnt;
      parts[c] = '{mat_base: MB + c*MSTR, nnz: cnt, row_start: rs, row_end: re,
                   vec_base: VB + c*NR*RSTR, rep_stride: RSTR, res_base: RB + c*RESSTR};
    end
    for (int x = 0; x < N; x++) begin
      v1q[x] = q2r(r2q(0.05 + 0.1 * real'($urandom % 100) / 100.0));
      ddr.m[V1 + x] = r2q(v1q[x]);
    end
  endtask

  // double-precision Lanczos with full re-orthogonalisation
  task automatic ref_lanczos(int kk, output real ra [], output real rb []);
    real V [][];
    real w [], nv;
    ra = new[kk]; rb = new[kk];
    V = new[kk];
    w = new[N];
    nv = 0;
    for (int x = 0; x < N; x++) nv += v1q[x] * v1q[x];
    nv = $sqrt(nv);
    for (int x = 0; x < N; x++) w[x] = v1q[x];
    for (int i = 0; i < kk; i++) begin
      real beta = 0, alpha = 0;
      for (int x = 0; x < N; x++) beta += w[x] * w[x];
      beta = $sqrt(beta);
      if (i > 0) rb[i-1] = beta;
      V[i] = new[N];
      for (int x = 0; x < N; x++) V[i][x] = w[x] / beta;
      for (int a = 0; a < N; a++) begin
        w[a] = 0;
        for (int b = 0; b < N; b++) w[a] += Mq[a][b] * V[i][b];
      end
      if (i > 0) for (int x = 0; x < N; x++) w[x] -= rb[i-1] * V[i-1][x];
      for (int x = 0; x < N; x++) alpha += w[x] * V[i][x];
      ra[i] = alpha;
      for (int x = 0; x < N; x++) w[x] -= alpha * V[i][x];
      for (int j = 0; j <= i; j++) begin
        real g = 0;
        for (int x = 0; x < N; x++) g += w[x] * V[j][x];
        for (int x = 0; x < N; x++) w[x] -= g * V[j][x];
      end
    end
  endtask
