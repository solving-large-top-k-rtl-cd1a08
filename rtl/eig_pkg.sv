// eig_pkg: types, constants and fixed-point helpers shared by the Top-K
// sparse eigensolver (Lanczos front end + Jacobi systolic back end).
//
// Number formats
//   * Lanczos side: Q1.31 signed, 32 bit. The input matrix is scaled to unit
//     Frobenius norm, so every matrix value, vector entry, eigenvalue and
//     eigenvector component lies in (-1, 1) and fits this format.
//   * Jacobi side: Q2.30 signed, 32 bit, so that cos(theta) = 1.0 and the
//     intermediate sums of a 2x2 rotation stay representable.
// A COO non-zero is three 32-bit words (row x, column y, value); five of
// them travel together in one 512-bit memory beat (15 of the 16 words used).
package eig_pkg;

  localparam int unsigned WORD_W    = 32;   // COO fields and vector entries
  localparam int unsigned BEAT_W    = 512;  // HBM beat / write packet width
  localparam int unsigned BEAT_WORDS = BEAT_W / WORD_W;  // 16
  localparam int unsigned ENTRIES   = 5;    // non-zeros per beat
  localparam int unsigned WB_VALS   = 15;   // result values per write packet
  localparam int unsigned ADDR_W    = 32;   // word addresses
  localparam int unsigned NCU       = 5;    // SpMV compute units
  localparam int unsigned NREP      = 5;    // dense-vector replicas per CU
  localparam int unsigned BURST_LEN = 256;  // AXI4 maximum burst, in beats

  typedef logic signed [WORD_W-1:0] fx_t;   // Q1.31 (Lanczos) / Q2.30 (Jacobi)
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [BEAT_W-1:0]        beat_t;

  // One COO non-zero.
  typedef struct packed {
    logic [WORD_W-1:0] x;    // row
    logic [WORD_W-1:0] y;    // column
    fx_t               val;  // value, Q1.31
  } coo_t;

  // A non-zero after the dense-vector fetch: value and v[y] side by side.
  typedef struct packed {
    logic [WORD_W-1:0] x;
    fx_t               val;
    fx_t               vec;
  } nzv_t;

  // A row partial sum coming out of aggregation.
  typedef struct packed {
    logic [WORD_W-1:0] row;
    fx_t               sum;
  } rowsum_t;

  // What a compute unit is told about its share of the matrix.
  typedef struct packed {
    addr_t             mat_base;  // first beat of the COO partition (word address)
    logic [WORD_W-1:0] nnz;       // non-zeros in the partition
    logic [WORD_W-1:0] row_start; // first row owned by this CU
    logic [WORD_W-1:0] row_end;   // one past the last row
    addr_t             vec_base;  // base of this CU's replicas (replica r at vec_base + r*rep_stride)
    addr_t             rep_stride;
    addr_t             res_base;  // result region: row r at res_base + (r - row_start)
  } part_t;

  // Q1.31 multiply, arithmetic shift (rounds towards minus infinity).
  function automatic fx_t mul_q31(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> 31);
  endfunction

  // Q2.30 multiply.
  function automatic fx_t mul_q30(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> 30);
  endfunction

  // Q2.30 constants.
  localparam fx_t Q30_ONE    = 32'sh4000_0000;
  localparam fx_t Q30_PI_4   = 32'sh3243_F6A9;  // 0.785398163
  localparam fx_t Q30_PI_2   = 32'sh6487_ED51;  // 1.570796327
  localparam fx_t Q30_TAN_PI_8 = 32'sh1A82_799A; // 0.414213562

  // A 2x2 block held by a Jacobi processing element, named as in the
  // paper: [alpha beta; gamma delta].
  typedef struct packed {
    fx_t alpha;
    fx_t beta;
    fx_t gamma;
    fx_t delta;
  } blk_t;

  // R B with R = [c s; -s c]   (Q2.30)
  function automatic blk_t rot_left(blk_t b, fx_t c, fx_t s);
    blk_t r;
    r.alpha = mul_q30(c, b.alpha) + mul_q30(s, b.gamma);
    r.beta  = mul_q30(c, b.beta)  + mul_q30(s, b.delta);
    r.gamma = mul_q30(c, b.gamma) - mul_q30(s, b.alpha);
    r.delta = mul_q30(c, b.delta) - mul_q30(s, b.beta);
    return r;
  endfunction

  // B R^T with R = [c s; -s c]   (Q2.30)
  function automatic blk_t rot_right(blk_t b, fx_t c, fx_t s);
    blk_t r;
    r.alpha = mul_q30(b.alpha, c) + mul_q30(b.beta, s);
    r.beta  = mul_q30(b.beta, c)  - mul_q30(b.alpha, s);
    r.gamma = mul_q30(b.gamma, c) + mul_q30(b.delta, s);
    r.delta = mul_q30(b.delta, c) - mul_q30(b.gamma, s);
    return r;
  endfunction

endpackage
