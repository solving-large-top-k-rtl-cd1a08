// lanczos_vector_unit: the streaming vector datapath behind "Lanczos
// Operations 1 and 2" (normalisation, alpha/beta, orthogonalisation).
//
// Every command is one pass over n elements, one element per clock cycle.
// Operands come from two DDR word read ports (rd0, rd1) with a fixed
// latency RD_LAT and, for OP_PAIGE, from the merged SpMV stream w_*. The
// element index, the stream value and a valid bit ride a delay line of the
// same length, so the arithmetic sees all operands of element i together.
//   OP_DOT   acc += a*b                      (a = rd0[a_base+i], b = rd1[b_base+i])
//   OP_SCALE d = sat(a * scale)  -> wr0[d_base+i] and every dense-vector
//            replica (the new Lanczos vector v_i), acc += d*d
//   OP_PAIGE d = w - s*a -> wr0[d_base+i], acc += d*b
//            (w stream, a = v_{i-1}, b = v_i, s = beta_i: the reordered
//            form u = w - beta v_{i-1}, alpha = u.v_i)
//   OP_AXPY  d = a - s*b -> wr0[d_base+i]   (w' -= alpha v_i, and the
//            re-orthogonalisation step w' -= (w'.v_j) v_j)
// A read of element i is issued RD_LAT cycles before the write of element i,
// so a pass may read and write the same vector in place.
//
// Numbers are Q1.31; `s` is Q1.31, `scale` is a 64-bit Q32.31 (1/beta can
// exceed one); products are truncated, `acc` is a 64-bit sum of Q1.31
// products. `done` pulses for one cycle after the last write of a pass.
//
// From the paper: the operations of Alg. 1 lines 5-10, Paige's reordering,
// v_i written to DDR and replicated over the HBM replicas. Own choices:
// one element per cycle, fixed-latency ports, saturation of the scaling.
module lanczos_vector_unit
  import eig_pkg::*;
#(
  parameter int unsigned NREPW  = NCU * NREP,
  parameter int unsigned RD_LAT = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [1:0]           op,
  input  logic [WORD_W-1:0]    n,
  input  addr_t                a_base,
  input  addr_t                b_base,
  input  addr_t                d_base,
  input  fx_t                  s,
  input  logic signed [63:0]   scale,
  input  addr_t [NREPW-1:0]    rep_base,
  output logic                 done,
  output logic signed [63:0]   acc,
  // merged SpMV result stream
  input  logic                 w_valid,
  output logic                 w_ready,
  input  fx_t                  w_data,
  // DDR ports
  output logic                 rd0_req_valid,
  output addr_t                rd0_req_addr,
  input  fx_t                  rd0_rsp_data,
  output logic                 rd1_req_valid,
  output addr_t                rd1_req_addr,
  input  fx_t                  rd1_rsp_data,
  output logic                 wr0_valid,
  output addr_t                wr0_addr,
  output fx_t                  wr0_data,
  // replica writes (HBM)
  output logic [NREPW-1:0]     rep_valid,
  output addr_t [NREPW-1:0]    rep_addr,
  output fx_t                  rep_data
);
  localparam logic [1:0] OP_DOT = 2'd0, OP_SCALE = 2'd1, OP_PAIGE = 2'd2, OP_AXPY = 2'd3;

  logic [1:0]        cop;
  logic [WORD_W-1:0] cn, ii;
  addr_t             ca, cb, cd;
  fx_t               cs;
  logic signed [63:0] cscale;
  logic              issuing, busy;

  logic              pv [RD_LAT];
  logic [WORD_W-1:0] pi [RD_LAT];
  fx_t               pw [RD_LAT];
  logic              plast [RD_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cop <= '0; cn <= '0; ca <= '0; cb <= '0; cd <= '0; cs <= '0; cscale <= '0; busy <= 1'b0; ii <= '0;
    end else if (start) begin
      cop <= op; cn <= n; ca <= a_base; cb <= b_base; cd <= d_base; cs <= s; cscale <= scale;
      busy <= (n != '0); ii <= '0;
    end else if (issuing) begin
      ii <= ii + 1'b1;
      if (ii + 1'b1 == cn) busy <= 1'b0;
    end
  end

  assign issuing       = busy && (cop != OP_PAIGE || w_valid);
  assign w_ready       = busy && (cop == OP_PAIGE);
  assign rd0_req_valid = issuing;
  assign rd0_req_addr  = ca + addr_t'(ii);
  assign rd1_req_valid = issuing && (cop != OP_SCALE);
  assign rd1_req_addr  = cb + addr_t'(ii);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < RD_LAT; k++) begin pv[k] <= 1'b0; plast[k] <= 1'b0; end
    end else begin
      pv[0]    <= issuing;
      plast[0] <= issuing && (ii + 1'b1 == cn);
      for (int k = 1; k < RD_LAT; k++) begin pv[k] <= pv[k-1]; plast[k] <= plast[k-1]; end
    end
  end
  always_ff @(posedge clk) begin
    pi[0] <= ii;
    pw[0] <= w_data;
    for (int k = 1; k < RD_LAT; k++) begin pi[k] <= pi[k-1]; pw[k] <= pw[k-1]; end
  end

  // element arithmetic
  fx_t                a, b, w, d;
  logic signed [95:0] scaled;
  logic signed [63:0] prod;
  always_comb begin
    a = rd0_rsp_data;
    b = rd1_rsp_data;
    w = pw[RD_LAT-1];
    scaled = 96'(a) * 96'(cscale);
    d    = '0;
    prod = '0;
    case (cop)
      OP_DOT: begin
        prod = 64'(mul_q31(a, b));
      end
      OP_SCALE: begin
        if      ((scaled >>> 31) >  96'sh7FFF_FFFF) d = 32'sh7FFF_FFFF;
        else if ((scaled >>> 31) < -96'sh7FFF_FFFF) d = -32'sh7FFF_FFFF;
        else                                        d = fx_t'(scaled >>> 31);
        prod = 64'(mul_q31(d, d));
      end
      OP_PAIGE: begin
        d    = w - mul_q31(cs, a);
        prod = 64'(mul_q31(d, b));
      end
      default: begin  // OP_AXPY
        d = a - mul_q31(cs, b);
      end
    endcase
  end

  logic out_v;
  assign out_v     = pv[RD_LAT-1];
  assign wr0_valid = out_v && (cop != OP_DOT);
  assign wr0_addr  = cd + addr_t'(pi[RD_LAT-1]);
  assign wr0_data  = d;
  assign rep_data  = d;
  always_comb
    for (int r = 0; r < NREPW; r++) begin
      rep_valid[r] = out_v && (cop == OP_SCALE);
      rep_addr[r]  = rep_base[r] + addr_t'(pi[RD_LAT-1]);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     begin acc <= '0; done <= 1'b0; end
    else begin
      done <= out_v && plast[RD_LAT-1];
      if (start)      acc <= '0;
      else if (out_v) acc <= acc + prod;
    end
  end
endmodule
