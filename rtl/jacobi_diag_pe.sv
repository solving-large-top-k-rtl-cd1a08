// jacobi_diag_pe: a diagonal processing element p_ii of the Jacobi
// systolic array.
//
// Holds the 2x2 diagonal block [alpha beta; gamma delta]. A pulse on
// `start` computes the rotation that annihilates beta and gamma,
//   theta = 1/2 atan(2 beta / (alpha - delta)),   c = cos theta, s = sin theta,
// and raises `done` for one cycle exactly LAT cycles later with c and s
// valid (they stay until the next start). A pulse on `rot` then applies
// B <- R B R^T, R = [c s; -s c]; `ld` loads a new block (`ld` wins).
//
// Method, one fixed step sequence so that every diagonal PE finishes in
// the same cycle:
//   x = alpha - delta, y = 2 beta. The ratio is formed with |ratio| <= 1:
//   t = |y|/|x| if |y| <= |x|, else t = |x|/|y| (then atan = pi/2 - atan).
//   DIV1: t by bit-serial division (31 cycles).
//   DIV2: if t > tan(pi/8), u = (t-1)/(t+1) and atan t = pi/4 + atan u
//         (31 cycles, always spent for a fixed latency).
//   POLY: atan u = u - u^3/3 + ... - u^11/11 (|u| <= 0.415, truncation
//         error below 1e-6), one Horner step per cycle.
//   TRIG: sin and cos of theta (|theta| <= pi/4) by Taylor series to
//         theta^7 and theta^8, one Horner step per cycle.
// beta = 0 gives theta = 0. Numbers are Q2.30.
//
// From the paper: theta = 1/2 atan(2beta/(alpha-delta)), c and s "via
// Taylor series expansion" instead of CORDIC, the rotation R B R^T of the
// diagonal block, c and s propagated to the row and column PEs (Fig. 6 a).
// Own choices: the range reduction, the series orders, the divider, the
// latency of 79 cycles from start to done.
module jacobi_diag_pe
  import eig_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic ld,
  input  blk_t ld_blk,
  input  logic start,
  output logic done,
  input  logic rot,
  output fx_t  c,
  output fx_t  s,
  output blk_t blk
);
  localparam int unsigned DIV_STEPS = 31;
  // Q2.30 series coefficients
  localparam fx_t C_1_3 = 32'sh1555_5555, C_1_5 = 32'sh0CCC_CCCD, C_1_7 = 32'sh0924_9249, C_1_9 = 32'sh071C_71C7,
             C_1_11 = 32'sh05D1_745D;
  localparam fx_t C_1_2 = 32'sh2000_0000, C_1_6 = 32'sh0AAA_AAAB, C_1_24 = 32'sh02AA_AAAB;
  localparam fx_t C_1_120 = 32'sh0088_8889, C_1_720 = 32'sh0016_C16C, C_1_5040 = 32'sh0003_4034;
  localparam fx_t C_1_40320 = 32'sh0000_6807;

  typedef enum logic [2:0] { P_IDLE, P_DIV1, P_RED, P_DIV2, P_POLY, P_ANG, P_TRIG } phase_e;
  phase_e ph;

  logic [5:0]  cnt;
  logic        swap, neg, zero, red;
  logic [32:0] den;
  logic [34:0] rem;
  logic [30:0] q;
  fx_t         t0, u, z, h, hs, th;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) blk <= '0;
    else if (ld)  blk <= ld_blk;
    else if (rot) blk <= rot_right(rot_left(blk, c, s), c, s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; cnt <= '0; done <= 1'b0; swap <= 1'b0; neg <= 1'b0; zero <= 1'b0; red <= 1'b0;
      den <= '0; rem <= '0; q <= '0; t0 <= '0; u <= '0; z <= '0; h <= '0; hs <= '0; th <= '0;
      c <= Q30_ONE; s <= '0;
    end else begin
      done <= 1'b0;
      case (ph)
        P_IDLE: if (start) begin
          logic signed [33:0] x, y;
          logic [32:0] ax, ay;
          x  = 34'(blk.alpha) - 34'(blk.delta);
          y  = 34'(blk.beta) <<< 1;
          ax = 33'(x < 0 ? -x : x);
          ay = 33'(y < 0 ? -y : y);
          zero <= (blk.beta == '0);
          neg  <= (x < 0) != (y < 0);
          swap <= ay > ax;
          rem  <= 35'(ay > ax ? ax : ay);
          den  <= ay > ax ? ay : ax;
          q    <= '0;
          cnt  <= 6'(DIV_STEPS);
          ph   <= P_DIV1;
        end
        P_DIV1, P_DIV2: begin   // restoring division, one quotient bit per cycle
          if (rem >= 35'(den)) begin q <= {q[29:0], 1'b1}; rem <= (rem - 35'(den)) << 1; end
          else                 begin q <= {q[29:0], 1'b0}; rem <= rem << 1; end
          cnt <= cnt - 1'b1;
          if (cnt == 6'd1) ph <= (ph == P_DIV1) ? P_RED : P_POLY;
          if (cnt == 6'd1 && ph == P_DIV2) cnt <= 6'd0;
        end
        P_RED: begin
          t0  <= fx_t'(q);
          red <= fx_t'(q) > Q30_TAN_PI_8;
          rem <= 35'(Q30_ONE - fx_t'(q));
          den <= 33'(Q30_ONE + fx_t'(q));
          q   <= '0;
          cnt <= 6'(DIV_STEPS);
          ph  <= P_DIV2;
        end
        P_POLY: begin   // cnt 0: u; 1: z; 2..6: Horner; 7: u * h
          case (cnt)
            6'd0: begin u <= red ? -fx_t'(q) : t0; h <= -C_1_11; end
            6'd1: z <= mul_q30(u, u);
            6'd2: h <= mul_q30(z, h) + C_1_9;
            6'd3: h <= mul_q30(z, h) - C_1_7;
            6'd4: h <= mul_q30(z, h) + C_1_5;
            6'd5: h <= mul_q30(z, h) - C_1_3;
            6'd6: h <= mul_q30(z, h) + Q30_ONE;
            default: begin h <= mul_q30(u, h); ph <= P_ANG; end
          endcase
          cnt <= cnt + 1'b1;
        end
        P_ANG: begin
          fx_t phi, phi2;
          phi  = red ? Q30_PI_4 + h : h;
          phi2 = swap ? Q30_PI_2 - phi : phi;
          phi2 = neg ? -phi2 : phi2;
          th   <= zero ? fx_t'(0) : (phi2 >>> 1);
          cnt  <= '0;
          ph   <= P_TRIG;
        end
        default: begin  // P_TRIG: cnt 0: z; 1..4 Horner for sin and cos; 5: finish
          case (cnt)
            6'd0: begin z <= mul_q30(th, th); hs <= -C_1_5040; h <= C_1_40320; end
            6'd1: begin hs <= mul_q30(z, hs) + C_1_120; h <= mul_q30(z, h) - C_1_720; end
            6'd2: begin hs <= mul_q30(z, hs) - C_1_6;   h <= mul_q30(z, h) + C_1_24;  end
            6'd3: begin hs <= mul_q30(z, hs) + Q30_ONE; h <= mul_q30(z, h) - C_1_2;   end
            6'd4: begin                                 h <= mul_q30(z, h) + Q30_ONE; end
            default: begin
              s <= mul_q30(th, hs); c <= h; done <= 1'b1; ph <= P_IDLE;
            end
          endcase
          cnt <= cnt + 1'b1;
        end
      endcase
    end
  end
endmodule
