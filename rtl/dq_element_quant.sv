// dq_element_quant: quantization of one binary32 element to an MLS element.
//
// Computes X_f = |x| / (S_t * S_g) and rounds it stochastically onto the
// sign + <E_X,M_X> grid with gradual underflow: binades 2^E_XMIN .. 2^-1
// (E_XMIN = 1-2^E_X) carry M_X mantissa bits, and below 2^E_XMIN a
// subnormal code keeps the step of the lowest binade. The quotient of the
// two significands f_x / (f_t * (1+m_g/2)) is taken to F fractional bits by
// an integer divider; the powers of two are handled as shifts. The value
// scaled to units of the grid step, with RBITS extra fraction bits, is added
// to the random number rnd and truncated: floor(v + u) with u = rnd/2^RBITS
// uniform in [0,1) equals NearestRound(v + r) with r uniform in [-1/2,1/2).
// A rounding that carries out of a binade moves to the next binade; above
// the largest binade the value saturates at (2-2^-M_X)*2^-1. Zero input
// gives a zero element. Combinational; the sign is passed through.
// The format, underflow handling and stochastic rounding are the paper's;
// the divider, the RBITS width and the carry into the next binade (the
// paper's pseudo-code clips the rounded fraction) are this design's choices.
module dq_element_quant #(
  parameter int unsigned E_X   = mls_pkg::E_X,
  parameter int unsigned M_X   = mls_pkg::M_X,
  parameter int unsigned E_G   = mls_pkg::E_G,
  parameter int unsigned RBITS = mls_pkg::RBITS
) (
  input  mls_pkg::fp32_t   x,
  input  logic [30:0]      s_t,     // tensor scale (positive binary32)
  input  logic [E_G-1:0]   e_g,     // group scale exponent, value 2^-e_g
  input  logic             m_g,     // group scale mantissa bit
  input  logic [RBITS-1:0] rnd,     // uniform random number
  output logic             q_s,
  output logic [E_X-1:0]   q_e,
  output logic [M_X-1:0]   q_m
);
  import mls_pkg::*;

  localparam int F      = int'(M_X + RBITS) + 4;
  localparam int E_XMIN = 1 - (2**E_X);
  localparam int KMAX   = (2**E_X) - 1;

  always_comb begin
    logic [63:0] num, den, q, t, n;
    int          p2, u, uc, st, sh, kc;
    int unsigned qm;

    kc  = 0;
    q_s = x.s;
    q_e = '0;
    q_m = '0;
    num = 64'({1'b1, x.m}) << (F + 1);
    den = 64'({1'b1, s_t[22:0]}) * (m_g ? 64'd3 : 64'd2);
    q   = num / den;
    qm  = msb64(q);
    p2  = int'(x.e) - int'(s_t[30:23]) + int'(e_g);
    u   = int'(qm) - F + p2;                    // floor(log2 X_f)
    uc  = (u > -1) ? -1 : u;
    st  = ((uc > E_XMIN) ? uc : E_XMIN) - int'(M_X);   // grid step exponent
    sh  = p2 - F - st + int'(RBITS);
    if (sh >= 0)       t = q << sh;
    else if (sh > -64) t = q >> (-sh);
    else               t = '0;
    n = (t + 64'(rnd)) >> RBITS;

    if (x.e == 8'd0 || s_t[30:23] == 8'd0) begin
      q_e = '0;                       q_m = '0;
    end else if (u > -1) begin
      q_e = E_X'(KMAX);               q_m = '1;          // saturate
    end else if (u < E_XMIN) begin
      q_e = E_X'(n[M_X]);             q_m = M_X'(n);     // subnormal (n <= 2^M_X)
    end else begin
      kc = u - E_XMIN + 1;
      if (n[M_X+1]) begin
        if (kc < KMAX) begin q_e = E_X'(kc + 1); q_m = '0; end
        else           begin q_e = E_X'(KMAX);   q_m = '1; end
      end else begin
        q_e = E_X'(kc);               q_m = M_X'(n);
      end
    end
  end

endmodule
