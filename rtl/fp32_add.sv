// fp32_add: combinational IEEE-754 binary32 adder used by the adder tree.
//
// Operands are unpacked, swapped so that the first has the larger magnitude,
// the smaller significand is aligned with guard, round and sticky bits, the
// two are added or subtracted, the result is normalised and rounded to
// nearest-even. Subnormal inputs are read as zero and results below the
// normal range are flushed to zero; results above it become infinity.
// NaN and infinity inputs are not expected: the scale units cannot make
// them. The paper only states that the adder tree is floating point; this
// adder and its flush-to-zero policy are this design's own choice.
// Lint reports bit 23 of sig_r as unread: it is the hidden bit, which the
// binary32 encoding drops.
module fp32_add (
  input  mls_pkg::fp32_t a,
  input  mls_pkg::fp32_t b,
  output mls_pkg::fp32_t y
);
  import mls_pkg::*;

  always_comb begin
    fp32_t        x0, x1;
    logic [26:0]  m0, m1, m1s;      // 24-bit significand + guard, round, sticky
    logic [27:0]  sum;
    logic [7:0]   d;
    int           e;
    int unsigned  lz;
    logic [23:0]  sig, sig_r;
    logic [24:0]  sig_inc;
    logic [26:0]  nrm;
    int           en, er;
    logic         g, r, s, up;
    logic         z0, z1;

    lz = 0; sig = '0; g = 1'b0; r = 1'b0; s = 1'b0; up = 1'b0;
    // order by magnitude
    if ({a.e, a.m} >= {b.e, b.m}) begin x0 = a; x1 = b; end
    else                          begin x0 = b; x1 = a; end
    z0 = (x0.e == 8'd0);
    z1 = (x1.e == 8'd0);
    m0 = {~z0, x0.m, 3'b000};
    m1 = {~z1, x1.m, 3'b000};
    d  = x0.e - x1.e;
    if (z1)           m1s = '0;
    else if (d >= 27) m1s = 27'd1;                       // only sticky remains
    else              m1s = (m1 >> d) | 27'((m1 & ((27'd1 << d) - 1'b1)) != 0);

    e = int'(x0.e);
    if (x0.s == x1.s) sum = {1'b0, m0} + {1'b0, m1s};
    else              sum = {1'b0, m0} - {1'b0, m1s};

    // normalise: right by one on a carry, left by the leading-zero count otherwise
    for (int i = 0; i <= 26; i++) if (sum[i]) lz = 26 - i;
    if (sum[27]) begin
      nrm = {sum[27:2], sum[1] | sum[0]};
      en  = e + 1;
    end else begin
      nrm = 27'(sum << lz);
      en  = e - int'(lz);
    end
    sig     = nrm[26:3];
    g       = nrm[2];
    r       = nrm[1];
    s       = nrm[0];
    up      = g && (r || s || sig[0]);
    sig_inc = {1'b0, sig} + 25'(up);
    sig_r   = sig_inc[24] ? 24'h800000 : sig_inc[23:0];
    er      = sig_inc[24] ? en + 1 : en;

    if (z0 || sum == '0) y = FP32_ZERO;
    else if (er <= 0)    y = '{s: x0.s, e: 8'd0,  m: 23'd0};
    else if (er >= 255)  y = '{s: x0.s, e: 8'hFF, m: 23'd0};
    else                 y = '{s: x0.s, e: 8'(er), m: sig_r[22:0]};
  end

endmodule
