// group_scale_unit: inter-group scaling of one partial sum (the "Scale Unit"
// of each lane).
//
// The product of the two group-wise scales S_g(w) and S_g(a), each <E_G,1>,
// is S_p = (1+m_w/2)(1+m_a/2) * 2^-(e_w+e_a), i.e. a factor of 1, 1.5 or 2.25
// times a power of two. Following the paper, it is applied with shifts and at
// most one addition: V = 4P (m = 00), 4P+2P (01 or 10) or 8P+P (11), with the
// power of two 2^-(e_w+e_a+2) carried as an exponent. Because the following
// adder tree is floating point, the unit then turns V into an IEEE binary32
// value: a leading-one search, exponent = msb - e_w - e_a + LSB_EXP + 127 and
// a round-to-nearest-even of the dropped bits. LSB_EXP is the weight of the
// accumulator LSB, 2*(E_XMIN-M_X), minus 2 for the shift above.
// Results below the binary32 normal range are flushed to a zero of the same sign; the unscaled
// result never overflows. The tensor-wise scale S_t(z) is not applied, as
// the paper allows (it is folded into the next layer).
// Timing: registered output, one cycle after in_valid.
// The shift-and-add scaling is the paper's; the integer-to-float conversion,
// its rounding and the flush to zero are this design's own choices.
// Lint reports the top bits of `shifted` and bit 23 of sig_r as unread:
// after the normalising shift only the low 24 bits can be non-zero, and
// bit 23 is the hidden bit, which the binary32 encoding drops.
module group_scale_unit #(
  parameter int unsigned E_X   = mls_pkg::E_X,
  parameter int unsigned M_X   = mls_pkg::M_X,
  parameter int unsigned E_G   = mls_pkg::E_G,
  parameter int unsigned ACC_W = mls_pkg::ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [ACC_W-1:0]    p_in,      // signed partial sum P
  input  logic [E_G-1:0]      w_ge,      // S_g(w) exponent (value 2^-e)
  input  logic                w_gm,      // S_g(w) mantissa bit
  input  logic [E_G-1:0]      a_ge,      // S_g(a) exponent
  input  logic                a_gm,      // S_g(a) mantissa bit
  output logic                out_valid,
  output mls_pkg::fp32_t      z_out
);
  import mls_pkg::*;

  localparam int E_XMIN  = 1 - (2**E_X);
  localparam int LSB_EXP = 2 * (E_XMIN - int'(M_X)) - 2;
  localparam int VW      = ACC_W + 4;

  logic [VW-1:0] p_ext, v, mag;
  logic          neg;
  fp32_t         z_c;

  always_comb begin
    int unsigned k;
    int          bexp;
    logic [VW-1:0] shifted, rem_mask, rem, half;   // shifted: only its low 24 bits are non-zero
    logic [23:0]   sig, sig_r;
    logic [24:0]   sig_inc;
    logic          rnd_up;
    int            bexp_r;

    p_ext = VW'($signed(p_in));
    unique case ({w_gm, a_gm})
      2'b00:   v = p_ext << 2;
      2'b01,
      2'b10:   v = (p_ext << 2) + (p_ext << 1);
      default: v = (p_ext << 3) + p_ext;
    endcase
    neg = v[VW-1];
    mag = neg ? -v : v;

    k        = msb64(64'(mag));
    shifted  = '0;
    rem_mask = '0;
    rem      = '0;
    half     = '0;
    rnd_up   = 1'b0;
    if (k <= 23) begin
      sig = 24'(mag << (23 - k));
    end else begin
      shifted  = mag >> (k - 23);
      rem_mask = (VW'(1) << (k - 23)) - 1'b1;
      rem      = mag & rem_mask;
      half     = VW'(1) << (k - 24);
      sig      = 24'(shifted);
      rnd_up   = (rem > half) || ((rem == half) && sig[0]);
    end
    bexp    = int'(k) + LSB_EXP - int'(w_ge) - int'(a_ge) + 127;
    sig_inc = {1'b0, sig} + 25'(rnd_up);
    // a carry out of the significand moves to the next binade
    sig_r   = sig_inc[24] ? 24'h800000 : sig_inc[23:0];
    bexp_r  = sig_inc[24] ? bexp + 1 : bexp;
    if (mag == '0)         z_c = FP32_ZERO;
    else if (bexp_r <= 0)  z_c = '{s: neg, e: 8'd0, m: 23'd0};   // flushed, sign kept
    else                          z_c = '{s: neg, e: 8'(bexp_r), m: sig_r[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      z_out     <= FP32_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) z_out <= z_c;
    end
  end

endmodule
