// dq_group_scale: group-wise scaling factor S_g of one group.
//
// Computes S_g = ceil(S_r / S_t) in the <E_G,M_G> format (M_G = 0 or 1),
// where S_r is the group's max |x| and S_t the tensor's max |x|, both
// binary32. No divider is needed: with significands f_r, f_t in [1,2) and
// exponent difference d, the quotient f_r/f_t lies in (1/2, 2), so its
// exponent and its 1-bit ceiling follow from two integer compares
// (f_r >= f_t, and 2 f_r <= 3 f_t or 4 f_r <= 3 f_t for the 1.5 step).
// A ceiling that reaches 2.0 moves to the next exponent with mantissa 0.
// The exponent is clipped to [1-2^E_G, 0] and returned negated, e_g in
// [0, 2^E_G-1], as in the format S_g = (1+m_g/2) * 2^-e_g. A zero group
// gets the smallest scale. Combinational.
// The algorithm (exponent/fraction split, clip, ceiling) is the paper's;
// the compare-based evaluation is this design's way of doing it.
module dq_group_scale #(
  parameter int unsigned E_G = mls_pkg::E_G,
  parameter int unsigned M_G = mls_pkg::M_G
) (
  input  logic [30:0]    s_r,    // group max |x|, binary32 without sign
  input  logic [30:0]    s_t,    // tensor max |x|
  output logic [E_G-1:0] e_g,
  output logic           m_g
);

  localparam int EMAX = (2**E_G) - 1;

  initial assert (M_G <= 1) else $fatal(1, "dq_group_scale: M_G must be 0 or 1");

  always_comb begin
    logic [26:0] fr, ft;
    int          d, ex;
    logic        m;

    fr = {4'b0001, s_r[22:0]};
    ft = {4'b0001, s_t[22:0]};
    d  = int'(s_r[30:23]) - int'(s_t[30:23]);
    if (fr == ft) begin
      ex = d;      m = 1'b0;
    end else if (fr > ft) begin
      if (M_G == 1 && (fr << 1) <= (ft << 1) + ft) begin ex = d;     m = 1'b1; end
      else                                         begin ex = d + 1; m = 1'b0; end
    end else begin
      if (M_G == 1 && (fr << 2) <= (ft << 1) + ft) begin ex = d - 1; m = 1'b1; end
      else                                         begin ex = d;     m = 1'b0; end
    end
    if (s_r[30:23] == 8'd0 || s_t[30:23] == 8'd0) begin
      e_g = E_G'(EMAX); m_g = 1'b0;          // empty group
    end else if (ex > 0) begin
      e_g = '0;         m_g = 1'b0;
    end else if (-ex > EMAX) begin
      e_g = E_G'(EMAX); m_g = m;
    end else begin
      e_g = E_G'(-ex);  m_g = m;
    end
  end

endmodule
