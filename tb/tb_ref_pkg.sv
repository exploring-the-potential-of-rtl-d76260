// tb_ref_pkg: reference arithmetic for the testbenches, computed with
// SystemVerilog reals and independent of the RTL's integer formulations.
//  - to_fp32 / fp32_to_real: binary32 rounding (nearest-even, results below
//    the normal range flushed to zero) of a double that holds an exact value.
//  - elem_val: value of a sign + <E_X,M_X> element with gradual underflow.
//  - ref_gscale: S_g = ceil(S_r/S_t) in <E_G,1> format, exponent clipped.
//  - ref_quant: stochastic rounding of |x|/(S_t*S_g) onto the element grid.
package tb_ref_pkg;

  function automatic real pow2(int k);
    real r;
    r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp32_to_real(logic [31:0] b);
    if (b[30:23] == 8'd0) return 0.0;
    return (b[31] ? -1.0 : 1.0) * (1.0 + real'(b[22:0]) / 8388608.0) * pow2(int'(b[30:23]) - 127);
  endfunction

  function automatic logic [31:0] to_fp32(real v);
    logic [63:0] d;
    int          e;
    logic [52:0] m;
    logic [23:0] sig;
    logic [28:0] rem;
    logic        up;
    if (v == 0.0) return 32'd0;
    d   = $realtobits(v);
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b1, d[51:0]};
    sig = m[52:29];
    rem = m[28:0];
    up  = (rem > 29'h10000000) || (rem == 29'h10000000 && sig[0]);
    if (up) begin
      if (sig == 24'hFFFFFF) begin sig = 24'h800000; e++; end
      else sig = sig + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), sig[22:0]};
  endfunction

  // element value; E_XMIN = 1 - 2^ex
  function automatic real elem_val(int ex, int mx, logic s, int code, int man);
    int  emin;
    real v;
    emin = 1 - (1 << ex);
    if (code == 0) v = (real'(man) / real'(1 << mx)) * pow2(emin);
    else           v = (1.0 + real'(man) / real'(1 << mx)) * pow2(emin + code - 1);
    return s ? -v : v;
  endfunction

  // floor(log2(v)) for v > 0
  function automatic int flog2(real v);
    int k;
    k = 0;
    while (v >= 2.0) begin v = v / 2.0; k++; end
    while (v < 1.0)  begin v = v * 2.0; k--; end
    return k;
  endfunction

  // group scale: returns {e_g, m_g} for <eg,1> (mg = 0 or 1)
  function automatic void ref_gscale(input real sr, input real st, input int eg, input int mg,
                                     output int e_out, output int m_out);
    real ratio, frac, fq;
    int  ex, emax;
    emax = (1 << eg) - 1;
    if (sr == 0.0 || st == 0.0) begin e_out = emax; m_out = 0; return; end
    ratio = sr / st;
    ex    = flog2(ratio);
    frac  = ratio / pow2(ex);
    fq    = (mg == 1) ? $ceil(frac * 2.0) / 2.0 : $ceil(frac);
    if (fq >= 2.0) begin ex++; fq = 1.0; end
    m_out = (fq == 1.5) ? 1 : 0;
    if (ex > 0) begin e_out = 0; m_out = 0; end
    else if (-ex > emax) e_out = emax;
    else e_out = -ex;
  endfunction

  // element quantization: returns code and mantissa
  function automatic void ref_quant(input real xf, input int ex, input int mx, input int rbits,
                                    input int rnd, output int code, output int man);
    int  emin, kmax, u, uc, st, n;
    real v;
    emin = 1 - (1 << ex);
    kmax = (1 << ex) - 1;
    if (xf == 0.0) begin code = 0; man = 0; return; end
    u = flog2(xf);
    if (u > -1) begin code = kmax; man = (1 << mx) - 1; return; end
    uc = u;
    st = ((uc > emin) ? uc : emin) - mx;
    v  = $floor(xf * pow2(-st) * pow2(rbits));          // truncated to rbits fraction bits
    n  = int'($floor((v + real'(rnd)) / pow2(rbits)));
    // decode n on the grid of step 2^st and re-encode
    if (u < emin) begin
      code = (n >= (1 << mx)) ? 1 : 0;
      man  = n % (1 << mx);
    end else if (n >= (2 << mx)) begin
      if (u - emin + 1 < kmax) begin code = u - emin + 2; man = 0; end
      else begin code = kmax; man = (1 << mx) - 1; end
    end else begin
      code = u - emin + 1;
      man  = n - (1 << mx);
    end
  endfunction

  // scale unit: P * S_g(w) * S_g(a) * 2^(2*(E_XMIN-M_X)) as binary32 (<2,4> elements)
  function automatic logic [31:0] ref_scale(longint p, int wge, int wgm, int age, int agm);
    return to_fp32(real'(p) * (1.0 + 0.5 * wgm) * (1.0 + 0.5 * agm)
                   * pow2(-wge - age) * pow2(-14));
  endfunction

  // pairwise binary32 adder tree over 16 leaves (heap order)
  function automatic logic [31:0] ref_tree16(logic [31:0] leaves [16]);
    logic [31:0] node [32];
    for (int i = 0; i < 16; i++) node[16 + i] = leaves[i];
    for (int j = 15; j >= 1; j--)
      node[j] = to_fp32(fp32_to_real(node[2*j]) + fp32_to_real(node[2*j+1]));
    return node[1];
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    return to_fp32(fp32_to_real(a) + fp32_to_real(b));
  endfunction

endpackage
