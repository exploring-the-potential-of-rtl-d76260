// mls_pkg: shared constants, types and helper functions of the multi-level
// scaling (MLS) low-bit convolution datapath.
//
// Number formats. An MLS tensor element is a sign bit plus an unsigned
// <E_X,M_X> minifloat (E_X exponent bits, M_X mantissa bits) with IEEE-style
// gradual underflow: exponent code 0 is the subnormal code, codes 1..2^E_X-1
// are the binades 2^(E_XMIN) .. 2^-1 where E_XMIN = 1-2^E_X. Scaled to an
// integer, an element is {code!=0, man} << max(code-1,0) in units of
// 2^(E_XMIN-M_X). The group-wise scale S_g is <E_G,M_G> with M_G <= 1 and
// value (1+man/2)*2^-exp. Floating-point values are IEEE-754 binary32.
// Defaults follow the paper's main ImageNet configuration: <2,4> elements,
// <8,1> group scales, a 32-bit integer accumulator and 3x3 kernels. The
// number of parallel lanes is not given by the paper; 16 is this design's
// own choice.
package mls_pkg;

  parameter int unsigned E_X     = 2;   // element exponent bits
  parameter int unsigned M_X     = 4;   // element mantissa bits
  parameter int unsigned E_G     = 8;   // group-scale exponent bits
  parameter int unsigned M_G     = 1;   // group-scale mantissa bits (0 or 1)
  parameter int unsigned ACC_W   = 32;  // intra-group accumulator width
  parameter int unsigned KSIZE   = 3;   // kernel height = width
  parameter int unsigned LANES   = 16;  // parallel groups (assumed)
  parameter int unsigned RBITS   = 8;   // bits of the stochastic-rounding random number (assumed)
  parameter int unsigned GROUPS  = 64;  // groups per tensor held by the quantizer (assumed)

  // Width of an element scaled to an integer: (M_X+1) fraction bits shifted
  // by up to 2^E_X-2 places.
  function automatic int unsigned elem_int_w(int unsigned e, int unsigned m);
    return m + 1 + (2**e) - 2;
  endfunction

  // IEEE-754 binary32, the format of Conv outputs and of the tensor scale S_t.
  typedef struct packed {
    logic       s;
    logic [7:0] e;
    logic [22:0] m;
  } fp32_t;

  localparam fp32_t FP32_ZERO = '{s: 1'b0, e: 8'd0, m: 23'd0};

  // Index of the most significant set bit of a 64-bit value (0 when zero).
  function automatic int unsigned msb64(logic [63:0] v);
    int unsigned r;
    r = 0;
    for (int i = 0; i < 64; i++) if (v[i]) r = i;
    return r;
  endfunction

endpackage
