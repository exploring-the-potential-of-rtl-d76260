// mls_mul: low-bit multiplier of two MLS elements (the "MUL" box of each lane).
//
// Each operand is sign + <E_X,M_X> with gradual underflow. The fraction is
// {code!=0, man} (M_X+1 bits: hidden 1 for normal codes, 0 for the subnormal
// code) and the exponent code selects a left shift of max(code-1,0) places,
// 0..2^E_X-2. The product of the two scaled integers is an unsigned value of
// 2*M_X+2^(E_X+1)-2 bits (14 bits for <2,4>, as the paper computes), returned
// in two's complement with the sign s_w^s_a. Its unit is 2^(2*(E_XMIN-M_X)),
// so every product of a group shares one scale and can be summed by an
// integer accumulator. Combinational; the caller registers the result.
// The arithmetic follows the paper (fraction product plus exponent shift);
// the two's-complement output encoding is this design's choice.
module mls_mul #(
  parameter int unsigned E_X = mls_pkg::E_X,
  parameter int unsigned M_X = mls_pkg::M_X,
  localparam int unsigned IW = mls_pkg::elem_int_w(E_X, M_X),
  localparam int unsigned PW = 2 * IW + 1
) (
  input  logic           w_s,
  input  logic [E_X-1:0] w_e,
  input  logic [M_X-1:0] w_m,
  input  logic           a_s,
  input  logic [E_X-1:0] a_e,
  input  logic [M_X-1:0] a_m,
  output logic [PW-1:0]  prod     // signed product
);

  logic [IW-1:0]   w_int, a_int;
  logic [2*IW-1:0] mag;

  // Scale an element to an integer: fraction shifted by its exponent code.
  function automatic logic [IW-1:0] to_int(logic [E_X-1:0] e, logic [M_X-1:0] m);
    logic [IW-1:0] f;
    f = IW'({(e != '0), m});
    if (e != '0) f = f << (e - 1'b1);
    return f;
  endfunction

  always_comb begin
    w_int = to_int(w_e, w_m);
    a_int = to_int(a_e, a_m);
    mag   = w_int * a_int;
    prod  = (w_s ^ a_s) ? -{1'b0, mag} : {1'b0, mag};
  end

endmodule
