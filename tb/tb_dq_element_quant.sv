// tb_dq_element_quant: random binary32 elements, tensor scales, <8,1>
// group scales and random numbers are applied. The output code must equal
// the stochastic rounding of |x|/(S_t*S_g) onto the <2,4> grid with
// gradual underflow, computed in real arithmetic; the sign passes through.
// Coverage counts subnormal results, carries into the next binade and
// saturation. A second part quantizes fixed values many times with fresh
// random numbers: the mean of the quantized values must be within 1% of
// the input (stochastic rounding is unbiased).
module tb_dq_element_quant;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int E_X = 2, M_X = 4, E_G = 8, RB = 8;
  fp32_t x;
  logic [30:0] s_t;
  logic [E_G-1:0] e_g;
  logic m_g;
  logic [RB-1:0] rnd;
  logic q_s;
  logic [E_X-1:0] q_e;
  logic [M_X-1:0] q_m;
  int checks = 0, failures = 0, n_sub = 0, n_carry = 0, n_sat = 0, n_zero = 0;

  dq_element_quant #(.E_X(E_X), .M_X(M_X), .E_G(E_G), .RBITS(RB)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [31:0] xb, logic [30:0] tb, int ge, int gm, int r);
    real xf, sg;
    int  code, man;
    x = xb; s_t = tb; e_g = E_G'(ge); m_g = 1'(gm); rnd = RB'(r);
    #1;
    sg = (1.0 + 0.5 * gm) * pow2(-ge);
    xf = (xb[30:23] == 0) ? 0.0 : fp32_to_real({1'b0, xb[30:0]}) / (fp32_to_real({1'b0, tb}) * sg);
    ref_quant(xf, E_X, M_X, RB, r, code, man);
    checks++;
    if (q_s !== xb[31] || q_e !== E_X'(code) || q_m !== M_X'(man)) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h st=%h g=%0d/%0d r=%0d xf=%g got %0d/%0d/%0d exp %0d/%0d",
                                  xb, tb, ge, gm, r, xf, q_s, q_e, q_m, code, man);
    end
    if (xf > 0.0 && xf < 0.125) n_sub++;
    if (xf >= 1.0) n_sat++;
    if (xf == 0.0) n_zero++;
    if (xf > 0.0 && xf < 0.5 && code > 0 && man == 0 &&
        xf < elem_val(E_X, M_X, 0, code, 0) && xf >= 0.125) n_carry++;
  endtask

  initial begin
    logic [31:0] xb;
    logic [30:0] tb;
    int ge, k;
    apply(32'h0, {8'd130, 23'd0}, 3, 0, 7);
    for (int i = 0; i < 200000; i++) begin
      tb = {8'(100 + $urandom % 50), 23'($urandom)};
      ge = $urandom % 12;
      k  = $urandom % 12;                          // how far below the group max
      xb = {1'($urandom), 8'(int'(tb[30:23]) - ge - k + 1), 23'($urandom)};
      if (i % 50 == 0) xb = {1'($urandom), 8'(int'(tb[30:23]) - ge), 23'h7FFFF0 + 23'($urandom % 16)};
      apply(xb, tb, ge, $urandom % 2, $urandom % (1 << RB));
    end
    checks++;
    if (n_sub == 0 || n_carry == 0 || n_sat == 0 || n_zero == 0) begin
      failures++; $display("FAIL coverage sub=%0d carry=%0d sat=%0d zero=%0d", n_sub, n_carry, n_sat, n_zero);
    end
    $display("coverage: subnormal %0d, binade carry %0d, saturated %0d", n_sub, n_carry, n_sat);
    // unbiasedness of stochastic rounding
    for (int v = 0; v < 4; v++) begin
      real target, mean;
      target = 0.0;
      mean   = 0.0;
      xb = {1'b0, 8'(127 - 2 - v), 23'h1A2B3C};          // values between grid points
      for (int i = 0; i < 4000; i++) begin
        x = xb; s_t = {8'd127, 23'd0}; e_g = '0; m_g = 0; rnd = RB'($urandom);
        #1;
        mean += elem_val(E_X, M_X, 0, q_e, q_m);
      end
      mean   = mean / 4000.0;
      target = fp32_to_real(xb);
      checks++;
      if (mean - target > 0.01 * target || target - mean > 0.01 * target) begin
        failures++; $display("FAIL stochastic rounding biased: mean %g target %g", mean, target);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
