// tb_mls_mul: exhaustive check of the MLS element multiplier. Every pair of
// sign/exponent/mantissa codes is applied and the two's-complement product
// is compared with the product of the element values computed in real
// arithmetic, expressed in units of 2^(2*(E_XMIN-M_X)).
module tb_mls_mul;
  import tb_ref_pkg::*;
  localparam int E_X = 2, M_X = 4;
  localparam int IW = M_X + 1 + (2**E_X) - 2;
  localparam int PW = 2*IW + 1;
  localparam int EMIN = 1 - (2**E_X);

  logic           w_s, a_s;
  logic [E_X-1:0] w_e, a_e;
  logic [M_X-1:0] w_m, a_m;
  logic [PW-1:0]  prod;
  int checks = 0, failures = 0;
  int maxmag = 0;

  mls_mul #(.E_X(E_X), .M_X(M_X)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expv;
    int  expi;
    for (int ws = 0; ws < 2; ws++)
    for (int we = 0; we < (1 << E_X); we++)
    for (int wm = 0; wm < (1 << M_X); wm++)
    for (int as = 0; as < 2; as++)
    for (int ae = 0; ae < (1 << E_X); ae++)
    for (int am = 0; am < (1 << M_X); am++) begin
      w_s = ws[0]; w_e = E_X'(we); w_m = M_X'(wm);
      a_s = as[0]; a_e = E_X'(ae); a_m = M_X'(am);
      #1;
      expv = elem_val(E_X, M_X, ws[0], we, wm) * elem_val(E_X, M_X, as[0], ae, am)
             * pow2(-2 * (EMIN - M_X));
      expi = int'(expv);
      if (expi > maxmag) maxmag = expi;
      checks++;
      if (int'($signed(prod)) !== expi) begin
        failures++;
        if (failures < 10) $display("FAIL w=%0d/%0d/%0d a=%0d/%0d/%0d prod=%0d exp=%0d",
                                    ws, we, wm, as, ae, am, $signed(prod), expi);
      end
    end
    // the largest product must need exactly 2M+2^(E+1)-2 = 14 magnitude bits
    checks++;
    if ($clog2(maxmag + 1) != 2*M_X + (2**(E_X+1)) - 2) begin
      failures++;
      $display("FAIL product range %0d bits", $clog2(maxmag + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
