// tb_group_scale_unit: random partial sums P (all magnitudes, both signs,
// zero) and random <8,1> weight and activation group scales. The binary32
// output must equal P * S_g(w) * S_g(a) * 2^(2*(E_XMIN-M_X)) rounded to
// nearest-even (flushed to zero below the normal range), computed in real
// arithmetic, one cycle after in_valid. All three mantissa cases of S_p are
// counted.
module tb_group_scale_unit;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int E_X = 2, M_X = 4, E_G = 8, AW = 32;
  localparam int EMIN = 1 - (2**E_X);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [AW-1:0] p_in = '0;
  logic [E_G-1:0] w_ge = '0, a_ge = '0;
  logic w_gm = 0, a_gm = 0;
  logic out_valid;
  fp32_t z_out;
  int checks = 0, failures = 0;
  int n_case [3] = '{0, 0, 0};
  int n_flush = 0, n_round = 0;

  group_scale_unit #(.E_X(E_X), .M_X(M_X), .E_G(E_G), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  p, sh;
    real v;
    logic [31:0] e;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 20000; i++) begin
      sh = $urandom % 32;
      p  = int'($urandom) >>> sh;
      if (i % 97 == 0) p = 0;
      if (i % 101 == 0) p = 32'h8000_0000;
      in_valid <= 1;
      p_in <= p;
      w_ge <= (i % 3 == 0) ? E_G'($urandom) : E_G'($urandom % 40);
      a_ge <= (i % 3 == 0) ? E_G'($urandom) : E_G'($urandom % 40);
      w_gm <= $urandom; a_gm <= $urandom;
      @(posedge clk);
      in_valid <= 0;
      #1;
      checks += 2;
      if (!out_valid) begin failures++; $display("FAIL out_valid missing"); end
      v = real'(p) * (1.0 + 0.5 * w_gm) * (1.0 + 0.5 * a_gm)
          * pow2(-int'(w_ge) - int'(a_ge)) * pow2(2 * (EMIN - M_X));
      e = to_fp32(v);
      n_case[int'(w_gm) + int'(a_gm)]++;
      if (e[30:23] == 0 && p != 0) n_flush++;
      if (z_out !== e) begin
        failures++;
        if (failures < 10) $display("FAIL P=%0d ge=%0d/%0d gm=%0d/%0d z=%h exp=%h",
                                    p, w_ge, a_ge, w_gm, a_gm, z_out, e);
      end
      @(posedge clk);
      #1;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    end
    checks++;
    if (n_case[0] == 0 || n_case[1] == 0 || n_case[2] == 0 || n_flush == 0) begin
      failures++;
      $display("FAIL coverage %0d %0d %0d flush %0d", n_case[0], n_case[1], n_case[2], n_flush);
    end
    $display("S_p cases 1/1.5/2.25: %0d %0d %0d, flushed: %0d", n_case[0], n_case[1], n_case[2], n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
