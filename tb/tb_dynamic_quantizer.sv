// tb_dynamic_quantizer: two random binary32 tensors of 8 groups x 24
// elements, with group magnitudes spread over several octaves, go through
// the statistics pass and the quantization pass. For every output the
// tensor scale must be the tensor's max |x|, the group scale must be
// ceil(S_r/S_t) on the <8,1> grid, and the element must be the stochastic
// rounding of |x|/(S_t*S_g), all computed in real arithmetic from the
// inputs. Each output must leave one cycle after its input, in order.
module tb_dynamic_quantizer;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int GROUPS = 64, GW = 6, NG = 8, NE = 24, RB = 8;
  logic clk = 0, rst_n = 0;
  logic clear = 0, phase = 0, in_valid = 0;
  logic [GW-1:0] in_gid = '0;
  fp32_t x;
  logic [RB-1:0] rnd = '0;
  logic out_valid;
  logic [GW-1:0] out_gid;
  logic q_s;
  logic [1:0] q_e;
  logic [3:0] q_m;
  logic [7:0] g_e;
  logic g_m;
  fp32_t s_t;
  int checks = 0, failures = 0, n_out = 0, n_gm1 = 0;
  logic [31:0] data [NG][NE];
  int          rnds [NG][NE];
  typedef struct { int g; int i; int c; } idx_t;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  idx_t exp_q[$];

  dynamic_quantizer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real sr [NG];
  real st;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      idx_t id;
      int   ee, em, code, man;
      real  xf, sg;
      id = exp_q.pop_front();
      n_out++;
      ref_gscale(sr[id.g], st, 8, 1, ee, em);
      sg = (1.0 + 0.5 * em) * pow2(-ee);
      xf = fp32_to_real({1'b0, data[id.g][id.i][30:0]}) / (st * sg);
      ref_quant(xf, 2, 4, RB, rnds[id.g][id.i], code, man);
      if (em == 1) n_gm1++;
      checks += 5;
      // presented after edge c, sampled at edge c+1, registered output read at c+2
      if (cyc != id.c + 2) begin failures++; $display("FAIL latency %0d", cyc - id.c); end
      if (fp32_to_real(s_t) != st) begin failures++; $display("FAIL S_t"); end
      if (out_gid !== GW'(id.g)) begin failures++; $display("FAIL gid"); end
      if (g_e !== 8'(ee) || g_m !== 1'(em)) begin
        failures++; $display("FAIL group %0d scale %0d/%0d expected %0d/%0d", id.g, g_e, g_m, ee, em);
      end
      if (q_s !== data[id.g][id.i][31] || q_e !== 2'(code) || q_m !== 4'(man)) begin
        failures++; $display("FAIL element %0d/%0d", id.g, id.i);
      end
    end
  end

  initial begin
    x = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 2; t++) begin
      // build tensor and its reference maxima
      st = 0.0;
      for (int g = 0; g < NG; g++) begin
        int ebase;
        ebase = 120 + int'($urandom % 12);
        sr[g] = 0.0;
        for (int i = 0; i < NE; i++) begin
          real a;
          data[g][i] = {1'($urandom), 8'(ebase - int'($urandom % 6)), 23'($urandom)};
          rnds[g][i] = $urandom % (1 << RB);
          a = fp32_to_real({1'b0, data[g][i][30:0]});
          if (a > sr[g]) sr[g] = a;
        end
        if (sr[g] > st) st = sr[g];
      end
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      // pass 1: statistics
      phase <= 0;
      for (int i = 0; i < NE; i++) for (int g = 0; g < NG; g++) begin
        in_valid <= 1; in_gid <= GW'(g); x <= data[g][i];
        @(posedge clk);
      end
      // pass 2: quantization
      phase <= 1;
      for (int g = 0; g < NG; g++) for (int i = 0; i < NE; i++) begin
        idx_t id;
        id.g = g; id.i = i; id.c = cyc;
        exp_q.push_back(id);
        in_valid <= 1; in_gid <= GW'(g); x <= data[g][i]; rnd <= RB'(rnds[g][i]);
        @(posedge clk);
      end
      in_valid <= 0;
      repeat (3) @(posedge clk);
    end
    checks += 2;
    if (n_out != 2 * NG * NE) begin failures++; $display("FAIL %0d outputs", n_out); end
    if (n_gm1 == 0) begin failures++; $display("FAIL no 1.5 group scale seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
