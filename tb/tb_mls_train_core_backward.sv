// tb_mls_train_core_backward: the two backward convolutions of training,
// the weight gradient dW = Conv(E, A) and the error propagation
// dA = Conv(E, W), on the core at its default parameters. The same
// convolution unit serves them because errors, activations and weights share
// one format; only the grouping and the tap order differ from the forward
// pass.
//  1. A random binary32 error tensor E[16][2][4][4] (N x C grouping: group
//     n*2+co) and activation tensor A[16][2][6][6] (group 32+n*2+ci) are
//     quantized by the dynamic quantizer, each element and group scale
//     checked against the reference.
//  2. Each of the 2 x 2 x 3 x 3 gradient elements dW[co][ci][ky][kx] =
//     sum_n sum_(y,x) E[n][co][y][x] * A[n][ci][y+ky][x+kx] is one pass of
//     the unit: lane n takes sample n, and its group is the 16 products over
//     the 4 x 4 error map (a 16-tap group, where the forward pass has 9), so
//     the integer accumulator sums S_g(E)-and-S_g(A)-scaled products of one
//     sample and the adder tree sums over the batch. Each result must equal
//     the reference pipeline bit for bit, arrive 4 + log2(16) cycles after the
//     last tap and, rescaled by S_t(E)*S_t(A), lie within 10% of
//     sum |e||a| of the binary32 gradient.
//  3. A random weight tensor W[2][2][3][3] (groups co*2+ci) is quantized and
//     the error-propagation convolution dA = Conv(E, W) is computed for
//     samples 0 and 1: dA[n][ci][y][x] = sum_co sum_(ky,kx)
//     E[n][co][y-ky][x-kx] * W[co][ci][ky][kx] over the full 6 x 6 map.
//     Lane co takes output channel co (group (n,co) of E times group (co,ci)
//     of W); taps that fall outside the error map are fed as zero elements.
//     Checked like step 2.
// Counted mechanisms (each must occur): statistics and quantization passes,
// 1.5 group scales, subnormal and saturated elements, 16-tap groups,
// zero-padded taps and the three S_p mantissa cases.
module tb_mls_train_core_backward;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int LANES = 16, GW = 6, N = 16, CO = 2, C = 2, K = 3, OH = 4, H = OH + K - 1;
  localparam int TAPS = OH * OH;

  logic clk = 0, rst_n = 0;
  logic dq_clear = 0, dq_phase = 0, dq_in_valid = 0;
  logic [GW-1:0] dq_in_gid = '0;
  fp32_t dq_x;
  logic [7:0] dq_rnd = '0;
  logic dq_out_valid;
  logic [GW-1:0] dq_out_gid;
  logic dq_q_s;
  logic [1:0] dq_q_e;
  logic [3:0] dq_q_m;
  logic [7:0] dq_g_e;
  logic dq_g_m;
  fp32_t dq_s_t;
  logic cv_valid = 0, cv_first = 0, cv_last = 0, cv_chain = 0, cv_final = 0;
  logic       cv_w_s [LANES], cv_a_s [LANES], cv_w_gm [LANES], cv_a_gm [LANES];
  logic [1:0] cv_w_e [LANES], cv_a_e [LANES];
  logic [3:0] cv_w_m [LANES], cv_a_m [LANES];
  logic [7:0] cv_w_ge [LANES], cv_a_ge [LANES];
  logic cv_out_valid;
  fp32_t cv_z;

  mls_train_core dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_stat = 0, n_quant = 0, n_gm1 = 0, n_sub = 0, n_sat = 0, n_long = 0, n_pad = 0;
  int n_sp [3] = '{0, 0, 0};

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ef [N][CO][OH][OH];
  logic [31:0] af [N][C][H][H];
  int eq_s [N][CO][OH][OH], eq_e [N][CO][OH][OH], eq_m [N][CO][OH][OH];
  int aq_s [N][C][H][H],    aq_e [N][C][H][H],    aq_m [N][C][H][H];
  int eg_e [N][CO], eg_m [N][CO], ag_e [N][C], ag_m [N][C];
  logic [31:0] wf [CO][C][K][K];
  int wq_s [CO][C][K][K], wq_e [CO][C][K][K], wq_m [CO][C][K][K];
  int wg_e [CO][C], wg_m [CO][C];
  real st_e, st_a, st_w;

  // Quantize a tensor given as a flat list of (gid, value); returns the
  // MLS image in the same order.
  logic [31:0] flat_x [$];
  int          flat_g [$];
  int          res_s [$], res_e [$], res_m [$], res_ge [$], res_gm [$];
  real         res_st;

  task automatic quantize();
    int  n, got, cnt;
    real srm [64];
    real stm;
    int  rnds [$];
    n = flat_x.size();
    res_s = {}; res_e = {}; res_m = {}; res_ge = {}; res_gm = {};
    stm = 0.0;
    for (int g = 0; g < 64; g++) srm[g] = 0.0;
    for (int i = 0; i < n; i++) begin
      real a;
      a = fp32_to_real({1'b0, flat_x[i][30:0]});
      if (a > srm[flat_g[i]]) srm[flat_g[i]] = a;
      if (a > stm) stm = a;
    end
    dq_clear <= 1;
    @(posedge clk);
    dq_clear <= 0;
    dq_phase <= 0;
    n_stat++;
    for (int i = 0; i < n; i++) begin
      dq_in_valid <= 1; dq_in_gid <= GW'(flat_g[i]); dq_x <= flat_x[i];
      @(posedge clk);
    end
    dq_phase <= 1;
    n_quant++;
    got = 0;
    cnt = 0;
    while (got < n) begin
      if (cnt < n) begin
        int r;
        r = $urandom % 256;
        rnds.push_back(r);
        dq_in_valid <= 1; dq_in_gid <= GW'(flat_g[cnt]); dq_x <= flat_x[cnt]; dq_rnd <= 8'(r);
        cnt++;
      end else begin
        dq_in_valid <= 0;
      end
      @(posedge clk);
      #1;
      if (dq_out_valid) begin
        int  ee, em, code, man;
        real xf, sg;
        ref_gscale(srm[flat_g[got]], stm, 8, 1, ee, em);
        sg = (1.0 + 0.5 * em) * pow2(-ee);
        xf = fp32_to_real({1'b0, flat_x[got][30:0]}) / (stm * sg);
        ref_quant(xf, 2, 4, 8, rnds[got], code, man);
        checks++;
        if (dq_q_s !== flat_x[got][31] || dq_q_e !== 2'(code) || dq_q_m !== 4'(man) ||
            dq_g_e !== 8'(ee) || dq_g_m !== 1'(em) || fp32_to_real(dq_s_t) != stm ||
            dq_out_gid !== GW'(flat_g[got])) begin
          failures++;
          if (failures < 10) $display("FAIL quantized element %0d", got);
        end
        if (code == 0 && man != 0) n_sub++;
        if (xf >= 1.0) n_sat++;
        if (em == 1) n_gm1++;
        res_s.push_back(int'(dq_q_s)); res_e.push_back(int'(dq_q_e)); res_m.push_back(int'(dq_q_m));
        res_ge.push_back(int'(dq_g_e)); res_gm.push_back(int'(dq_g_m));
        got++;
      end
    end
    dq_in_valid <= 0;
    res_st = fp32_to_real(dq_s_t);
    @(posedge clk);
  endtask

  initial begin
    int k;
    for (int l = 0; l < LANES; l++) begin
      cv_w_s[l] = 0; cv_a_s[l] = 0; cv_w_e[l] = 0; cv_a_e[l] = 0; cv_w_m[l] = 0; cv_a_m[l] = 0;
      cv_w_ge[l] = 0; cv_a_ge[l] = 0; cv_w_gm[l] = 0; cv_a_gm[l] = 0;
    end
    dq_x = '0;
    // tensors: group magnitudes differ by up to 2^9
    for (int n = 0; n < N; n++) for (int co = 0; co < CO; co++) begin
      int eb;
      eb = 110 + int'($urandom % 10);
      for (int y = 0; y < OH; y++) for (int x = 0; x < OH; x++)
        ef[n][co][y][x] = {1'($urandom), 8'(eb - int'($urandom % 7)), 23'($urandom)};
    end
    for (int n = 0; n < N; n++) for (int ci = 0; ci < C; ci++) begin
      int eb;
      eb = 124 + int'($urandom % 10);
      for (int y = 0; y < H; y++) for (int x = 0; x < H; x++)
        af[n][ci][y][x] = {1'($urandom), 8'(eb - int'($urandom % 7)), 23'($urandom)};
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. dynamic quantization of E (groups n*CO+co) and A (groups 32+n*C+ci)
    flat_x = {}; flat_g = {};
    for (int n = 0; n < N; n++) for (int co = 0; co < CO; co++)
      for (int y = 0; y < OH; y++) for (int x = 0; x < OH; x++) begin
        flat_x.push_back(ef[n][co][y][x]); flat_g.push_back(n * CO + co);
      end
    quantize();
    k = 0;
    for (int n = 0; n < N; n++) for (int co = 0; co < CO; co++)
      for (int y = 0; y < OH; y++) for (int x = 0; x < OH; x++) begin
        eq_s[n][co][y][x] = res_s[k]; eq_e[n][co][y][x] = res_e[k]; eq_m[n][co][y][x] = res_m[k];
        eg_e[n][co] = res_ge[k]; eg_m[n][co] = res_gm[k];
        k++;
      end
    st_e = res_st;
    flat_x = {}; flat_g = {};
    for (int n = 0; n < N; n++) for (int ci = 0; ci < C; ci++)
      for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
        flat_x.push_back(af[n][ci][y][x]); flat_g.push_back(32 + n * C + ci);
      end
    quantize();
    k = 0;
    for (int n = 0; n < N; n++) for (int ci = 0; ci < C; ci++)
      for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
        aq_s[n][ci][y][x] = res_s[k]; aq_e[n][ci][y][x] = res_e[k]; aq_m[n][ci][y][x] = res_m[k];
        ag_e[n][ci] = res_ge[k]; ag_m[n][ci] = res_gm[k];
        k++;
      end
    st_a = res_st;

    // 2. weight gradient: one pass per element, lane = sample
    for (int co = 0; co < CO; co++) for (int ci = 0; ci < C; ci++)
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
      logic [31:0] zref;
      real zf, zabs, zgot;
      int  c_last, t0;
      longint p [LANES];
      logic [31:0] leaf [16];
      zf = 0.0; zabs = 0.0;
      for (int l = 0; l < LANES; l++) p[l] = 0;
      for (int y = 0; y < OH; y++) for (int x = 0; x < OH; x++) begin
        for (int n = 0; n < N; n++) begin
          real ev, av;
          cv_w_s[n] <= 1'(eq_s[n][co][y][x]); cv_w_e[n] <= 2'(eq_e[n][co][y][x]); cv_w_m[n] <= 4'(eq_m[n][co][y][x]);
          cv_a_s[n] <= 1'(aq_s[n][ci][y+ky][x+kx]); cv_a_e[n] <= 2'(aq_e[n][ci][y+ky][x+kx]); cv_a_m[n] <= 4'(aq_m[n][ci][y+ky][x+kx]);
          cv_w_ge[n] <= 8'(eg_e[n][co]); cv_w_gm[n] <= 1'(eg_m[n][co]);
          cv_a_ge[n] <= 8'(ag_e[n][ci]); cv_a_gm[n] <= 1'(ag_m[n][ci]);
          p[n] += longint'(elem_val(2, 4, eq_s[n][co][y][x][0], eq_e[n][co][y][x], eq_m[n][co][y][x])
                         * elem_val(2, 4, aq_s[n][ci][y+ky][x+kx][0], aq_e[n][ci][y+ky][x+kx], aq_m[n][ci][y+ky][x+kx])
                         * pow2(14));
          ev = fp32_to_real(ef[n][co][y][x]);
          av = fp32_to_real(af[n][ci][y+ky][x+kx]);
          zf += ev * av;
          zabs += (ev < 0 ? -ev : ev) * (av < 0 ? -av : av);
        end
        cv_valid <= 1;
        cv_first <= (y == 0 && x == 0);
        cv_last  <= (y == OH - 1 && x == OH - 1);
        cv_chain <= 0;
        cv_final <= 1;
        c_last = cyc;
        @(posedge clk);
      end
      n_long++;
      for (int n = 0; n < N; n++) begin
        leaf[n] = ref_scale(p[n], eg_e[n][co], eg_m[n][co], ag_e[n][ci], ag_m[n][ci]);
        n_sp[eg_m[n][co] + ag_m[n][ci]]++;
      end
      zref = ref_tree16(leaf);
      cv_valid <= 0; cv_first <= 0; cv_last <= 0;
      t0 = cyc;
      while (!cv_out_valid && cyc < t0 + 30) @(posedge clk);
      checks += 3;
      if (cyc != c_last + 4 + 4 + 1) begin failures++; $display("FAIL conv latency %0d", cyc - c_last); end
      if (cv_z !== zref) begin
        failures++;
        $display("FAIL dW[%0d][%0d][%0d][%0d] = %h expected %h", co, ci, ky, kx, cv_z, zref);
      end
      zgot = fp32_to_real(cv_z) * st_e * st_a;
      if (zgot - zf > 0.1 * zabs || zf - zgot > 0.1 * zabs) begin
        failures++;
        $display("FAIL dW[%0d][%0d][%0d][%0d] = %g far from float gradient %g", co, ci, ky, kx, zgot, zf);
      end
    end

    // 3. error propagation dA = Conv(E, W), lane = output channel co
    for (int co = 0; co < CO; co++) for (int ci = 0; ci < C; ci++) begin
      int eb;
      eb = 118 + int'($urandom % 10);
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        wf[co][ci][i][j] = {1'($urandom), 8'(eb - int'($urandom % 7)), 23'($urandom)};
    end
    flat_x = {}; flat_g = {};
    for (int co = 0; co < CO; co++) for (int ci = 0; ci < C; ci++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        flat_x.push_back(wf[co][ci][i][j]); flat_g.push_back(co * C + ci);
      end
    quantize();
    k = 0;
    for (int co = 0; co < CO; co++) for (int ci = 0; ci < C; ci++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        wq_s[co][ci][i][j] = res_s[k]; wq_e[co][ci][i][j] = res_e[k]; wq_m[co][ci][i][j] = res_m[k];
        wg_e[co][ci] = res_ge[k]; wg_m[co][ci] = res_gm[k];
        k++;
      end
    st_w = res_st;
    for (int l = 0; l < LANES; l++) begin
      cv_w_s[l] <= 0; cv_w_e[l] <= 0; cv_w_m[l] <= 0; cv_a_s[l] <= 0; cv_a_e[l] <= 0; cv_a_m[l] <= 0;
      cv_w_ge[l] <= 0; cv_w_gm[l] <= 0; cv_a_ge[l] <= 0; cv_a_gm[l] <= 0;
    end
    for (int n = 0; n < 2; n++) for (int ci = 0; ci < C; ci++)
      for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      logic [31:0] zref;
      real zf, zabs, zgot;
      int  c_last, t0;
      longint p [LANES];
      logic [31:0] leaf [16];
      zf = 0.0; zabs = 0.0;
      for (int l = 0; l < LANES; l++) p[l] = 0;
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
        for (int co = 0; co < CO; co++) begin
          int ey, ex;
          ey = y - ky; ex = x - kx;
          cv_a_s[co] <= 1'(wq_s[co][ci][ky][kx]); cv_a_e[co] <= 2'(wq_e[co][ci][ky][kx]); cv_a_m[co] <= 4'(wq_m[co][ci][ky][kx]);
          cv_w_ge[co] <= 8'(eg_e[n][co]); cv_w_gm[co] <= 1'(eg_m[n][co]);
          cv_a_ge[co] <= 8'(wg_e[co][ci]); cv_a_gm[co] <= 1'(wg_m[co][ci]);
          if (ey >= 0 && ey < OH && ex >= 0 && ex < OH) begin
            real ev, wv;
            cv_w_s[co] <= 1'(eq_s[n][co][ey][ex]); cv_w_e[co] <= 2'(eq_e[n][co][ey][ex]); cv_w_m[co] <= 4'(eq_m[n][co][ey][ex]);
            p[co] += longint'(elem_val(2, 4, eq_s[n][co][ey][ex][0], eq_e[n][co][ey][ex], eq_m[n][co][ey][ex])
                            * elem_val(2, 4, wq_s[co][ci][ky][kx][0], wq_e[co][ci][ky][kx], wq_m[co][ci][ky][kx])
                            * pow2(14));
            ev = fp32_to_real(ef[n][co][ey][ex]);
            wv = fp32_to_real(wf[co][ci][ky][kx]);
            zf += ev * wv;
            zabs += (ev < 0 ? -ev : ev) * (wv < 0 ? -wv : wv);
          end else begin
            cv_w_s[co] <= 0; cv_w_e[co] <= 0; cv_w_m[co] <= 0;
            n_pad++;
          end
        end
        cv_valid <= 1;
        cv_first <= (ky == 0 && kx == 0);
        cv_last  <= (ky == K - 1 && kx == K - 1);
        cv_chain <= 0;
        cv_final <= 1;
        c_last = cyc;
        @(posedge clk);
      end
      for (int l = 0; l < LANES; l++) leaf[l] = 0;
      for (int co = 0; co < CO; co++) begin
        leaf[co] = ref_scale(p[co], eg_e[n][co], eg_m[n][co], wg_e[co][ci], wg_m[co][ci]);
        n_sp[eg_m[n][co] + wg_m[co][ci]]++;
      end
      zref = ref_tree16(leaf);
      cv_valid <= 0; cv_first <= 0; cv_last <= 0;
      t0 = cyc;
      while (!cv_out_valid && cyc < t0 + 30) @(posedge clk);
      checks += 3;
      if (cyc != c_last + 4 + 4 + 1) begin failures++; $display("FAIL conv latency %0d", cyc - c_last); end
      if (cv_z !== zref) begin
        failures++;
        $display("FAIL dA[%0d][%0d][%0d][%0d] = %h expected %h", n, ci, y, x, cv_z, zref);
      end
      zgot = fp32_to_real(cv_z) * st_e * st_w;
      if (zgot - zf > 0.1 * zabs || zf - zgot > 0.1 * zabs) begin
        failures++;
        $display("FAIL dA[%0d][%0d][%0d][%0d] = %g far from float error %g", n, ci, y, x, zgot, zf);
      end
    end

    checks++;
    if (n_stat == 0 || n_quant == 0 || n_gm1 == 0 || n_sub == 0 || n_sat == 0 || n_long == 0 || n_pad == 0 ||
        n_sp[0] == 0 || n_sp[1] == 0 || n_sp[2] == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("mechanisms: stat passes %0d, quant passes %0d, 1.5 group scales %0d, subnormal %0d, saturated %0d, 16-tap group passes %0d, zero-padded taps %0d, S_p cases %0d/%0d/%0d",
             n_stat, n_quant, n_gm1, n_sub, n_sat, n_long, n_pad, n_sp[0], n_sp[1], n_sp[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
