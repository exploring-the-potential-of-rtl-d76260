// tb_mls_train_core: end-to-end run of one forward convolution,
// Conv(W, A), on the core at its default parameters (16 lanes, 64 groups,
// <2,4> elements, <8,1> group scales).
//  1. A random binary32 weight tensor W[2][24][3][3] (groups: (co,ci)) and
//     activation tensor A[24][6][6] (groups: ci, one sample) with group
//     magnitudes spread over several octaves are quantized by the dynamic
//     quantizer (statistics pass, then quantization pass with random numbers
//     for stochastic rounding). Every quantized element and group scale is
//     checked against the real-arithmetic reference and stored.
//  2. The 2 x 4 x 4 outputs of the 3x3 convolution are computed by the
//     convolution unit from the stored MLS tensors, 16 channels per pass
//     (two chained passes, the second with 8 idle lanes). Each result must
//     equal the reference pipeline bit for bit and, rescaled by
//     S_t(w)*S_t(a), must be close to the binary32 convolution of the
//     original tensors.
// Counted mechanisms (each must occur): statistics and quantization
// passes, 1.5 group scales, subnormal elements, saturated elements, chained
// passes and the three S_p mantissa cases.
module tb_mls_train_core;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int LANES = 16, GW = 6, CO = 2, C = 24, K = 3, H = 6, OH = H - K + 1;
  localparam int NPASS = (C + LANES - 1) / LANES;

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
  int n_stat = 0, n_quant = 0, n_gm1 = 0, n_sub = 0, n_sat = 0, n_chain = 0;
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

  // float tensors and their MLS images
  logic [31:0] wf [CO][C][K][K];
  logic [31:0] af [C][H][H];
  int wq_s [CO][C][K][K], wq_e [CO][C][K][K], wq_m [CO][C][K][K];
  int aq_s [C][H][H],     aq_e [C][H][H],     aq_m [C][H][H];
  int wg_e [CO][C], wg_m [CO][C], ag_e [C], ag_m [C];
  real st_w, st_a;

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
    for (int co = 0; co < CO; co++) for (int ci = 0; ci < C; ci++) begin
      int eb;
      eb = 118 + int'($urandom % 10);
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        wf[co][ci][i][j] = {1'($urandom), 8'(eb - int'($urandom % 7)), 23'($urandom)};
    end
    for (int ci = 0; ci < C; ci++) begin
      int eb;
      eb = 124 + int'($urandom % 10);
      for (int y = 0; y < H; y++) for (int x = 0; x < H; x++)
        af[ci][y][x] = {1'($urandom), 8'(eb - int'($urandom % 7)), 23'($urandom)};
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. dynamic quantization of W (groups co*C+ci) and A (groups ci)
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
    flat_x = {}; flat_g = {};
    for (int ci = 0; ci < C; ci++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      flat_x.push_back(af[ci][y][x]); flat_g.push_back(ci);
    end
    quantize();
    k = 0;
    for (int ci = 0; ci < C; ci++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      aq_s[ci][y][x] = res_s[k]; aq_e[ci][y][x] = res_e[k]; aq_m[ci][y][x] = res_m[k];
      ag_e[ci] = res_ge[k]; ag_m[ci] = res_gm[k];
      k++;
    end
    st_a = res_st;

    // 2. convolution
    for (int co = 0; co < CO; co++) for (int oy = 0; oy < OH; oy++) for (int ox = 0; ox < OH; ox++) begin
      logic [31:0] zacc;
      real zf, zabs, zgot;
      int  c_last, t0;
      zacc = 0;
      zf = 0.0; zabs = 0.0;
      for (int ps = 0; ps < NPASS; ps++) begin
        longint p [LANES];
        logic [31:0] leaf [16];
        for (int l = 0; l < LANES; l++) p[l] = 0;
        for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
          for (int l = 0; l < LANES; l++) begin
            int ci;
            ci = ps * LANES + l;
            if (ci < C) begin
              real wv, av;
              cv_w_s[l] <= 1'(wq_s[co][ci][i][j]); cv_w_e[l] <= 2'(wq_e[co][ci][i][j]); cv_w_m[l] <= 4'(wq_m[co][ci][i][j]);
              cv_a_s[l] <= 1'(aq_s[ci][oy+i][ox+j]); cv_a_e[l] <= 2'(aq_e[ci][oy+i][ox+j]); cv_a_m[l] <= 4'(aq_m[ci][oy+i][ox+j]);
              cv_w_ge[l] <= 8'(wg_e[co][ci]); cv_w_gm[l] <= 1'(wg_m[co][ci]);
              cv_a_ge[l] <= 8'(ag_e[ci]);     cv_a_gm[l] <= 1'(ag_m[ci]);
              p[l] += longint'(elem_val(2, 4, wq_s[co][ci][i][j][0], wq_e[co][ci][i][j], wq_m[co][ci][i][j])
                             * elem_val(2, 4, aq_s[ci][oy+i][ox+j][0], aq_e[ci][oy+i][ox+j], aq_m[ci][oy+i][ox+j])
                             * pow2(14));
              wv = fp32_to_real(wf[co][ci][i][j]);
              av = fp32_to_real(af[ci][oy+i][ox+j]);
              zf += wv * av;
              zabs += (wv < 0 ? -wv : wv) * (av < 0 ? -av : av);
            end else begin
              cv_w_s[l] <= 0; cv_w_e[l] <= 0; cv_w_m[l] <= 0;
              cv_a_s[l] <= 0; cv_a_e[l] <= 0; cv_a_m[l] <= 0;
              cv_w_ge[l] <= 0; cv_w_gm[l] <= 0; cv_a_ge[l] <= 0; cv_a_gm[l] <= 0;
            end
          end
          cv_valid <= 1;
          cv_first <= (i == 0 && j == 0);
          cv_last  <= (i == K - 1 && j == K - 1);
          cv_chain <= (ps != 0);
          cv_final <= (ps == NPASS - 1);
          c_last = cyc;
          @(posedge clk);
        end
        for (int l = 0; l < LANES; l++) begin
          int ci;
          ci = ps * LANES + l;
          if (ci < C) begin
            leaf[l] = ref_scale(p[l], wg_e[co][ci], wg_m[co][ci], ag_e[ci], ag_m[ci]);
            n_sp[wg_m[co][ci] + ag_m[ci]]++;
          end else leaf[l] = 0;
        end
        zacc = (ps == 0) ? ref_tree16(leaf) : ref_add(zacc, ref_tree16(leaf));
        if (ps != 0) n_chain++;
      end
      cv_valid <= 0; cv_first <= 0; cv_last <= 0;
      t0 = cyc;
      while (!cv_out_valid && cyc < t0 + 30) @(posedge clk);
      checks += 3;
      if (cyc != c_last + 4 + 4 + 1) begin failures++; $display("FAIL conv latency %0d", cyc - c_last); end
      if (cv_z !== zacc) begin
        failures++;
        $display("FAIL z[%0d][%0d][%0d] = %h expected %h", co, oy, ox, cv_z, zacc);
      end
      zgot = fp32_to_real(cv_z) * st_w * st_a;
      if (zgot - zf > 0.1 * zabs || zf - zgot > 0.1 * zabs) begin
        failures++;
        $display("FAIL z[%0d][%0d][%0d] = %g far from float conv %g", co, oy, ox, zgot, zf);
      end
    end

    checks++;
    if (n_stat == 0 || n_quant == 0 || n_gm1 == 0 || n_sub == 0 || n_sat == 0 || n_chain == 0 ||
        n_sp[0] == 0 || n_sp[1] == 0 || n_sp[2] == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("mechanisms: stat passes %0d, quant passes %0d, 1.5 group scales %0d, subnormal %0d, saturated %0d, chained %0d, S_p cases %0d/%0d/%0d",
             n_stat, n_quant, n_gm1, n_sub, n_sat, n_chain, n_sp[0], n_sp[1], n_sp[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
