// lowbit_layer_run: one end-to-end forward convolution Conv(W, A) on an
// mls_train_core built for a smaller element format, used by
// tb_mls_train_core_lowbit. Parameters EX, MX and ACCW set the element
// format and the integer accumulator width; everything else is at the
// default (16 lanes, 64 groups, <8,1> group scales, 8-bit random numbers).
// It quantizes a random W[2][24][3][3] (groups (co,ci)) and A[24][6][6]
// (groups ci) with the core's quantizer, checks every element and group
// scale against the real-arithmetic reference, then computes the 2 x 4 x 4
// outputs with the convolution unit in two chained passes of 16 channels
// and compares each bit for bit with the reference pipeline, checks the
// 4 + log2(16) cycle latency, and checks that the rescaled result lies
// within TOL * sum|w||a| of the binary32 convolution of the original
// tensors. TOL is loose because a 1-bit mantissa with stochastic rounding
// has a large error per element. Interface: starts after rst_n rises,
// raises done when finished; checks, failures and the mechanism counts
// (statistics and quantization passes, 1.5 group scales, subnormal and
// saturated elements, chained passes, the three S_p cases) are outputs.
// SEED selects the random stimulus.
module lowbit_layer_run #(
  parameter int  EX   = 2,
  parameter int  MX   = 1,
  parameter int  ACCW = 16,
  parameter real TOL  = 0.3,
  parameter int  SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_mech_missing
);
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int LANES = 16, GW = 6, CO = 2, C = 24, K = 3, H = 6, OH = H - K + 1;
  localparam int NPASS = (C + LANES - 1) / LANES;
  localparam int EMIN  = 1 - (1 << EX);
  localparam int PSH   = 2 * (MX - EMIN);   // product unit is 2^-PSH

  logic dq_clear = 0, dq_phase = 0, dq_in_valid = 0;
  logic [GW-1:0] dq_in_gid = '0;
  fp32_t dq_x;
  logic [7:0] dq_rnd = '0;
  logic dq_out_valid;
  logic [GW-1:0] dq_out_gid;
  logic dq_q_s;
  logic [EX-1:0] dq_q_e;
  logic [MX-1:0] dq_q_m;
  logic [7:0] dq_g_e;
  logic dq_g_m;
  fp32_t dq_s_t;
  logic cv_valid = 0, cv_first = 0, cv_last = 0, cv_chain = 0, cv_final = 0;
  logic          cv_w_s [LANES], cv_a_s [LANES], cv_w_gm [LANES], cv_a_gm [LANES];
  logic [EX-1:0] cv_w_e [LANES], cv_a_e [LANES];
  logic [MX-1:0] cv_w_m [LANES], cv_a_m [LANES];
  logic [7:0]    cv_w_ge [LANES], cv_a_ge [LANES];
  logic cv_out_valid;
  fp32_t cv_z;

  mls_train_core #(.E_X(EX), .M_X(MX), .ACC_W(ACCW)) dut (.*);

  int cyc = 0;
  int n_stat = 0, n_quant = 0, n_gm1 = 0, n_sub = 0, n_sat = 0, n_chain = 0;
  int n_sp [3] = '{0, 0, 0};
  initial begin done = 0; checks = 0; failures = 0; n_mech_missing = 0; end

  always @(posedge clk) cyc <= cyc + 1;

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
        ref_quant(xf, EX, MX, 8, rnds[got], code, man);
        checks++;
        if (dq_q_s !== flat_x[got][31] || dq_q_e !== EX'(code) || dq_q_m !== MX'(man) ||
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
    void'($urandom(SEED));
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
    @(posedge rst_n);
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
              cv_w_s[l] <= 1'(wq_s[co][ci][i][j]); cv_w_e[l] <= EX'(wq_e[co][ci][i][j]); cv_w_m[l] <= MX'(wq_m[co][ci][i][j]);
              cv_a_s[l] <= 1'(aq_s[ci][oy+i][ox+j]); cv_a_e[l] <= EX'(aq_e[ci][oy+i][ox+j]); cv_a_m[l] <= MX'(aq_m[ci][oy+i][ox+j]);
              cv_w_ge[l] <= 8'(wg_e[co][ci]); cv_w_gm[l] <= 1'(wg_m[co][ci]);
              cv_a_ge[l] <= 8'(ag_e[ci]);     cv_a_gm[l] <= 1'(ag_m[ci]);
              p[l] += longint'(elem_val(EX, MX, wq_s[co][ci][i][j][0], wq_e[co][ci][i][j], wq_m[co][ci][i][j])
                             * elem_val(EX, MX, aq_s[ci][oy+i][ox+j][0], aq_e[ci][oy+i][ox+j], aq_m[ci][oy+i][ox+j])
                             * pow2(PSH));
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
            leaf[l] = to_fp32(real'(p[l]) * (1.0 + 0.5 * wg_m[co][ci]) * (1.0 + 0.5 * ag_m[ci])
                              * pow2(-wg_e[co][ci] - ag_e[ci]) * pow2(-PSH));
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
      if (zgot - zf > TOL * zabs || zf - zgot > TOL * zabs) begin
        failures++;
        $display("FAIL z[%0d][%0d][%0d] = %g far from float conv %g", co, oy, ox, zgot, zf);
      end
    end

    if (n_stat == 0 || n_quant == 0 || n_gm1 == 0 || n_sub == 0 || n_sat == 0 || n_chain == 0 ||
        n_sp[0] == 0 || n_sp[1] == 0 || n_sp[2] == 0) begin
      n_mech_missing = 1;
    end
    $display("<%0d,%0d> acc %0d bits: stat passes %0d, quant passes %0d, 1.5 group scales %0d, subnormal %0d, saturated %0d, chained %0d, S_p cases %0d/%0d/%0d",
             EX, MX, ACCW, n_stat, n_quant, n_gm1, n_sub, n_sat, n_chain, n_sp[0], n_sp[1], n_sp[2]);
    done = 1;
  end
endmodule
