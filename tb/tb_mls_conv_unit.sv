// tb_mls_conv_unit: 300 output elements of a 3x3 convolution, each over 1,
// 2 or 3 passes of 16 input channels, with random <2,4> operands (all
// codes, subnormals included), random <8,1> group scales, and occasional
// idle cycles between taps. Each result must equal the reference pipeline
// computed in real arithmetic: exact integer partial sums per lane, the
// group scaling rounded to binary32, a pairwise binary32 tree and a
// binary32 chaining addition. out_valid must follow the final vector's
// last tap by 4 + log2(16) cycles. Channel chaining and all three S_p
// mantissa cases must occur.
module tb_mls_conv_unit;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int LANES = 16, LOG2 = 4, KK = 9;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_chain = 0, in_final = 0;
  logic       w_s [LANES], a_s [LANES], w_gm [LANES], a_gm [LANES];
  logic [1:0] w_e [LANES], a_e [LANES];
  logic [3:0] w_m [LANES], a_m [LANES];
  logic [7:0] w_ge [LANES], a_ge [LANES];
  logic out_valid;
  fp32_t z_out;
  int checks = 0, failures = 0, cyc = 0;
  int n_chain = 0, n_sp [3] = '{0, 0, 0}, n_sub = 0;
  logic [31:0] exp_q[$];
  int          cyc_q[$];

  mls_conv_unit #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e;
    int c;
    e = exp_q.pop_front();
    c = cyc_q.pop_front();
    checks += 2;
    if (z_out !== e) begin
      failures++;
      if (failures < 10) $display("FAIL z=%h expected %h", z_out, e);
    end
    if (cyc != c + 4 + LOG2 + 1) begin
      failures++;
      if (failures < 10) $display("FAIL latency %0d", cyc - c);
    end
  end

  initial begin
    for (int l = 0; l < LANES; l++) begin
      w_s[l] = 0; a_s[l] = 0; w_e[l] = 0; a_e[l] = 0; w_m[l] = 0; a_m[l] = 0;
      w_ge[l] = 0; a_ge[l] = 0; w_gm[l] = 0; a_gm[l] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int o = 0; o < 300; o++) begin
      int npass;
      logic [31:0] zacc;
      npass = 1 + $urandom % 3;
      zacc  = 0;
      for (int ps = 0; ps < npass; ps++) begin
        longint p [LANES];
        logic [31:0] leaf [16];
        int wge [LANES], age [LANES], wgm [LANES], agm [LANES];
        for (int l = 0; l < LANES; l++) begin
          p[l] = 0;
          wge[l] = $urandom % 24; age[l] = $urandom % 24;
          wgm[l] = $urandom % 2;  agm[l] = $urandom % 2;
        end
        for (int t = 0; t < KK; t++) begin
          for (int l = 0; l < LANES; l++) begin
            int ws, we, wm, as_, ae, am;
            ws = $urandom % 2; we = $urandom % 4; wm = $urandom % 16;
            as_ = $urandom % 2; ae = $urandom % 4; am = $urandom % 16;
            if (we == 0 || ae == 0) n_sub++;
            w_s[l] <= 1'(ws); w_e[l] <= 2'(we); w_m[l] <= 4'(wm);
            a_s[l] <= 1'(as_); a_e[l] <= 2'(ae); a_m[l] <= 4'(am);
            p[l] += longint'(elem_val(2, 4, ws[0], we, wm) * elem_val(2, 4, as_[0], ae, am) * pow2(14));
            w_ge[l] <= 8'(wge[l]); a_ge[l] <= 8'(age[l]);
            w_gm[l] <= 1'(wgm[l]); a_gm[l] <= 1'(agm[l]);
          end
          in_valid <= 1;
          in_first <= (t == 0);
          in_last  <= (t == KK - 1);
          in_chain <= (ps != 0);
          in_final <= (ps == npass - 1);
          if (t == KK - 1 && ps == npass - 1) cyc_q.push_back(cyc);
          @(posedge clk);
          if ($urandom % 8 == 0) begin
            in_valid <= 0; in_first <= 0; in_last <= 0;
            @(posedge clk);
          end
        end
        for (int l = 0; l < LANES; l++) begin
          leaf[l] = ref_scale(p[l], wge[l], wgm[l], age[l], agm[l]);
          n_sp[wgm[l] + agm[l]]++;
        end
        zacc = (ps == 0) ? ref_tree16(leaf) : ref_add(zacc, ref_tree16(leaf));
        if (ps != 0) n_chain++;
      end
      exp_q.push_back(zacc);
    end
    in_valid <= 0; in_last <= 0; in_first <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    checks++;
    if (n_chain == 0 || n_sp[0] == 0 || n_sp[1] == 0 || n_sp[2] == 0 || n_sub == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("chained passes %0d, S_p cases %0d/%0d/%0d, subnormal taps %0d",
             n_chain, n_sp[0], n_sp[1], n_sp[2], n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
