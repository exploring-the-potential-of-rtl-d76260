// tb_dq_group_scale: random pairs S_r <= S_t plus directed cases (equal,
// ratios exactly 0.75 and 0.375 and one ulp above them, just above 1 and just below 2,
// zero group, exponent below the clip range) are applied. The <8,1> scale
// must equal ceil(S_r/S_t) on the 1-bit-mantissa grid computed with real
// division, and must never be below S_r/S_t unless clipped.
module tb_dq_group_scale;
  import tb_ref_pkg::*;
  localparam int E_G = 8, M_G = 1;
  logic [30:0] s_r, s_t;
  logic [E_G-1:0] e_g;
  logic m_g;
  int checks = 0, failures = 0, n_m1 = 0, n_clip = 0;

  dq_group_scale #(.E_G(E_G), .M_G(M_G)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [30:0] r, logic [30:0] t);
    int ee, em;
    real sr, st, sg;
    s_r = r; s_t = t;
    #1;
    sr = fp32_to_real({1'b0, r});
    st = fp32_to_real({1'b0, t});
    ref_gscale(sr, st, E_G, M_G, ee, em);
    checks++;
    if (e_g !== E_G'(ee) || m_g !== 1'(em)) begin
      failures++;
      if (failures < 10) $display("FAIL sr=%h st=%h got %0d/%0d expected %0d/%0d", r, t, e_g, m_g, ee, em);
    end
    sg = (1.0 + 0.5 * m_g) * pow2(-int'(e_g));
    if (m_g) n_m1++;
    if (e_g == 8'hFF) n_clip++;
    if (sr != 0.0 && e_g != 8'hFF) begin
      checks++;
      if (sg < sr / st || sg >= 2.0 * sr / st) begin
        failures++; $display("FAIL S_g %f outside [ratio, 2 ratio)", sg);
      end
    end
  endtask

  initial begin
    logic [30:0] a, b;
    check({8'd130, 23'd0}, {8'd130, 23'd0});                 // equal
    check({8'd130, 23'h400000}, {8'd130, 23'd0});            // ratio 1.5 * 2^0 -> clipped to 0
    check({8'd129, 23'h400000}, {8'd130, 23'd0});            // ratio 0.75 exactly
    check({8'd129, 23'h400001}, {8'd130, 23'd0});            // 0.75 + 1 ulp -> 1.0
    check({8'd129, 23'h100000}, {8'd130, 23'h400000});       // 1.125/1.5: ratio 0.375 exactly
    check({8'd129, 23'h100001}, {8'd130, 23'h400000});       // 0.375 + 1 ulp -> 0.5
    check({8'd129, 23'h000001}, {8'd130, 23'd0});            // just above 0.5
    check({8'd129, 23'h7FFFFF}, {8'd130, 23'd0});            // just below 1
    check({8'd129, 23'h7FFFFF}, {8'd130, 23'h7FFFFF});
    check(31'd0, {8'd130, 23'd0});                           // empty group
    check({8'd1, 23'd5}, {8'd254, 23'd0});                   // below 2^-255: clipped
    for (int i = 0; i < 100000; i++) begin
      a = {8'(1 + $urandom % 254), 23'($urandom)};
      b = {8'(1 + $urandom % 254), 23'($urandom)};
      if (a > b) check(b, a); else check(a, b);
    end
    checks++;
    if (n_m1 == 0 || n_clip == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
