// tb_intra_acc: random groups of 1..9 signed products, presented back to
// back, are summed by the accumulator. Each partial sum is compared with an
// integer model, and out_valid must rise exactly one cycle after the last
// product of its group and nowhere else.
module tb_intra_acc;
  localparam int PW = 15, AW = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [PW-1:0] prod = '0;
  logic out_valid;
  logic [AW-1:0] p_out;
  int checks = 0, failures = 0;
  int exp_q[$];
  int cyc = 0, last_cyc[$];

  intra_acc #(.PROD_W(PW), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int e, lc;
    checks += 2;
    e  = exp_q.pop_front();
    lc = last_cyc.pop_front();
    if ($signed(p_out) !== e) begin
      failures++;
      $display("FAIL P=%0d expected %0d", $signed(p_out), e);
    end
    if (cyc != lc + 2) begin   // sampled at the next edge, visible one edge later
      failures++;
      $display("FAIL latency: last at %0d, valid at %0d", lc, cyc);
    end
  end

  initial begin
    int len, sum, v, gap;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < 500; g++) begin
      len = 1 + ($urandom % 9);
      sum = 0;
      for (int i = 0; i < len; i++) begin
        v = int'($urandom % (1 << 15)) - (1 << 14);
        if (g % 7 == 0) v = -(1 << 14) + 1;      // extreme negative products
        sum += v;
        in_valid <= 1; in_first <= (i == 0); in_last <= (i == len - 1);
        prod <= PW'(v);
        if (i == len - 1) begin exp_q.push_back(sum); last_cyc.push_back(cyc); end
        @(posedge clk);
        gap = $urandom % 4;
        if (gap == 0) begin
          in_valid <= 0; in_first <= 0; in_last <= 0;
          @(posedge clk);
        end
      end
    end
    in_valid <= 0; in_last <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d sums missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
