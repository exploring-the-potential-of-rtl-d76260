// tb_fp_adder_tree: streams a new vector of 16 binary32 values every cycle
// into the adder tree and compares each sum with a pairwise tree of
// correctly rounded binary32 additions computed in real arithmetic. The
// inputs mix signs, exponents within a range where a double holds every
// pairwise sum exactly, zeros and exact cancellations. The sum and its tag
// must leave exactly log2(16) = 4 cycles after the vector entered.
module tb_fp_adder_tree;
  import tb_ref_pkg::*;
  import mls_pkg::fp32_t;
  localparam int LANES = 16, LOG2 = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [1:0] in_tag = '0;
  fp32_t in_z [LANES];
  logic out_valid;
  logic [1:0] out_tag;
  fp32_t sum;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] exp_q[$];
  int tag_q[$], cyc_q[$];

  fp_adder_tree #(.LANES(LANES), .TAG_W(2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e;
    int t, c;
    e = exp_q.pop_front(); t = tag_q.pop_front(); c = cyc_q.pop_front();
    checks += 3;
    if (sum !== e) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%h expected %h", sum, e);
    end
    if (out_tag !== 2'(t)) begin failures++; $display("FAIL tag"); end
    // sampled at the next edge, then LOG2 register stages
    if (cyc != c + LOG2 + 1) begin failures++; $display("FAIL latency %0d", cyc - c); end
  end

  initial begin
    logic [31:0] node [2*LANES];
    for (int i = 0; i < LANES; i++) in_z[i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < 3000; v++) begin
      for (int i = 0; i < LANES; i++) begin
        logic [31:0] b;
        b = {1'($urandom), 8'(110 + $urandom % 20), 23'($urandom)};
        if ($urandom % 10 == 0) b = 32'd0;
        if (v % 5 == 0 && i % 2 == 1) b = node[LANES + i - 1] ^ 32'h8000_0000;  // cancel
        node[LANES + i] = b;
        in_z[i] <= b;
      end
      for (int j = LANES - 1; j >= 1; j--)
        node[j] = to_fp32(fp32_to_real(node[2*j]) + fp32_to_real(node[2*j+1]));
      exp_q.push_back(node[1]);
      tag_q.push_back(v % 4);
      cyc_q.push_back(cyc);
      in_valid <= 1;
      in_tag   <= 2'(v % 4);
      @(posedge clk);
      if (v % 50 == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing sums"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
