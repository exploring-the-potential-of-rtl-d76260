// tb_dq_max: streams three random binary32 tensors (both signs, wide
// exponent range, some groups left empty) with random group indices and
// checks, after each tensor, the max |x| of every group through the read
// port and the tensor max against a model. `clear` between tensors must
// forget the previous tensor.
module tb_dq_max;
  import mls_pkg::fp32_t;
  localparam int GROUPS = 64, GW = 6;
  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0;
  logic [GW-1:0] in_gid = '0, rd_gid = '0;
  fp32_t x;
  logic [30:0] rd_max, tensor_max;
  int checks = 0, failures = 0;
  logic [30:0] model [GROUPS];
  logic [30:0] tmodel;

  dq_max #(.GROUPS(GROUPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 3; t++) begin
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      for (int g = 0; g < GROUPS; g++) model[g] = '0;
      tmodel = '0;
      for (int i = 0; i < 2000; i++) begin
        logic [31:0] b;
        int g;
        g = $urandom % (GROUPS - 8);            // the top 8 groups stay empty
        b = {1'($urandom), 8'(60 + $urandom % (100 - 30 * t)), 23'($urandom)};   // each tensor smaller than the last
        if (b[30:0] > model[g]) model[g] = b[30:0];
        if (b[30:0] > tmodel)   tmodel   = b[30:0];
        in_valid <= 1; in_gid <= GW'(g); x <= b;
        @(posedge clk);
      end
      in_valid <= 0;
      @(posedge clk);
      for (int g = 0; g < GROUPS; g++) begin
        rd_gid <= GW'(g);
        #1;
        checks++;
        if (rd_max !== model[g]) begin
          failures++;
          $display("FAIL tensor %0d group %0d max %h expected %h", t, g, rd_max, model[g]);
        end
        @(posedge clk);
      end
      checks++;
      if (tensor_max !== tmodel) begin failures++; $display("FAIL tensor max"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
