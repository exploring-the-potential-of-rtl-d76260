// tb_mls_train_core_lowbit: the core in the two smaller element formats
// used for the CIFAR-10 style configurations: <2,1> elements with a 16-bit
// integer accumulator and <1,1> elements with an 8-bit accumulator, both
// with <8,1> group scales and 16 lanes. Each format runs one forward
// convolution end to end in its own lowbit_layer_run instance (quantization
// of W and A, then a 24-channel 3x3 convolution in two chained passes), and
// every element, group scale and output is checked bit for bit against the
// reference model. The run also fails if a mechanism (1.5 group scale,
// subnormal or saturated element, chained pass, any S_p case) never
// occurred in a format. A watchdog ends the run after 100000 cycles.
module tb_mls_train_core_lowbit;
  logic clk = 0, rst_n = 0;
  logic done21, done11;
  int   chk21, chk11, fail21, fail11, miss21, miss11;
  int   checks, failures;

  always #5 clk = ~clk;

  lowbit_layer_run #(.EX(2), .MX(1), .ACCW(16), .TOL(0.3), .SEED(1)) run21 (
    .clk, .rst_n, .done(done21), .checks(chk21), .failures(fail21), .n_mech_missing(miss21));
  lowbit_layer_run #(.EX(1), .MX(1), .ACCW(8), .TOL(0.5), .SEED(11)) run11 (
    .clk, .rst_n, .done(done11), .checks(chk11), .failures(fail11), .n_mech_missing(miss11));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk21 + chk11 + 1, fail21 + fail11 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (done21 && done11);
    checks   = chk21 + chk11 + 2;
    failures = fail21 + fail11 + miss21 + miss11;
    if (miss21 != 0) $display("FAIL <2,1>: a mechanism never occurred");
    if (miss11 != 0) $display("FAIL <1,1>: a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
