// intra_acc: intra-group integer accumulator (the "ACC" box with its feedback
// adder in each lane).
//
// Sums the signed products of one group (the K*K kernel taps of one input
// channel) into the partial sum P. A product flagged in_first loads the
// register instead of adding to it, so groups follow each other without a
// bubble. When the product flagged in_last has been added, out_valid is high
// for one cycle with P on p_out; the register keeps P for exactly that cycle
// and may already load the next group's first product at the following edge.
// Timing: P of a group is valid one cycle after its last product is presented.
// The integer accumulator and its 32-bit width follow the paper; the
// first/last framing is this design's own choice. The sum wraps on overflow,
// which cannot happen at the defaults (9 products of 15 bits in 32 bits).
module intra_acc #(
  parameter int unsigned PROD_W = 15,
  parameter int unsigned ACC_W  = mls_pkg::ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [PROD_W-1:0] prod,      // signed
  output logic              out_valid,
  output logic [ACC_W-1:0]  p_out      // signed partial sum P
);

  logic [ACC_W-1:0] acc;
  logic [ACC_W-1:0] prod_ext;

  assign prod_ext = ACC_W'($signed(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) acc <= (in_first ? '0 : acc) + prod_ext;
    end
  end

  assign p_out = acc;

endmodule
