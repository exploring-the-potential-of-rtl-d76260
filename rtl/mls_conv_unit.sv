// mls_conv_unit: low-bit tensor convolution arithmetic for MLS operands.
//
// LANES lanes work in parallel, one group (one input channel ci of a K x K
// kernel window) per lane. Every cycle each lane multiplies one weight
// element by one activation element (mls_mul, registered) and adds the
// signed integer product into its intra-group accumulator (intra_acc).
// With the last tap of the groups (in_last) the lanes' partial sums P go
// to their scale units (group_scale_unit), which apply
// S_p = S_g(w) * S_g(a) by shifts and one addition and hand binary32 values
// to the floating-point adder tree (fp_adder_tree). The tree's sum is
// Z / S_t(z), the output element without its tensor-wise scale.
// When a convolution has more input channels than lanes, the channels are
// processed LANES at a time: in_chain on a group vector adds its tree sum
// to the previous one in a final binary32 accumulator, and in_final marks
// the vector that completes an output element, which then appears on
// z_out with out_valid for one cycle.
// Operands: all lanes present a tap together with in_valid; in_first marks
// the first tap of a group, in_last the last. The group scales and the
// in_chain/in_final flags are sampled with in_last.
// Timing: a new tap vector is accepted every cycle, so a K x K group takes
// K*K cycles per lane; out_valid follows the in_last cycle of the final
// vector by 4 + log2(LANES) cycles (multiplier, accumulator, scale unit,
// tree levels, output accumulator). Lanes, MUL, integer ACC, scale units
// and the floating-point adder tree follow the paper's Fig. 1(b) and
// Sec. V-B; the channel chaining, the framing and the pipelining are this
// design's own choices.
module mls_conv_unit #(
  parameter int unsigned LANES = mls_pkg::LANES,
  parameter int unsigned E_X   = mls_pkg::E_X,
  parameter int unsigned M_X   = mls_pkg::M_X,
  parameter int unsigned E_G   = mls_pkg::E_G,
  parameter int unsigned ACC_W = mls_pkg::ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic                 in_chain,
  input  logic                 in_final,
  input  logic                 w_s  [LANES],
  input  logic [E_X-1:0]       w_e  [LANES],
  input  logic [M_X-1:0]       w_m  [LANES],
  input  logic                 a_s  [LANES],
  input  logic [E_X-1:0]       a_e  [LANES],
  input  logic [M_X-1:0]       a_m  [LANES],
  input  logic [E_G-1:0]       w_ge [LANES],   // S_g(w) of each lane's group
  input  logic                 w_gm [LANES],
  input  logic [E_G-1:0]       a_ge [LANES],   // S_g(a) of each lane's group
  input  logic                 a_gm [LANES],
  output logic                 out_valid,
  output mls_pkg::fp32_t       z_out
);
  import mls_pkg::*;

  localparam int unsigned PW = 2 * elem_int_w(E_X, M_X) + 1;

  // stage 1: multiplier register
  logic          v1, first1, last1, chain1, final1;
  logic [PW-1:0] prod_c [LANES];
  logic [PW-1:0] prod1  [LANES];
  logic [E_G-1:0] wge1 [LANES], age1 [LANES], wge2 [LANES], age2 [LANES];
  logic           wgm1 [LANES], agm1 [LANES], wgm2 [LANES], agm2 [LANES];
  // stage 2: accumulators
  logic             chain2, final2;
  logic             acc_v [LANES];
  logic [ACC_W-1:0] p2    [LANES];
  // stage 3: scale units
  logic  sc_v [LANES];
  fp32_t z3   [LANES];
  logic  chain3, final3;
  // tree and output accumulator
  logic        tree_v;
  logic [1:0]  tree_tag;
  fp32_t       tree_sum, zacc, zacc_next;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mls_mul #(.E_X(E_X), .M_X(M_X)) u_mul (
      .w_s(w_s[l]), .w_e(w_e[l]), .w_m(w_m[l]),
      .a_s(a_s[l]), .a_e(a_e[l]), .a_m(a_m[l]),
      .prod(prod_c[l])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        prod1[l] <= '0;
        wge1[l] <= '0; wgm1[l] <= 1'b0; age1[l] <= '0; agm1[l] <= 1'b0;
        wge2[l] <= '0; wgm2[l] <= 1'b0; age2[l] <= '0; agm2[l] <= 1'b0;
      end else begin
        if (in_valid) prod1[l] <= prod_c[l];
        if (in_valid && in_last) begin
          wge1[l] <= w_ge[l]; wgm1[l] <= w_gm[l];
          age1[l] <= a_ge[l]; agm1[l] <= a_gm[l];
        end
        if (v1 && last1) begin
          wge2[l] <= wge1[l]; wgm2[l] <= wgm1[l];
          age2[l] <= age1[l]; agm2[l] <= agm1[l];
        end
      end
    end

    intra_acc #(.PROD_W(PW), .ACC_W(ACC_W)) u_acc (
      .clk, .rst_n,
      .in_valid (v1),
      .in_first (first1),
      .in_last  (last1),
      .prod     (prod1[l]),
      .out_valid(acc_v[l]),
      .p_out    (p2[l])
    );

    group_scale_unit #(.E_X(E_X), .M_X(M_X), .E_G(E_G), .ACC_W(ACC_W)) u_scale (
      .clk, .rst_n,
      .in_valid (acc_v[l]),
      .p_in     (p2[l]),
      .w_ge     (wge2[l]), .w_gm(wgm2[l]),
      .a_ge     (age2[l]), .a_gm(agm2[l]),
      .out_valid(sc_v[l]),
      .z_out    (z3[l])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; chain1 <= 1'b0; final1 <= 1'b0;
      chain2 <= 1'b0; final2 <= 1'b0; chain3 <= 1'b0; final3 <= 1'b0;
    end else begin
      v1     <= in_valid;
      first1 <= in_first;
      last1  <= in_last;
      if (in_valid && in_last) begin chain1 <= in_chain; final1 <= in_final; end
      if (v1 && last1)         begin chain2 <= chain1;   final2 <= final1;   end
      if (acc_v[0])            begin chain3 <= chain2;   final3 <= final2;   end
    end
  end

  fp_adder_tree #(.LANES(LANES), .TAG_W(2)) u_tree (
    .clk, .rst_n,
    .in_valid (sc_v[0]),
    .in_tag   ({chain3, final3}),
    .in_z     (z3),
    .out_valid(tree_v),
    .out_tag  (tree_tag),
    .sum      (tree_sum)
  );

  // inter-pass accumulation of channel chunks
  fp32_add u_chain_add (.a(zacc), .b(tree_sum), .y(zacc_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zacc      <= FP32_ZERO;
      out_valid <= 1'b0;
    end else begin
      out_valid <= tree_v && tree_tag[0];
      if (tree_v) zacc <= tree_tag[1] ? zacc_next : tree_sum;
    end
  end

  assign z_out = zacc;

endmodule
