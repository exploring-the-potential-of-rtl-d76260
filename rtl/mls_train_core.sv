// mls_train_core: low-bit training datapath of one convolution layer.
//
// Holds the two hardware parts of the MLS training flow: the dynamic
// quantizer, which turns a binary32 tensor (activations, weights or
// errors) into an MLS tensor (sign, <E_X,M_X> element, <E_G,M_G> group
// scale, binary32 tensor scale), and the MLS convolution unit, which
// multiplies and accumulates two MLS tensors and returns binary32 results
// for the floating-point operations that follow (batch normalization,
// ReLU, weight update). The same unit serves all three convolutions of
// training, Conv(W,A), Conv(E,A) and Conv(E,W), because weights,
// activations and errors share one format. The tensor buffers between the
// two parts and the floating-point operations are outside this design, so
// the quantizer's input and output and the convolution unit's operands and
// result are ports of this module. Timing is that of the two parts:
// quantized elements one cycle after input, convolution results
// 4 + log2(LANES) cycles after the last tap.
module mls_train_core #(
  parameter int unsigned LANES  = mls_pkg::LANES,
  parameter int unsigned E_X    = mls_pkg::E_X,
  parameter int unsigned M_X    = mls_pkg::M_X,
  parameter int unsigned E_G    = mls_pkg::E_G,
  parameter int unsigned M_G    = mls_pkg::M_G,
  parameter int unsigned ACC_W  = mls_pkg::ACC_W,
  parameter int unsigned RBITS  = mls_pkg::RBITS,
  parameter int unsigned GROUPS = mls_pkg::GROUPS,
  localparam int unsigned GID_W = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // dynamic quantizer: binary32 in, MLS out
  input  logic                 dq_clear,
  input  logic                 dq_phase,
  input  logic                 dq_in_valid,
  input  logic [GID_W-1:0]     dq_in_gid,
  input  mls_pkg::fp32_t       dq_x,
  input  logic [RBITS-1:0]     dq_rnd,
  output logic                 dq_out_valid,
  output logic [GID_W-1:0]     dq_out_gid,
  output logic                 dq_q_s,
  output logic [E_X-1:0]       dq_q_e,
  output logic [M_X-1:0]       dq_q_m,
  output logic [E_G-1:0]       dq_g_e,
  output logic                 dq_g_m,
  output mls_pkg::fp32_t       dq_s_t,
  // convolution unit: MLS operands in, binary32 out
  input  logic                 cv_valid,
  input  logic                 cv_first,
  input  logic                 cv_last,
  input  logic                 cv_chain,
  input  logic                 cv_final,
  input  logic                 cv_w_s  [LANES],
  input  logic [E_X-1:0]       cv_w_e  [LANES],
  input  logic [M_X-1:0]       cv_w_m  [LANES],
  input  logic                 cv_a_s  [LANES],
  input  logic [E_X-1:0]       cv_a_e  [LANES],
  input  logic [M_X-1:0]       cv_a_m  [LANES],
  input  logic [E_G-1:0]       cv_w_ge [LANES],
  input  logic                 cv_w_gm [LANES],
  input  logic [E_G-1:0]       cv_a_ge [LANES],
  input  logic                 cv_a_gm [LANES],
  output logic                 cv_out_valid,
  output mls_pkg::fp32_t       cv_z
);

  dynamic_quantizer #(
    .E_X(E_X), .M_X(M_X), .E_G(E_G), .M_G(M_G), .RBITS(RBITS), .GROUPS(GROUPS)
  ) u_dq (
    .clk, .rst_n,
    .clear    (dq_clear),
    .phase    (dq_phase),
    .in_valid (dq_in_valid),
    .in_gid   (dq_in_gid),
    .x        (dq_x),
    .rnd      (dq_rnd),
    .out_valid(dq_out_valid),
    .out_gid  (dq_out_gid),
    .q_s      (dq_q_s),
    .q_e      (dq_q_e),
    .q_m      (dq_q_m),
    .g_e      (dq_g_e),
    .g_m      (dq_g_m),
    .s_t      (dq_s_t)
  );

  mls_conv_unit #(
    .LANES(LANES), .E_X(E_X), .M_X(M_X), .E_G(E_G), .ACC_W(ACC_W)
  ) u_conv (
    .clk, .rst_n,
    .in_valid (cv_valid),
    .in_first (cv_first),
    .in_last  (cv_last),
    .in_chain (cv_chain),
    .in_final (cv_final),
    .w_s (cv_w_s),  .w_e (cv_w_e),  .w_m (cv_w_m),
    .a_s (cv_a_s),  .a_e (cv_a_e),  .a_m (cv_a_m),
    .w_ge(cv_w_ge), .w_gm(cv_w_gm),
    .a_ge(cv_a_ge), .a_gm(cv_a_gm),
    .out_valid(cv_out_valid),
    .z_out    (cv_z)
  );

endmodule
