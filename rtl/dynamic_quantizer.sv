// dynamic_quantizer: FP-to-MLS conversion of one tensor ("Q" in the
// training flow).
//
// Works in two passes over the same binary32 tensor, streamed one element
// per cycle with its group index (e.g. the (n,c) pair for N x C grouping).
// Pass 1 (phase = 0) updates dq_max, which holds every group's max |x|
// (S_r) and the tensor's max |x| (S_t). Pass 2 (phase = 1) looks up S_r of
// the element's group, derives the <E_G,M_G> group scale S_g with
// dq_group_scale and quantizes the element with dq_element_quant, using the
// caller's random number for stochastic rounding. Each quantized element
// leaves one cycle after it entered, together with its group index, its
// group's S_g and the tensor scale S_t, so a buffer can store the complete
// MLS tensor. `clear` starts a new tensor. The two-pass order and the three
// scaling levels are the paper's; streaming one element per cycle, the
// phase input and the output framing are this design's own choices.
module dynamic_quantizer #(
  parameter int unsigned E_X    = mls_pkg::E_X,
  parameter int unsigned M_X    = mls_pkg::M_X,
  parameter int unsigned E_G    = mls_pkg::E_G,
  parameter int unsigned M_G    = mls_pkg::M_G,
  parameter int unsigned RBITS  = mls_pkg::RBITS,
  parameter int unsigned GROUPS = mls_pkg::GROUPS,
  localparam int unsigned GID_W = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             phase,     // 0: statistics pass, 1: quantization pass
  input  logic             in_valid,
  input  logic [GID_W-1:0] in_gid,
  input  mls_pkg::fp32_t   x,
  input  logic [RBITS-1:0] rnd,
  output logic             out_valid,
  output logic [GID_W-1:0] out_gid,
  output logic             q_s,
  output logic [E_X-1:0]   q_e,
  output logic [M_X-1:0]   q_m,
  output logic [E_G-1:0]   g_e,       // S_g exponent (value 2^-g_e)
  output logic             g_m,       // S_g mantissa bit
  output mls_pkg::fp32_t   s_t        // tensor scale S_t
);
  import mls_pkg::*;

  logic [30:0]    s_r, t_max;
  logic [E_G-1:0] ge_c;
  logic           gm_c;
  logic           qs_c;
  logic [E_X-1:0] qe_c;
  logic [M_X-1:0] qm_c;

  dq_max #(.GROUPS(GROUPS)) u_max (
    .clk, .rst_n, .clear,
    .in_valid  (in_valid && !phase),
    .in_gid,
    .x,
    .rd_gid    (in_gid),
    .rd_max    (s_r),
    .tensor_max(t_max)
  );

  dq_group_scale #(.E_G(E_G), .M_G(M_G)) u_gs (
    .s_r, .s_t(t_max), .e_g(ge_c), .m_g(gm_c)
  );

  dq_element_quant #(.E_X(E_X), .M_X(M_X), .E_G(E_G), .RBITS(RBITS)) u_eq (
    .x, .s_t(t_max), .e_g(ge_c), .m_g(gm_c), .rnd,
    .q_s(qs_c), .q_e(qe_c), .q_m(qm_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_gid   <= '0;
      q_s       <= 1'b0;
      q_e       <= '0;
      q_m       <= '0;
      g_e       <= '0;
      g_m       <= 1'b0;
    end else begin
      out_valid <= in_valid && phase && !clear;
      if (in_valid && phase) begin
        out_gid <= in_gid;
        q_s     <= qs_c;
        q_e     <= qe_c;
        q_m     <= qm_c;
        g_e     <= ge_c;
        g_m     <= gm_c;
      end
    end
  end

  assign s_t = '{s: 1'b0, e: t_max[30:23], m: t_max[22:0]};

endmodule
