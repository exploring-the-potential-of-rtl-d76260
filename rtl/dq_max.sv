// dq_max: group-wise and tensor-wise maximum of |x| for dynamic quantization.
//
// First pass of the FP-to-MLS conversion (GroupMax and Max of the
// quantization algorithm). Elements of a binary32 tensor arrive one per
// cycle with the index of their group. Because the magnitude bits of a
// non-negative binary32 number order like an unsigned integer, the maximum
// is kept with plain integer compares on x[30:0]. A per-group valid bit lets
// `clear` start a new tensor in one cycle; a group never written reads as 0.
// Interface: clear has priority over in_valid; rd_gid/rd_max is a
// combinational read port; tensor_max is the running maximum over all
// groups. Timing: an element is included from the cycle after it is
// presented. The statistics are the paper's; the storage (a register array
// of GROUPS entries) and the framing are this design's own choices.
// The sign bit x[31] is deliberately unread (only |x| matters), which lint
// reports as an unused bit.
module dq_max #(
  parameter int unsigned GROUPS = mls_pkg::GROUPS,
  localparam int unsigned GID_W = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  input  logic [GID_W-1:0] in_gid,
  input  mls_pkg::fp32_t   x,
  input  logic [GID_W-1:0] rd_gid,
  output logic [30:0]      rd_max,      // |x| max of group rd_gid (binary32 without sign)
  output logic [30:0]      tensor_max   // |x| max of the tensor
);

  logic [30:0]       gmax [GROUPS];
  logic [GROUPS-1:0] gvld;
  logic [30:0]       mag;

  assign mag = {x.e, x.m};   // the sign bit x.s is not needed for |x|

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gvld       <= '0;
      tensor_max <= '0;
    end else if (clear) begin
      gvld       <= '0;
      tensor_max <= '0;
    end else if (in_valid) begin
      gvld[in_gid] <= 1'b1;
      if (mag > tensor_max) tensor_max <= mag;
    end
  end

  // Data array without reset: entries are qualified by gvld.
  always_ff @(posedge clk) begin
    if (!clear && in_valid && (!gvld[in_gid] || mag > gmax[in_gid]))
      gmax[in_gid] <= mag;
  end

  assign rd_max = gvld[rd_gid] ? gmax[rd_gid] : '0;

endmodule
