// fp_adder_tree: inter-group floating-point adder tree.
//
// Adds the LANES binary32 values produced by the lanes' scale units. The
// tree is a binary heap of fp32_add nodes: node j (1 <= j < LANES) adds
// nodes 2j and 2j+1, the leaves LANES..2*LANES-1 are the inputs and node 1
// is the sum. Every node is registered, so the tree accepts a new vector
// every cycle and delivers its sum LOG2 = log2(LANES) cycles later. A side
// band of TAG_W bits travels with in_valid so that the caller can keep its
// own framing aligned with the data. LANES must be a power of two (unused
// lanes are fed zero). The floating-point tree follows the paper's Fig. 1(b);
// the pairwise order, the pipelining and the lane count are this design's.
module fp_adder_tree #(
  parameter int unsigned LANES = mls_pkg::LANES,
  parameter int unsigned TAG_W = 2,
  localparam int unsigned LOG2 = $clog2(LANES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [TAG_W-1:0]      in_tag,
  input  mls_pkg::fp32_t        in_z [LANES],
  output logic                  out_valid,
  output logic [TAG_W-1:0]      out_tag,
  output mls_pkg::fp32_t        sum
);
  import mls_pkg::*;

  initial begin
    assert (LANES >= 2 && (1 << LOG2) == LANES)
      else $fatal(1, "fp_adder_tree: LANES must be a power of two >= 2");
  end

  fp32_t node  [2*LANES];
  fp32_t add_y [LANES];
  logic [LOG2-1:0]       vld;
  logic [TAG_W-1:0]      tag [LOG2];

  always_comb begin
    for (int i = 0; i < LANES; i++) node[LANES + i] = in_z[i];
  end

  for (genvar j = 1; j < LANES; j++) begin : g_node
    fp32_t q;
    fp32_add u_add (.a(node[2*j]), .b(node[2*j+1]), .y(add_y[j]));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) q <= FP32_ZERO;
      else        q <= add_y[j];
    end
    assign node[j] = q;
  end
  assign node[0]  = FP32_ZERO;
  assign add_y[0] = FP32_ZERO;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 0; i < LOG2; i++) tag[i] <= '0;
    end else begin
      vld[0] <= in_valid;
      tag[0] <= in_tag;
      for (int i = 1; i < LOG2; i++) begin
        vld[i] <= vld[i-1];
        tag[i] <= tag[i-1];
      end
    end
  end

  assign out_valid = vld[LOG2-1];
  assign out_tag   = tag[LOG2-1];
  assign sum       = node[1];

endmodule
