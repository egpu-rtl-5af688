// dot_product: FP32 dot product / reduction across one wavefront.
//
// For the DOT instruction the core multiplies the 16 lanes' Ra and Rb values
// and adds the 16 products in a balanced tree (16 multiplies and 15 adds, the
// 31 operations per instruction the paper counts).  For SUM the multiplier
// operand is forced to 1.0, so the result is the sum of the lanes' Ra values;
// the paper names SUM a reduction without saying how Rb enters, and this
// choice is this design's.  Lanes outside the active wavefront width
// contribute zero.  The result goes, with its register address (tag), to the
// first lane.  Tree order: level 1 adds lanes (0,1),(2,3)...; each level adds
// neighbouring pairs.  Every operation rounds (fp32_pkg).  Timing: inputs in
// cycle t, result in cycle t+DOT_LAT (5); one wavefront per cycle.
module dot_product
  import egpu_pkg::*;
  import fp32_pkg::*;
#(
  parameter int N     = 16,
  parameter int TAG_W = RF_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              sum_mode,
  input  logic [N-1:0]      lane_en,
  input  logic [31:0]       a [N],
  input  logic [31:0]       b [N],
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [31:0]       result,
  output logic [TAG_W-1:0]  out_tag
);
  localparam int LEVELS = $clog2(N);

  // tree[0] holds the products, tree[l] the N>>l partial sums of level l
  logic [31:0]      tree [LEVELS+1][N];
  logic [LEVELS:0]  v_q;
  logic [TAG_W-1:0] tag_q [LEVELS+1];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      tree[0][i] <= lane_en[i] ? fp32_mul(a[i], sum_mode ? FP_ONE : b[i]) : FP_ZERO;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (N >> l); i++)
        tree[l][i] <= fp32_add(tree[l-1][2*i], tree[l-1][2*i+1]);
    tag_q[0] <= in_tag;
    for (int l = 1; l <= LEVELS; l++) tag_q[l] <= tag_q[l-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LEVELS-1:0], in_valid};
  end

  assign out_valid = v_q[LEVELS];
  assign result    = tree[LEVELS][0];
  assign out_tag   = tag_q[LEVELS];

  initial assert (LEVELS + 1 == DOT_LAT || N != LANES)
    else $error("dot_product latency does not match DOT_LAT");
endmodule
