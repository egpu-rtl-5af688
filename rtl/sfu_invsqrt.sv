// sfu_invsqrt: special function unit, FP32 inverse square root (INVSQR).
//
// The paper gives only the function.  This design takes the simplest
// pipelined form: an integer seed y0 = 0x5f3759df - (x >> 1) followed by three
// Newton-Raphson steps y' = y * (1.5 - (x/2) * y * y), each step one pipeline
// stage built from the fp32_pkg multiply and add.  The result is within a few
// units in the last place of 1/sqrt(x) for normal positive x.  Special
// inputs: +-0 and subnormals give +-inf, negative numbers and NaN give NaN,
// +inf gives +0.  The result and its register address (tag) go to the first
// lane.  Timing: input in cycle t, result in cycle t+SFU_LAT (4), one input
// per cycle.
module sfu_invsqrt
  import egpu_pkg::*;
  import fp32_pkg::*;
#(
  parameter int TAG_W = RF_AW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      x,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [31:0]      result,
  output logic [TAG_W-1:0] out_tag
);
  localparam int STEPS = 3;
  localparam logic [31:0] MAGIC    = 32'h5f37_59df;
  localparam logic [31:0] FP_HALF  = 32'h3f00_0000;
  localparam logic [31:0] FP_3HALF = 32'h3fc0_0000;

  logic [31:0]      y_q   [STEPS+1];
  logic [31:0]      hx_q  [STEPS+1];  // x/2
  logic             sp_q  [STEPS+1];  // special case: bypass Newton steps
  logic [31:0]      spv_q [STEPS+1];
  logic [TAG_W-1:0] tag_q [STEPS+1];
  logic [STEPS:0]   v_q;

  logic        special;
  logic [31:0] spval;

  always_comb begin
    special = 1'b1;
    spval   = QNAN;
    if (x[30:23] == 8'hff)       spval = (x[22:0] == 0 && !x[31]) ? FP_ZERO : QNAN;
    else if (x[30:23] == 8'h00)  spval = {x[31], 8'hff, 23'h0};
    else if (x[31])              spval = QNAN;
    else                         special = 1'b0;
  end

  function automatic logic [31:0] newton(input logic [31:0] y, input logic [31:0] hx);
    logic [31:0] t;
    t = fp32_mul(y, y);
    t = fp32_mul(hx, t);
    t = fp32_add(FP_3HALF, {~t[31], t[30:0]});
    return fp32_mul(y, t);
  endfunction

  always_ff @(posedge clk) begin
    y_q[0]   <= MAGIC - {1'b0, x[31:1]};
    hx_q[0]  <= fp32_mul(x, FP_HALF);
    sp_q[0]  <= special;
    spv_q[0] <= spval;
    tag_q[0] <= in_tag;
    for (int s = 1; s <= STEPS; s++) begin
      y_q[s]   <= newton(y_q[s-1], hx_q[s-1]);
      hx_q[s]  <= hx_q[s-1];
      sp_q[s]  <= sp_q[s-1];
      spv_q[s] <= spv_q[s-1];
      tag_q[s] <= tag_q[s-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[STEPS-1:0], in_valid};
  end

  assign out_valid = v_q[STEPS];
  assign result    = sp_q[STEPS] ? spv_q[STEPS] : y_q[STEPS];
  assign out_tag   = tag_q[STEPS];
endmodule
