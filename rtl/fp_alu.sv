// fp_alu: the SP's FP32 arithmetic unit (ADD, SUB, MUL).
//
// Following the paper, the unit is one multiply-add datapath, r = a*m + c,
// made into an adder by an input multiplexer: ADD and SUB set m = 1.0 and
// c = +b or -b, MUL sets m = b and c = 0.  The product is rounded before the
// add (the DSP Block's multiply-add mode is not fused).  Rounding and special
// values follow fp32_pkg.  Timing: operands presented with valid in cycle t
// give the result with valid in cycle t+ALU_LAT (4): a product stage, a sum
// stage and two further registers that bring the unit to the pipe depth the
// INT ALU needs.  Throughput is one operation per cycle.
module fp_alu
  import egpu_pkg::*;
  import fp32_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  opcode_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] result
);
  logic [31:0] m_sel, c_sel;
  logic [31:0] prod_q, c_q, sum_q;
  logic [31:0] dly_q [ALU_LAT-2];
  logic [ALU_LAT-1:0] v_q;

  // input multiplexer that turns the multiply-add into an adder
  always_comb begin
    m_sel = (op == OP_MUL) ? b : FP_ONE;
    unique case (op)
      OP_MUL:  c_sel = FP_ZERO;
      OP_SUB:  c_sel = {~b[31], b[30:0]};
      default: c_sel = b;
    endcase
  end

  always_ff @(posedge clk) begin
    prod_q <= fp32_mul(a, m_sel);
    c_q    <= c_sel;
    sum_q  <= fp32_add(prod_q, c_q);
    dly_q[0] <= sum_q;
    for (int i = 1; i < ALU_LAT - 2; i++) dly_q[i] <= dly_q[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[ALU_LAT-2:0], in_valid};
  end

  assign result    = dly_q[ALU_LAT-3];
  assign out_valid = v_q[ALU_LAT-1];
endmodule
