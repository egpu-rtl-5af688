// int_alu: the SP's 32-bit integer unit.
//
// Functions (paper): ADD, SUB, a 16x16 multiply with a 32-bit product, AND,
// OR, XOR, NOT, LSL and LSR, with the same pipe depth as the FP ALU.  As the
// paper describes, the add/sub is a carry-select adder spread over two
// pipeline stages: stage 1 adds the low 16 bits and both candidate sums of the
// high 16 bits (carry-in 0 and 1), stage 2 selects the high half with the low
// half's carry.  Choices of this design: the Type field makes MUL signed for
// INT32 and unsigned for UINT32 (on the low 16 bits of each operand) and LSR
// arithmetic for INT32 and logical for UINT32; shift amounts use b[4:0].
// Timing: result in cycle t+ALU_LAT (4) for operands in cycle t, one
// operation per cycle.
module int_alu
  import egpu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  opcode_e     op,
  input  num_type_e   typ,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] result
);
  logic [31:0] bb;
  logic        cin;
  logic [16:0] lo_s;
  logic [15:0] hi_s0, hi_s1;

  // stage 1 registers
  logic        s1_add;
  logic [16:0] s1_lo;
  logic [15:0] s1_hi0, s1_hi1;
  logic [31:0] s1_other;
  // stage 2 and delay registers
  logic [31:0] s2_res;
  logic [31:0] dly_q [ALU_LAT-2];
  logic [ALU_LAT-1:0] v_q;
  logic [31:0] other;

  always_comb begin
    bb    = (op == OP_SUB) ? ~b : b;
    cin   = (op == OP_SUB);
    lo_s  = {1'b0, a[15:0]} + {1'b0, bb[15:0]} + 17'(cin);
    hi_s0 = a[31:16] + bb[31:16];
    hi_s1 = a[31:16] + bb[31:16] + 16'd1;
    unique case (op)
      OP_MUL:  other = (typ == T_INT32) ? 32'($signed(a[15:0]) * $signed(b[15:0]))
                                        : 32'(a[15:0] * b[15:0]);
      OP_AND:  other = a & b;
      OP_OR:   other = a | b;
      OP_XOR:  other = a ^ b;
      OP_NOT:  other = ~a;
      OP_LSL:  other = a << b[4:0];
      OP_LSR:  other = (typ == T_INT32) ? 32'($signed(a) >>> b[4:0]) : (a >> b[4:0]);
      default: other = 32'h0;
    endcase
  end

  always_ff @(posedge clk) begin
    s1_add   <= (op == OP_ADD) || (op == OP_SUB);
    s1_lo    <= lo_s;
    s1_hi0   <= hi_s0;
    s1_hi1   <= hi_s1;
    s1_other <= other;
    s2_res   <= s1_add ? {(s1_lo[16] ? s1_hi1 : s1_hi0), s1_lo[15:0]} : s1_other;
    dly_q[0] <= s2_res;
    for (int i = 1; i < ALU_LAT - 2; i++) dly_q[i] <= dly_q[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[ALU_LAT-2:0], in_valid};
  end

  assign result    = dly_q[ALU_LAT-3];
  assign out_valid = v_q[ALU_LAT-1];
endmodule
