// tb_int_alu: unit test of the INT32/UINT32 ALU.
//
// One random operation per cycle over all ten functions and both integer
// types; each result is compared, four cycles later, with a reference written
// with SystemVerilog's own operators.  Directed cases hit the carry between
// the two 16-bit halves of the carry-select adder.
module tb_int_alu;
  import egpu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  opcode_e op;
  num_type_e typ;
  logic [31:0] a, b, result;

  int_alu dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [31:0] e;
    int t;
    checks++;
    e = exp_q.pop_front();
    t = t_q.pop_front();
    if (result !== e || cyc - t != ALU_LAT) begin
      failures++;
      if (failures < 10) $display("FAIL got %h expected %h latency %0d", result, e, cyc - t);
    end
  end

  function automatic logic [31:0] model(opcode_e o, num_type_e ty, logic [31:0] x, logic [31:0] y);
    logic signed [31:0] sp;
    case (o)
      OP_ADD: return x + y;
      OP_SUB: return x - y;
      OP_MUL: begin
        if (ty == T_INT32) begin
          sp = $signed({{16{x[15]}}, x[15:0]}) * $signed({{16{y[15]}}, y[15:0]});
          return sp;
        end
        return {16'h0, x[15:0]} * {16'h0, y[15:0]};
      end
      OP_AND: return x & y;
      OP_OR:  return x | y;
      OP_XOR: return x ^ y;
      OP_NOT: return ~x;
      OP_LSL: return x << y[4:0];
      OP_LSR: begin
        if (ty == T_INT32) begin
          sp = $signed(x) >>> y[4:0];
          return sp;
        end
        return x >> y[4:0];
      end
      default: return 0;
    endcase
  endfunction

  task automatic issue(input opcode_e o, input num_type_e ty, input logic [31:0] x, input logic [31:0] y);
    @(negedge clk);
    in_valid = 1; op = o; typ = ty; a = x; b = y;
    exp_q.push_back(model(o, ty, x, y));
    t_q.push_back(cyc);
  endtask

  initial begin
    opcode_e ops [10] = '{OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR, OP_XOR, OP_NOT, OP_LSL, OP_LSR, OP_ADD};
    in_valid = 0; op = OP_ADD; typ = T_INT32; a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    issue(OP_ADD, T_INT32, 32'h0000_ffff, 32'h0000_0001);
    issue(OP_SUB, T_INT32, 32'h0001_0000, 32'h0000_0001);
    issue(OP_ADD, T_UINT32, 32'hffff_ffff, 32'h0000_0001);
    issue(OP_MUL, T_INT32, 32'h0000_ffff, 32'h0000_0002);
    issue(OP_MUL, T_UINT32, 32'h0000_ffff, 32'h0000_ffff);
    issue(OP_LSR, T_INT32, 32'h8000_0000, 32'd4);
    for (int i = 0; i < 3000; i++)
      issue(ops[$urandom_range(0, 9)], num_type_e'($urandom_range(0, 1)), $urandom, $urandom);
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
